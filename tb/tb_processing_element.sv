// tb_processing_element -- self-checking test of one processing element.
//
// The testbench plays the controller and the four neighbours: it broadcasts
// instructions with random operands and random neighbour registers, and keeps
// its own copy of A, R and S computed with integer arithmetic (signed values
// via sign extension, carries via 17-bit sums).  After every cycle the PE's
// registers must equal the copy.  Directed cases cover the cases the random
// stream is unlikely to hit: inactive PE, RAM write, S clear, each chain mode,
// carry chaining and the one-cycle latency of every operation.
module tb_processing_element;
  import cpm_pkg::*;
  localparam int W = 16;

  logic         clk = 0, rst_n = 0;
  logic         active, instr_valid, wr_en, clr_s, s_left;
  logic [0:0]   ctx;
  instr_t       instr;
  logic [W-1:0] operand, wr_data;
  logic [W-1:0] nb_r [4];
  logic [W-1:0] a, r;
  logic         s;
  int checks = 0, failures = 0;

  // reference state
  int unsigned ma, mr;
  bit          ms;

  processing_element #(.W(W), .NCTX(2)) dut (.*);

  always #5 clk = ~clk;

  function automatic int unsigned val(src_e sel);
    case (sel)
      SRC_A: return ma;
      SRC_R: return mr;
      SRC_LEFT: return nb_r[0];
      SRC_RIGHT: return nb_r[1];
      SRC_UP: return nb_r[2];
      SRC_DOWN: return nb_r[3];
      SRC_DATA: return operand;
      default: return 0;
    endcase
  endfunction

  function automatic int sx(int unsigned v);
    return (v >= 32768) ? int'(v) - 65536 : int'(v);
  endfunction

  // Reference: next state after one cycle.
  task automatic model();
    int unsigned x, y, res;
    bit          lt, c, wd, ws, cnew;
    int          tot;
    if (instr_valid && active) begin
      x = val(instr.srcx); y = val(instr.srcy);
      lt = instr.sgn ? (sx(x) < sx(y)) : (x < y);
      wd = 0; ws = 0; res = 0; c = 0; cnew = ms;
      case (instr.op)
        OP_MOV: begin res = x; wd = 1; end
        OP_ADD: begin
          tot = int'(x) + int'(y) + int'(instr.carry && s_left);
          res = tot & 16'hFFFF; wd = 1;
          if (instr.carry) begin ws = 1; cnew = (tot > 65535); end
        end
        OP_SUB: begin
          tot = int'(x) - int'(y) - int'(instr.carry && s_left);
          res = tot & 16'hFFFF; wd = 1;
          if (instr.carry) begin ws = 1; cnew = (tot < 0); end
        end
        OP_MAX: begin res = lt ? y : x; wd = 1; end
        OP_MIN: begin res = lt ? x : y; wd = 1; end
        OP_ABS: begin res = (sx(x) < 0) ? ((-sx(x)) & 16'hFFFF) : x; wd = 1; end
        OP_EQ, OP_LT, OP_GT, OP_SSET: begin
          ws = 1;
          c = (instr.op == OP_EQ) ? (x == y) :
              (instr.op == OP_LT) ? lt :
              (instr.op == OP_GT) ? (!lt && x != y) : 1'b1;
          case (instr.chain)
            CH_SET: cnew = c;
            CH_AND: cnew = ms & c;
            CH_OR: cnew = ms | c;
            default: cnew = s_left & c;
          endcase
        end
        default: ;
      endcase
      if (wd && !wr_en) begin
        if (instr.dst == DST_A) ma = res; else mr = res;
      end
      if (ws && !clr_s) ms = cnew;
    end
    if (clr_s) ms = 0;
    if (wr_en) ma = wr_data;
  endtask

  task automatic compare(string what);
    checks++;
    if (a !== W'(ma) || r !== W'(mr) || s !== ms) begin
      failures++;
      $display("FAIL %s: instr=%p act=%b v=%b wr=%b clr=%b sl=%b", what, instr, active, instr_valid, wr_en, clr_s, s_left);
      $display("FAIL %s: op=%s a=%h r=%h s=%b expected a=%h r=%h s=%b",
               what, instr.op.name(), a, r, s, ma[15:0], mr[15:0], ms);
    end
  endtask

  task automatic step(string what);
    model();
    @(posedge clk); #1;
    compare(what);
  endtask

  task automatic idle();
    active = 0; instr_valid = 0; wr_en = 0; clr_s = 0; s_left = 0; ctx = 0;
    instr = mk(OP_NOP, DST_A, SRC_A, SRC_A);
    operand = '0; wr_data = '0;
    for (int i = 0; i < 4; i++) nb_r[i] = '0;
  endtask

  task automatic issue(instr_t i, logic [W-1:0] d, string what);
    idle(); active = 1; instr_valid = 1; instr = i; operand = d;
    step(what);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    ma = 0; mr = 0; ms = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    compare("reset");

    // RAM write then copy A to R, copy back
    wr_en = 1; wr_data = 16'h1234; step("ram write");
    issue(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO), 0, "A->R");
    if (r !== 16'h1234) begin failures++; $display("FAIL A->R value"); end
    checks++;
    issue(mk(OP_ADD, DST_A, SRC_A, SRC_DATA), 16'h0001, "A+data");
    checks++;
    if (a !== 16'h1235) begin failures++; $display("FAIL A+1 = %h", a); end
    // inactive PE ignores the instruction
    idle(); instr_valid = 1; instr = mk(OP_MOV, DST_A, SRC_DATA, SRC_ZERO); operand = 16'hBEEF;
    step("inactive");
    checks++;
    if (a !== 16'h1235) begin failures++; $display("FAIL inactive PE changed"); end
    // signed versus unsigned compare of 0xFFFF and 1
    wr_en = 1; wr_data = 16'hFFFF; active = 0; step("ram write 2");
    issue(mk(OP_LT, DST_A, SRC_A, SRC_DATA, CH_SET, 1'b1), 16'h0001, "signed lt");
    checks++; if (s !== 1'b1) begin failures++; $display("FAIL signed -1<1"); end
    issue(mk(OP_LT, DST_A, SRC_A, SRC_DATA, CH_SET, 1'b0), 16'h0001, "unsigned lt");
    checks++; if (s !== 1'b0) begin failures++; $display("FAIL unsigned 65535<1"); end
    // carry out of 0xFFFF + 1 and carry in from the left
    issue(mk(OP_ADD, DST_R, SRC_A, SRC_DATA, CH_SET, 1'b0, 1'b1), 16'h0001, "add carry out");
    checks++; if (s !== 1'b1 || r !== 16'h0000) begin failures++; $display("FAIL carry out"); end
    idle(); active = 1; instr_valid = 1; s_left = 1;
    instr = mk(OP_ADD, DST_R, SRC_ZERO, SRC_DATA, CH_SET, 1'b0, 1'b1); operand = 16'h0010;
    step("add carry in");
    checks++; if (r !== 16'h0011 || s !== 1'b0) begin failures++; $display("FAIL carry in"); end
    // S clear
    issue(mk(OP_SSET, DST_A, SRC_A, SRC_A), 0, "sset");
    idle(); clr_s = 1; step("clr_s");
    checks++; if (s !== 1'b0) begin failures++; $display("FAIL clr_s"); end

    // context switch: context 1 has its own A, context 0 keeps its value
    begin
      int unsigned a0;
      a0 = ma;
      idle(); ctx = 1; wr_en = 1; wr_data = 16'h0777;
      @(posedge clk); #1;
      checks++; if (a !== 16'h0777) begin failures++; $display("FAIL ctx1 write"); end
      idle(); ctx = 1; active = 1; instr_valid = 1;
      instr = mk(OP_ADD, DST_A, SRC_A, SRC_DATA); operand = 16'h0001;
      @(posedge clk); #1;
      checks++; if (a !== 16'h0778) begin failures++; $display("FAIL ctx1 add"); end
      idle(); #1;
      checks++; if (a !== W'(a0)) begin failures++; $display("FAIL ctx0 kept: %h expected %h", a, a0[15:0]); end
    end

    // random stream
    for (int t = 0; t < 5000; t++) begin
      instr_t i;
      idle();
      i = instr_t'($urandom);
      if ($urandom_range(0, 3) == 0) i.op = OP_NOP;
      else i.op = op_e'($urandom_range(1, 11));
      if (i.op == op_e'(7)) i.op = OP_EQ;
      instr = i;
      active = ($urandom_range(0, 7) != 0);
      instr_valid = ($urandom_range(0, 7) != 0);
      wr_en = ($urandom_range(0, 15) == 0);
      clr_s = ($urandom_range(0, 15) == 0);
      s_left = 1'($urandom);
      operand = W'($urandom);
      wr_data = W'($urandom);
      for (int k = 0; k < 4; k++) nb_r[k] = ($urandom_range(0, 3) == 0) ? operand : W'($urandom);
      step("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
