// tb_pe_array -- self-checking test of the PE mesh and its neighbour links.
//
// Loads a distinct value into every PE, copies A to R, then pulls each
// neighbour's R into A (left, right, up, down) and checks every PE against the
// value the testbench expects from the element addressing
// (left = i-1, right = i+1, up = i+COLS, down = i-COLS, zero past the top and
// bottom rows, the chain ports past the two chain ends).  It also checks that
// only activated PEs execute, that a status bit travels along the chain with
// the left-chained match, and that the chain end ports show PE 0 and PE N-1.
module tb_pe_array;
  import cpm_pkg::*;
  localparam int W = 16, ROWS = 4, COLS = 5, N = ROWS * COLS;

  logic         clk = 0, rst_n = 0;
  logic [N-1:0] active, wr_en, clr_s;
  logic         instr_valid;
  logic [0:0]   ctx = 1'b0;
  instr_t       instr;
  logic [W-1:0] operand, wr_data;
  logic [W-1:0] chain_left_r, chain_right_r, chain_first_r, chain_last_r;
  logic         chain_left_s, chain_last_s;
  logic [W-1:0] a [N];
  logic [W-1:0] r [N];
  logic [N-1:0] s;
  int checks = 0, failures = 0;
  logic [W-1:0] init_v [N];

  pe_array #(.W(W), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  task automatic quiet();
    active = '0; wr_en = '0; clr_s = '0; instr_valid = 0;
    instr = mk(OP_NOP, DST_A, SRC_A, SRC_A); operand = '0; wr_data = '0;
  endtask

  task automatic run(instr_t i, logic [N-1:0] act, logic [W-1:0] d = '0);
    quiet(); instr = i; instr_valid = 1; active = act; operand = d;
    @(posedge clk); #1;
    quiet();
  endtask

  task automatic load_all();
    for (int k = 0; k < N; k++) begin
      quiet(); wr_en[k] = 1; wr_data = init_v[k];
      @(posedge clk); #1;
    end
    quiet();
    run(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO), '1);
  endtask

  task automatic expect_a(int k, logic [W-1:0] v, string what);
    checks++;
    if (a[k] !== v) begin
      failures++; $display("FAIL %s PE %0d: a=%h expected %h", what, k, a[k], v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    quiet();
    chain_left_r = 16'hAAAA; chain_right_r = 16'h5555; chain_left_s = 1'b0;
    for (int k = 0; k < N; k++) init_v[k] = W'(16'h100 + k * 3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    load_all();
    checks++;
    if (chain_first_r !== init_v[0] || chain_last_r !== init_v[N-1]) begin
      failures++; $display("FAIL chain end ports");
    end
    run(mk(OP_MOV, DST_A, SRC_LEFT, SRC_ZERO), '1);
    for (int k = 0; k < N; k++) expect_a(k, (k == 0) ? chain_left_r : init_v[k-1], "left");

    load_all();
    run(mk(OP_MOV, DST_A, SRC_RIGHT, SRC_ZERO), '1);
    for (int k = 0; k < N; k++) expect_a(k, (k == N - 1) ? chain_right_r : init_v[k+1], "right");

    load_all();
    run(mk(OP_MOV, DST_A, SRC_UP, SRC_ZERO), '1);
    for (int k = 0; k < N; k++) expect_a(k, (k + COLS < N) ? init_v[k+COLS] : '0, "up");

    load_all();
    run(mk(OP_MOV, DST_A, SRC_DOWN, SRC_ZERO), '1);
    for (int k = 0; k < N; k++) expect_a(k, (k >= COLS) ? init_v[k-COLS] : '0, "down");

    // only every third PE adds the operand
    load_all();
    begin
      logic [N-1:0] m = '0;
      for (int k = 0; k < N; k += 3) m[k] = 1'b1;
      run(mk(OP_ADD, DST_A, SRC_A, SRC_DATA), m, 16'd7);
      for (int k = 0; k < N; k++) expect_a(k, (k % 3 == 0) ? init_v[k] + 16'd7 : init_v[k], "masked add");
    end

    // status bit carried along the chain: S <= S_left & (A == A)
    run(mk(OP_EQ, DST_A, SRC_A, SRC_A), N'(1));              // S0 = 1 only
    for (int k = 1; k < 4; k++) run(mk(OP_EQ, DST_A, SRC_A, SRC_A, CH_LEFT), N'(1) << k);
    checks++;
    if (s[3:0] !== 4'b1111 || s[N-1:4] !== '0) begin
      failures++; $display("FAIL chained status %b", s);
    end
    // clear one status bit
    quiet(); clr_s[2] = 1; @(posedge clk); #1; quiet();
    checks++;
    if (s[3:0] !== 4'b1011) begin failures++; $display("FAIL clr_s %b", s); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
