// tb_cpm_controller -- self-checking test of the bus interface and controller.
//
// The testbench is the host on the bus and also stands in for the PE array:
// it supplies every PE's A and S and watches the write enables, activation
// mask and instruction broadcast.  It checks the register reset values and
// read-back, the one-cycle read latency, RAM writes reaching exactly one PE,
// the activation mask for programmed start/end/increment, that an instruction
// write is broadcast in the same cycle with its operand, and the match index,
// match count and match-next clearing.
module tb_cpm_controller;
  import cpm_pkg::*;
  localparam int N = 64, W = 16, ABUS_W = 20, AW = 6;
  localparam logic [ABUS_W-1:0] REGB = ABUS_W'(2) << (ABUS_W - 2);
  localparam logic [ABUS_W-1:0] INSB = ABUS_W'(3) << (ABUS_W - 2);

  logic              clk = 0, rst_n = 0;
  logic              bus_en, bus_we;
  logic [ABUS_W-1:0] bus_addr;
  logic [W-1:0]      bus_wdata, bus_rdata;
  logic              bus_rvalid;
  logic [N-1:0]      active, wr_en, clr_s;
  logic [0:0]        ctx;
  logic              instr_valid;
  instr_t            instr;
  logic [W-1:0]      operand, wr_data;
  logic [W-1:0]      pe_a [N];
  logic [N-1:0]      pe_s;
  int checks = 0, failures = 0;

  cpm_controller #(.N(N), .W(W), .ABUS_W(ABUS_W), .NCTX(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic ck(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic bus_write(logic [ABUS_W-1:0] ad, logic [W-1:0] d);
    bus_en = 1; bus_we = 1; bus_addr = ad; bus_wdata = d;
    @(posedge clk); #1;
    bus_en = 0; bus_we = 0;
  endtask

  task automatic bus_read(logic [ABUS_W-1:0] ad, output logic [W-1:0] d);
    bus_en = 1; bus_we = 0; bus_addr = ad;
    @(posedge clk); #1;
    bus_en = 0;
    ck(bus_rvalid === 1'b1, "rvalid one cycle after read");
    d = bus_rdata;
    @(posedge clk); #1;
    ck(bus_rvalid === 1'b0, "rvalid drops");
  endtask

  function automatic logic [N-1:0] mask(int s, int e, int inc);
    logic [N-1:0] m = '0;
    for (int k = s; k <= e; k += inc) m[k] = 1'b1;
    return m;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] d;
    bus_en = 0; bus_we = 0; bus_addr = '0; bus_wdata = '0;
    for (int k = 0; k < N; k++) pe_a[k] = W'(16'h4000 + k * 5);
    pe_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    // reset values
    bus_read(REGB | REG_START, d); ck(d == 0, "START reset");
    bus_read(REGB | REG_END, d);   ck(d == N - 1, "END reset");
    bus_read(REGB | REG_INCR, d);  ck(d == 1, "INCR reset");
    ck(active === '1, "all PEs active after reset");
    bus_read(REGB | REG_CTX, d);   ck(d == 0 && ctx == 0, "CTX reset");
    bus_write(REGB | REG_CTX, 16'd1);
    ck(ctx == 1'b1, "CTX drives the PEs");
    bus_read(REGB | REG_CTX, d);   ck(d == 1, "CTX read back");
    bus_write(REGB | REG_CTX, 16'd0);

    // RAM reads from several PEs
    for (int k = 0; k < N; k += 7) begin
      bus_read(ABUS_W'(k), d); ck(d == 16'h4000 + k * 5, $sformatf("RAM read %0d", k));
    end

    // RAM write reaches exactly one PE, in the cycle of the transfer
    bus_en = 1; bus_we = 1; bus_addr = ABUS_W'(37); bus_wdata = 16'hCAFE; #1;
    ck(wr_en === (N'(1) << 37) && wr_data === 16'hCAFE && !instr_valid, "RAM write enable");
    @(posedge clk); #1; bus_en = 0; bus_we = 0; #1;
    ck(wr_en === '0, "write enable released");
    // a write past the last PE touches none
    bus_en = 1; bus_we = 1; bus_addr = ABUS_W'(N + 3); #1;
    ck(wr_en === '0, "out-of-range write ignored");
    @(posedge clk); #1; bus_en = 0; bus_we = 0;

    // activation
    bus_write(REGB | REG_START, 16'd3);
    bus_write(REGB | REG_END, 16'd50);
    bus_write(REGB | REG_INCR, 16'd4);
    #1 ck(active === mask(3, 50, 4), "active 3..50 step 4");
    bus_read(REGB | REG_INCR, d); ck(d == 4, "INCR read back");

    // instruction broadcast: address carries the instruction, data the operand
    begin
      instr_t i = mk(OP_ADD, DST_R, SRC_A, SRC_DATA, CH_AND, 1'b1, 1'b0);
      bus_en = 1; bus_we = 1; bus_addr = INSB | ABUS_W'(i); bus_wdata = 16'h0123; #1;
      ck(instr_valid === 1'b1 && instr === i && operand === 16'h0123 && wr_en === '0,
         "instruction broadcast");
      @(posedge clk); #1; bus_en = 0; bus_we = 0; #1;
      ck(instr_valid === 1'b0, "instruction lasts one cycle");
    end

    // match index and count only see activated PEs
    pe_s = '0;
    pe_s[2] = 1; pe_s[11] = 1; pe_s[19] = 1; pe_s[47] = 1; pe_s[60] = 1;
    bus_read(REGB | REG_COUNT, d); ck(d == 3, $sformatf("COUNT %0d", d));
    bus_read(REGB | REG_MATCH, d); ck(d == {1'b1, 15'd11}, $sformatf("MATCH %h", d));
    // match-next clears S of PE 11 only
    bus_en = 1; bus_we = 1; bus_addr = REGB | REG_MATCH_NEXT; #1;
    ck(clr_s === (N'(1) << 11), "match-next clears first match");
    @(posedge clk); #1; bus_en = 0; bus_we = 0;
    pe_s[11] = 0;
    bus_read(REGB | REG_MATCH, d); ck(d == {1'b1, 15'd19}, "MATCH after next");
    pe_s = '0;
    bus_read(REGB | REG_MATCH, d); ck(d[W-1] == 1'b0, "no match");
    bus_read(REGB | REG_COUNT, d); ck(d == 0, "COUNT zero");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
