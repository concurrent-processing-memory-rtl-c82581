// tb_cpm_family -- the smaller members of the CPM family.
//
// Three devices share one host bus: a content movable memory (CMM), a
// content searchable memory (CSM) and a content value-comparable memory
// (CVM).  The same data and instructions go to all three, and the testbench
// checks that each member executes exactly the operations its level has:
// CMM moves content but keeps the increment at 1 and reports no matches;
// CSM also matches; CVM also orders (compare, max); none of them adds.
module tb_cpm_family;
  import cpm_pkg::*;
  localparam int W = 16, N = 16, ABUS_W = 20;
  localparam logic [ABUS_W-1:0] REGB = ABUS_W'(2) << (ABUS_W - 2);
  localparam logic [ABUS_W-1:0] INSB = ABUS_W'(3) << (ABUS_W - 2);

  logic              clk = 0, rst_n = 0;
  logic              bus_en = 0, bus_we = 0;
  logic [ABUS_W-1:0] bus_addr = '0;
  logic [W-1:0]      bus_wdata = '0;
  logic [W-1:0]      rdata [3];
  logic              rvalid [3];
  int checks = 0, failures = 0;
  logic [W-1:0]      vals [N];

  cpm_top #(.ROWS(4), .COLS(4), .MEMBER(CMM)) u_cmm (
    .clk, .rst_n, .bus_en, .bus_we, .bus_addr, .bus_wdata,
    .bus_rdata (rdata[0]), .bus_rvalid (rvalid[0]),
    .chain_left_r ('0), .chain_left_s (1'b0), .chain_right_r ('0),
    .chain_first_r (), .chain_last_r (), .chain_last_s ());
  cpm_top #(.ROWS(4), .COLS(4), .MEMBER(CSM)) u_csm (
    .clk, .rst_n, .bus_en, .bus_we, .bus_addr, .bus_wdata,
    .bus_rdata (rdata[1]), .bus_rvalid (rvalid[1]),
    .chain_left_r ('0), .chain_left_s (1'b0), .chain_right_r ('0),
    .chain_first_r (), .chain_last_r (), .chain_last_s ());
  cpm_top #(.ROWS(4), .COLS(4), .MEMBER(CVM)) u_cvm (
    .clk, .rst_n, .bus_en, .bus_we, .bus_addr, .bus_wdata,
    .bus_rdata (rdata[2]), .bus_rvalid (rvalid[2]),
    .chain_left_r ('0), .chain_left_s (1'b0), .chain_right_r ('0),
    .chain_first_r (), .chain_last_r (), .chain_last_s ());

  always #5 clk = ~clk;

  task automatic ck(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xfer(logic we, logic [ABUS_W-1:0] ad, logic [W-1:0] d);
    bus_en = 1; bus_we = we; bus_addr = ad; bus_wdata = d;
    @(posedge clk); #1;
    bus_en = 0; bus_we = 0;
  endtask

  // read the same address from all three members
  task automatic rd3(logic [ABUS_W-1:0] ad, output logic [W-1:0] d [3]);
    xfer(0, ad, '0);
    for (int m = 0; m < 3; m++) d[m] = rdata[m];
  endtask

  task automatic ex(instr_t i, logic [W-1:0] d = '0);
    xfer(1, INSB | ABUS_W'(i), d);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] d [3];
    int below;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    for (int k = 0; k < N; k++) begin
      vals[k] = W'($urandom_range(1, 50));
      xfer(1, ABUS_W'(k), vals[k]);
    end

    // increment: CMM keeps 1
    xfer(1, REGB | REG_INCR, 16'd4);
    rd3(REGB | REG_INCR, d);
    ck(d[0] == 1 && d[1] == 4 && d[2] == 4, "INCR per member");
    xfer(1, REGB | REG_INCR, 16'd1);

    // match: CSM and CVM find value vals[5]; CMM reports nothing
    ex(mk(OP_EQ, DST_A, SRC_A, SRC_DATA), vals[5]);
    rd3(REGB | REG_COUNT, d);
    begin
      int n;
      n = 0;
      for (int k = 0; k < N; k++) n += int'(vals[k] == vals[5]);
      ck(d[0] == 0 && int'(d[1]) == n && int'(d[2]) == n,
         $sformatf("match count %0d/%0d/%0d expected 0/%0d/%0d", d[0], d[1], d[2], n, n));
    end

    // ordering compare: only CVM; CSM keeps the previous match result
    ex(mk(OP_LT, DST_A, SRC_A, SRC_DATA), 16'd25);
    below = 0;
    for (int k = 0; k < N; k++) below += int'(vals[k] < 25);
    rd3(REGB | REG_COUNT, d);
    ck(int'(d[2]) == below, "CVM threshold");
    begin
      int n;
      n = 0;
      for (int k = 0; k < N; k++) n += int'(vals[k] == vals[5]);
      ck(int'(d[1]) == n, "CSM ignores LT");
    end

    // max with the left neighbour: only CVM
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    ex(mk(OP_MAX, DST_A, SRC_A, SRC_LEFT));
    for (int k = 0; k < N; k++) begin
      logic [W-1:0] mx;
      mx = (k == 0) ? vals[0] : ((vals[k-1] > vals[k]) ? vals[k-1] : vals[k]);
      rd3(ABUS_W'(k), d);
      ck(d[0] == vals[k] && d[1] == vals[k] && d[2] == mx, $sformatf("max at %0d", k));
    end

    // add: no member here adds
    ex(mk(OP_ADD, DST_A, SRC_A, SRC_DATA), 16'd100);
    rd3(ABUS_W'(3), d);
    ck(d[0] == vals[3] && d[1] == vals[3], "CMM/CSM ignore ADD");
    ck(d[2] == ((vals[2] > vals[3]) ? vals[2] : vals[3]), "CVM ignores ADD");

    // move: every member shifts content right by one
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    ex(mk(OP_MOV, DST_A, SRC_LEFT, SRC_ZERO));
    rd3(ABUS_W'(7), d);
    ck(d[0] == vals[6] && d[1] == vals[6], "move in CMM and CSM");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
