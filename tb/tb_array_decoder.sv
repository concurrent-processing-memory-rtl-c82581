// tb_array_decoder -- self-checking test of the array decoder.
//
// Drives directed and random (start, end, increment) settings and compares
// every active bit with a set built independently by walking the addresses
// start, start+incr, ... up to end.  Combinational block: a 1 ns settle delay
// stands in for a clock.
module tb_array_decoder;
  localparam int N  = 64;
  localparam int AW = 6;

  logic [AW-1:0] start, end_addr, incr;
  logic [N-1:0]  active;
  int checks = 0, failures = 0;

  array_decoder #(.N(N), .AW(AW)) dut (.start, .end_addr, .incr, .active);

  function automatic logic [N-1:0] expect_set(int s, int e, int inc);
    logic [N-1:0] m = '0;
    if (inc == 0) begin
      if (s <= e) m[s] = 1'b1;
    end else begin
      for (int a = s; a <= e; a += inc) m[a] = 1'b1;
    end
    return m;
  endfunction

  task automatic check(int s, int e, int inc);
    logic [N-1:0] exp_m;
    start = AW'(s); end_addr = AW'(e); incr = AW'(inc);
    #1;
    exp_m = expect_set(s, e, inc);
    checks++;
    if (active !== exp_m) begin
      failures++;
      $display("FAIL start=%0d end=%0d incr=%0d active=%h expected=%h", s, e, inc, active, exp_m);
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
    check(0, 63, 1);     // whole array
    check(0, 63, 4);     // first field of 4-word items
    check(1, 63, 4);     // second field
    check(5, 20, 3);
    check(10, 9, 1);     // empty range
    check(7, 7, 1);      // single element
    check(3, 60, 0);     // increment 0: start only
    check(62, 63, 8);
    for (int t = 0; t < 2000; t++) begin
      int s, e, inc;
      s = $urandom_range(0, N - 1);
      e = $urandom_range(0, N - 1);
      inc = $urandom_range(0, N - 1);
      check(s, e, inc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
