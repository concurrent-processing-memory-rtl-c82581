// tb_parallel_counter -- self-checking test of the parallel counter.
//
// Applies directed and random request vectors and compares the count with
// a bit-by-bit tally made in the testbench.  Combinational: 1 ns per vector.
module tb_parallel_counter;
  localparam int N  = 64;
  localparam int CW = 7;

  logic [N-1:0]  req;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  parallel_counter #(.N(N), .CW(CW)) dut (.req, .count);

  task automatic check(logic [N-1:0] v);
    int n = 0;
    req = v;
    #1;
    for (int i = 0; i < N; i++) n += int'(v[i]);
    checks++;
    if (count !== CW'(n)) begin
      failures++; $display("FAIL req=%h count=%0d expected %0d", v, count, n);
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
    check('0);
    check({N{1'b1}});
    for (int i = 0; i < N; i++) check(N'(1) << i);
    for (int t = 0; t < 2000; t++) check({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
