// tb_priority_encoder -- self-checking test of the priority encoder.
//
// Applies directed and random request vectors and checks index, valid and
// the one-hot grant against a scan from address 0 upwards done in the
// testbench.  Combinational block: 1 ns settle delay per vector.
module tb_priority_encoder;
  localparam int N  = 64;
  localparam int AW = 6;

  logic [N-1:0]  req, grant;
  logic [AW-1:0] idx;
  logic          valid;
  int checks = 0, failures = 0;

  priority_encoder #(.N(N), .AW(AW)) dut (.req, .idx, .valid, .grant);

  task automatic check(logic [N-1:0] v);
    int first = -1;
    req = v;
    #1;
    for (int i = 0; i < N; i++) if (v[i] && first < 0) first = i;
    checks++;
    if (first < 0) begin
      if (valid !== 1'b0 || grant !== '0) begin
        failures++; $display("FAIL empty req: valid=%b grant=%h", valid, grant);
      end
    end else begin
      if (valid !== 1'b1 || idx !== AW'(first) || grant !== (N'(1) << first)) begin
        failures++;
        $display("FAIL req=%h idx=%0d valid=%b grant=%h expected %0d", v, idx, valid, grant, first);
      end
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
    check(N'(1) << (N - 1));
    for (int i = 0; i < N; i++) check((N'(1) << i) | (N'(1) << (N - 1)));
    for (int t = 0; t < 2000; t++) begin
      logic [N-1:0] v;
      v = {$urandom, $urandom};
      // sparse vectors reach the high addresses too
      if (t % 2) v = v & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
