// priority_encoder -- finds the lowest-addressed flagged PE.
//
// Activated PEs whose status bit is set identify themselves to the controller
// (the paper's Rule 6, as in a content-addressable memory).  The encoder
// returns the lowest such element address and a valid bit, so the host can
// enumerate all matches one at a time: read the index, clear that PE's flag,
// read again.  The lowest-address-first priority is this design's choice.
//
// Interface: req has one bit per PE; idx is the winning address and valid is
// high when any request bit is set; grant is the one-hot form of idx.
// Timing: combinational.
module priority_encoder #(
  parameter int N  = 64,
  parameter int AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  req,
  output logic [AW-1:0] idx,
  output logic          valid,
  output logic [N-1:0]  grant
);

  always_comb begin
    idx   = '0;
    valid = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        idx   = AW'(i);
        valid = 1'b1;
      end
    end
    grant = valid ? (N'(1) << idx) : '0;
  end

endmodule
