// parallel_counter -- counts the flagged PEs.
//
// The controller of a searchable memory may count all matches at once
// instead of enumerating them (the paper names a parallel counter for this
// and for histograms).  This is a population count of the request vector,
// written as a balanced adder tree: each level adds pairs of partial counts.
//
// Interface: req has one bit per PE; count is the number of set bits.
// Timing: combinational.
module parallel_counter #(
  parameter int N  = 64,
  parameter int CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  req,
  output logic [CW-1:0] count
);

  // Pad to a power of two so every tree level halves cleanly.
  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int P      = 1 << LEVELS;

  logic [CW-1:0] part [LEVELS+1][P];

  always_comb begin
    for (int i = 0; i < P; i++) part[0][i] = (i < N) ? CW'(req[i]) : '0;
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < P; i++) begin
        if (i < (P >> l)) part[l][i] = part[l-1][2*i] + part[l-1][2*i+1];
        else              part[l][i] = '0;
      end
    end
    count = part[LEVELS][0];
  end

endmodule
