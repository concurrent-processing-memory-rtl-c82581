// array_decoder -- activates the PEs that hold one field of a periodic array.
//
// An array stored contiguously in memory is periodic: if every item takes
// incr words, the same field of all items sits at start, start+incr,
// start+2*incr, ...  The decoder raises active[i] for every element address i
// with start <= i <= end and (i - start) an integer multiple of incr, so one
// broadcast instruction reaches exactly that field of every item (the paper's
// Rule 5).  The paper gives only this rule; how it is computed is this
// design's choice: a plain comparison and remainder per element, which is
// purely combinational.  incr = 0 is taken to mean "start only".
//
// Interface: start, end_addr, incr are the controller's registers; active is
// one bit per PE.  Timing: combinational, no clock.
module array_decoder #(
  parameter int N  = 64,
  parameter int AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [AW-1:0] start,
  input  logic [AW-1:0] end_addr,
  input  logic [AW-1:0] incr,
  output logic [N-1:0]  active
);

  for (genvar i = 0; i < N; i++) begin : g_el
    localparam logic [AW-1:0] ADDR = AW'(i);
    logic [AW-1:0] offset;
    logic          on_step;
    always_comb begin
      offset = ADDR - start;
      if (incr == '0) on_step = (offset == '0);
      else            on_step = ((offset % incr) == '0);
      active[i] = (ADDR >= start) && (ADDR <= end_addr) && on_step;
    end
  end

endmodule
