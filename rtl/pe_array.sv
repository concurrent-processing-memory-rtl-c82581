// pe_array -- the ROWS x COLS mesh of processing elements.
//
// The paper lays a CPM of N PEs out as a square of sqrt(N) x sqrt(N) PEs,
// each wired to its nearest neighbours (Topology section).  Element address
// i = row*COLS + col.  Each PE reads the neighbouring register R of:
//   left  = element i-1      right = element i+1
//   up    = element i+COLS   down  = element i-COLS
// Left/right follow the element address, so they run along a row and carry
// on from the end of one row to the start of the next: the 1-D chain that the
// paper's array algorithms use.  Up/down give the second dimension that its
// 2-D filters and edge detection use.  Up/down links stop at the top and
// bottom rows (no wrap-around; the paper calls opposite-boundary links
// expensive) and read as zero there.  The two ends of the 1-D chain are
// brought out as ports so that devices can be cascaded into a longer chain,
// as drawn by the open arrow on the first PE of the architecture figure.
//
// Interface: ctx selects the addressable register in every PE (context
// switch); active/clr_s/wr_en are one bit per PE; instr, instr_valid,
// operand and wr_data are broadcast.  a/r/s expose every PE's registers to
// the controller (A for RAM reads, S for the encoder and counter).
// Timing: one instruction per clock, as in processing_element.
module pe_array
  import cpm_pkg::*;
#(
  parameter int W    = 16,
  parameter int ROWS = 8,
  parameter int COLS = 8,
  parameter member_e MEMBER = CCM,
  parameter int NCTX = 2,
  parameter int CXW  = (NCTX > 1) ? $clog2(NCTX) : 1,
  parameter int N    = ROWS * COLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] active,
  input  logic [CXW-1:0] ctx,
  input  logic         instr_valid,
  input  instr_t       instr,
  input  logic [W-1:0] operand,
  input  logic [N-1:0] wr_en,
  input  logic [W-1:0] wr_data,
  input  logic [N-1:0] clr_s,
  // 1-D chain ends
  input  logic [W-1:0] chain_left_r,    // R seen as left neighbour of PE 0
  input  logic         chain_left_s,    // S seen as left neighbour of PE 0
  input  logic [W-1:0] chain_right_r,   // R seen as right neighbour of PE N-1
  output logic [W-1:0] chain_first_r,   // R of PE 0
  output logic [W-1:0] chain_last_r,    // R of PE N-1
  output logic         chain_last_s,    // S of PE N-1
  // register views
  output logic [W-1:0] a [N],
  output logic [W-1:0] r [N],
  output logic [N-1:0] s
);

  for (genvar i = 0; i < N; i++) begin : g_pe
    logic [W-1:0] nb [4];
    logic         sl;
    logic         s_q;

    assign nb[NB_LEFT]  = (i == 0)        ? chain_left_r  : r[(i == 0) ? 0 : i - 1];
    assign nb[NB_RIGHT] = (i == N - 1)    ? chain_right_r : r[(i == N - 1) ? 0 : i + 1];
    assign nb[NB_UP]    = (i + COLS < N)  ? r[(i + COLS < N) ? i + COLS : 0] : '0;
    assign nb[NB_DOWN]  = (i >= COLS)     ? r[(i >= COLS) ? i - COLS : 0]    : '0;
    assign sl           = (i == 0)        ? chain_left_s  : s[(i == 0) ? 0 : i - 1];

    processing_element #(.W(W), .MEMBER(MEMBER), .NCTX(NCTX), .CXW(CXW)) u_pe (
      .clk, .rst_n,
      .ctx,
      .active      (active[i]),
      .instr_valid,
      .instr,
      .operand,
      .wr_en       (wr_en[i]),
      .wr_data,
      .clr_s       (clr_s[i]),
      .nb_r        (nb),
      .s_left      (sl),
      .a           (a[i]),
      .r           (r[i]),
      .s           (s_q)
    );
    assign s[i] = s_q;
  end

  assign chain_first_r = r[0];
  assign chain_last_r  = r[N-1];
  assign chain_last_s  = s[N-1];

endmodule
