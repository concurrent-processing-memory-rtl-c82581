// processing_element -- one storage element of the Concurrent Processing Memory.
//
// Each PE holds one data word and executes, when activated, the instruction
// the controller broadcasts to all PEs.  Its state is:
//   A  the addressable register: the word the host reads and writes as RAM
//   R  the neighbouring register: the word the four nearest PEs can read
//   S  the status bit: result of the last match/compare, readable by the
//      PE to the right (for matches and additions spanning several PEs)
// This follows the paper's PE (Rules 1-3, the CSM status bit, the CCM ALU).
// The operation set is this design's choice: it is the smallest set that
// runs every algorithm the paper describes (moves, insertion and deletion,
// multi-PE match, threshold and local extremum search, section min/max/sum,
// neighbouring-vector filters, edge messengers, multi-word add).
//
// Interface: wr_en/wr_data is a RAM write of A from the data bus.  When
// instr_valid and active are both high the PE executes instr with the data-bus
// operand.  clr_s clears S (used by the priority encoder to step to the next
// match).  nb_r[] are the R registers of the left, right, up and down
// neighbours and s_left is S of the left neighbour.
//
// Family member: MEMBER selects which operations exist (cpm_pkg::op_supported);
// the default CCM has them all.  An operation the member lacks is a NOP.
//
// Context switch: the PE holds NCTX addressable registers.  The controller's
// context number ctx selects which one acts as A, for RAM access and for
// instructions alike; the others keep their contents, so the data of another
// job can stay in place (the paper lets a PE "contain multiple addressable
// registers" for this).  The number of them and the global selection are
// this design's choice.
//
// Timing: every operation completes in one clock cycle; A, R and S are
// flip-flops updated on the rising edge and reset to zero.  All PEs read their
// neighbours' R before any of them is updated, so a shift across the whole
// array is a single instruction.
module processing_element
  import cpm_pkg::*;
#(
  parameter int      W      = 16,
  parameter member_e MEMBER = CCM,
  parameter int      NCTX   = 2,
  parameter int CXW  = (NCTX > 1) ? $clog2(NCTX) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         active,
  input  logic [CXW-1:0] ctx,
  input  logic         instr_valid,
  input  instr_t       instr,
  input  logic [W-1:0] operand,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         clr_s,
  input  logic [W-1:0] nb_r [4],
  input  logic         s_left,
  output logic [W-1:0] a,          // A of the current context
  output logic [W-1:0] r,
  output logic         s
);

  logic [W-1:0] bank [NCTX];
  logic [W-1:0] x, y;
  logic [W:0]   sum;
  logic         cin;
  logic         x_lt_y, x_eq_y, cmp;
  logic [W-1:0] result;
  logic         writes_dst, writes_s, s_next;

  function automatic logic [W-1:0] pick(src_e sel, logic [W-1:0] a_q,
                                        logic [W-1:0] r_q,
                                        logic [W-1:0] nb [4],
                                        logic [W-1:0] op_d);
    unique case (sel)
      SRC_A:     return a_q;
      SRC_R:     return r_q;
      SRC_LEFT:  return nb[NB_LEFT];
      SRC_RIGHT: return nb[NB_RIGHT];
      SRC_UP:    return nb[NB_UP];
      SRC_DOWN:  return nb[NB_DOWN];
      SRC_DATA:  return op_d;
      default:   return '0;
    endcase
  endfunction

  // A is the addressable register of the current context.
  assign a = bank[(NCTX > 1) ? int'(ctx) : 0];

  always_comb begin
    x   = pick(instr.srcx, a, r, nb_r, operand);
    y   = pick(instr.srcy, a, r, nb_r, operand);
    cin = instr.carry & s_left;

    // Unsigned and signed ordering share one comparator: flipping the sign
    // bits turns a signed comparison into an unsigned one.
    x_eq_y = (x == y);
    if (instr.sgn) x_lt_y = ({~x[W-1], x[W-2:0]} < {~y[W-1], y[W-2:0]});
    else           x_lt_y = (x < y);

    sum        = '0;
    result     = '0;
    cmp        = 1'b0;
    writes_dst = 1'b0;
    writes_s   = 1'b0;
    s_next     = s;

    unique case (op_supported(MEMBER, instr.op) ? instr.op : OP_NOP)
      OP_MOV: begin result = x; writes_dst = 1'b1; end
      OP_ADD: begin
        sum = {1'b0, x} + {1'b0, y} + {{W{1'b0}}, cin};
        result = sum[W-1:0]; writes_dst = 1'b1;
        if (instr.carry) begin writes_s = 1'b1; s_next = sum[W]; end
      end
      OP_SUB: begin
        sum = {1'b0, x} - {1'b0, y} - {{W{1'b0}}, cin};
        result = sum[W-1:0]; writes_dst = 1'b1;
        if (instr.carry) begin writes_s = 1'b1; s_next = sum[W]; end
      end
      OP_MAX: begin result = x_lt_y ? y : x; writes_dst = 1'b1; end
      OP_MIN: begin result = x_lt_y ? x : y; writes_dst = 1'b1; end
      OP_ABS: begin result = x[W-1] ? -x : x; writes_dst = 1'b1; end
      OP_EQ:   begin cmp = x_eq_y;             writes_s = 1'b1; end
      OP_LT:   begin cmp = x_lt_y;             writes_s = 1'b1; end
      OP_GT:   begin cmp = !x_lt_y && !x_eq_y; writes_s = 1'b1; end
      OP_SSET: begin cmp = 1'b1;               writes_s = 1'b1; end
      default: ;
    endcase

    if (writes_s && !(instr.op inside {OP_ADD, OP_SUB})) begin
      unique case (instr.chain)
        CH_SET:  s_next = cmp;
        CH_AND:  s_next = s & cmp;
        CH_OR:   s_next = s | cmp;
        CH_LEFT: s_next = s_left & cmp;
      endcase
    end
  end

  wire exec = instr_valid && active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCTX; c++) bank[c] <= '0;
      r <= '0;
      s <= 1'b0;
    end else begin
      if (wr_en) begin
        bank[(NCTX > 1) ? int'(ctx) : 0] <= wr_data;
      end else if (exec && writes_dst) begin
        if (instr.dst == DST_A) bank[(NCTX > 1) ? int'(ctx) : 0] <= result;
        else                    r <= result;
      end
      if (clr_s)                 s <= 1'b0;
      else if (exec && writes_s) s <= s_next;
    end
  end

endmodule
