// cpm_controller -- bus interface and array control of the CPM.
//
// The controller makes the CPM look like an ordinary synchronous RAM on an
// address bus and a data bus, and adds a control space selected by the top
// address bit (the paper's "extra address bit" that says whether the data
// bus holds a datum or an instruction):
//
//   addr[ABUS_W-1] = 0            RAM space: read/write A of PE addr[AW-1:0]
//   addr[ABUS_W-1:ABUS_W-2] = 10  controller registers, index addr[3:0]
//                                   0 START  1 END  2 INCR   (read/write)
//                                   3 MATCH  read {valid, index} of the lowest
//                                            activated PE with S set
//                                   4 COUNT  read number of activated PEs with S set
//                                   5 NEXT   write: clear S of that lowest PE
//                                   6 CTX    read/write: context number, which
//                                            of the PEs' addressable registers
//                                            is A
//   addr[ABUS_W-1:ABUS_W-2] = 11  instruction: addr[INSTR_W-1:0] is the
//                                 instruction word (cpm_pkg::instr_t), the data
//                                 bus carries its operand; write only
//
// It holds the array decoder (Rule 5: which PEs an instruction reaches), the
// priority encoder (Rule 6) and a parallel counter over the status bits of
// the activated PEs, as the paper places them inside the controller.  The
// register map, the bus protocol and the encoding are this design's own.
//
// Family member (MEMBER): the movable member CMM keeps the increment at 1
// and reports no matches, as the paper simplifies it; the others differ
// only in their PEs.
//
// Bus timing: a transfer is one cycle with bus_en high.  A write (RAM word,
// register or instruction) takes effect at that clock edge, so the host can
// issue one instruction per cycle.  Read data is returned registered, on
// bus_rdata with bus_rvalid high in the following cycle.  After reset START=0,
// END=N-1, INCR=1: every PE is activated.
module cpm_controller
  import cpm_pkg::*;
#(
  parameter int N      = 64,
  parameter int W      = 16,
  parameter int ABUS_W = 20,
  parameter member_e MEMBER = CCM,
  parameter int NCTX   = 2,
  parameter int AW     = (N > 1) ? $clog2(N) : 1,
  parameter int CXW    = (NCTX > 1) ? $clog2(NCTX) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host bus
  input  logic              bus_en,
  input  logic              bus_we,
  input  logic [ABUS_W-1:0] bus_addr,
  input  logic [W-1:0]      bus_wdata,
  output logic [W-1:0]      bus_rdata,
  output logic              bus_rvalid,
  // PE array
  output logic [N-1:0]      active,
  output logic [CXW-1:0]    ctx,
  output logic              instr_valid,
  output instr_t            instr,
  output logic [W-1:0]      operand,
  output logic [N-1:0]      wr_en,
  output logic [W-1:0]      wr_data,
  output logic [N-1:0]      clr_s,
  input  logic [W-1:0]      pe_a [N],
  input  logic [N-1:0]      pe_s
);

  localparam int CW = $clog2(N + 1);

  // The instruction word and the two space-select bits must fit the address
  // bus, PE addresses must fit below the select bit, and MATCH must hold an
  // index below its valid bit.
  if (ABUS_W < INSTR_W + 2 || ABUS_W - 1 < AW) begin : g_abus_check
    $error("ABUS_W too small for the instruction word or the PE address");
  end
  if (W < AW + 1 || W < CXW) begin : g_w_check
    $error("W too small for a match index");
  end

  logic [AW-1:0] start_q, end_q, incr_q;
  logic [N-1:0]  flags, grant;
  logic [AW-1:0] match_idx;
  logic          match_valid;
  logic [CW-1:0] match_count;

  // ---- address decode ----
  wire           ctrl_space = bus_addr[ABUS_W-1];
  wire           is_instr   = bus_en &&  ctrl_space &&  bus_addr[ABUS_W-2];
  wire           is_reg     = bus_en &&  ctrl_space && !bus_addr[ABUS_W-2];
  wire           is_ram     = bus_en && !ctrl_space;
  wire [3:0]     reg_idx    = bus_addr[3:0];
  wire [AW-1:0]  pe_idx     = bus_addr[AW-1:0];
  wire           pe_in_range = (ABUS_W - 1 <= AW) ? 1'b1
                             : (bus_addr[ABUS_W-2:0] < (ABUS_W-1)'(N));

  // ---- array decoder, priority encoder, parallel counter ----
  array_decoder #(.N(N), .AW(AW)) u_dec (
    .start    (start_q),
    .end_addr (end_q),
    .incr     (incr_q),
    .active   (active)
  );

  // The movable member has no status bits to report (no Rule 6).
  assign flags = (MEMBER == CMM) ? '0 : (pe_s & active);

  priority_encoder #(.N(N), .AW(AW)) u_penc (
    .req   (flags),
    .idx   (match_idx),
    .valid (match_valid),
    .grant (grant)
  );

  parallel_counter #(.N(N), .CW(CW)) u_cnt (
    .req   (flags),
    .count (match_count)
  );

  // ---- instruction broadcast and RAM write ----
  always_comb begin
    instr_valid = is_instr && bus_we;
    instr       = instr_t'(bus_addr[INSTR_W-1:0]);
    operand     = bus_wdata;
    wr_data     = bus_wdata;
    wr_en       = '0;
    if (is_ram && bus_we && pe_in_range) wr_en[pe_idx] = 1'b1;
    clr_s       = (is_reg && bus_we && reg_idx == REG_MATCH_NEXT) ? grant : '0;
  end

  // ---- controller registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= '0;
      end_q   <= AW'(N - 1);
      incr_q  <= AW'(1);
      ctx     <= '0;
    end else if (is_reg && bus_we) begin
      unique case (reg_idx)
        REG_START: start_q <= bus_wdata[AW-1:0];
        REG_END:   end_q   <= bus_wdata[AW-1:0];
        REG_INCR:  incr_q  <= (MEMBER == CMM) ? AW'(1) : bus_wdata[AW-1:0];
        REG_CTX:   ctx     <= (NCTX > 1) ? bus_wdata[CXW-1:0] : '0;
        default: ;
      endcase
    end
  end

  // ---- read path ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_rdata  <= '0;
      bus_rvalid <= 1'b0;
    end else begin
      bus_rvalid <= bus_en && !bus_we;
      if (bus_en && !bus_we) begin
        bus_rdata <= '0;
        if (is_ram) begin
          if (pe_in_range) bus_rdata <= pe_a[pe_idx];
        end else if (is_reg) begin
          unique case (reg_idx)
            REG_START: bus_rdata <= W'(start_q);
            REG_END:   bus_rdata <= W'(end_q);
            REG_INCR:  bus_rdata <= W'(incr_q);
            REG_MATCH: bus_rdata <= {match_valid, (W-1)'(match_idx)};
            REG_COUNT: bus_rdata <= W'(match_count);
            REG_CTX:   bus_rdata <= W'(ctx);
            default:   bus_rdata <= '0;
          endcase
        end
      end
    end
  end

  // ---- bus rules ----
  // The instruction space is write-only.
  a_instr_write_only: assert property (@(posedge clk) disable iff (!rst_n)
    is_instr |-> bus_we);
  // At most one PE takes a RAM write, and never together with an instruction.
  a_single_write: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(wr_en) && !(|wr_en && instr_valid));

endmodule
