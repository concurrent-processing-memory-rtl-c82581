// cpm_top -- a Concurrent Processing Memory device.
//
// A RAM whose every word sits in a processing element (PE).  To the host it is
// a synchronous memory on an address bus and a data bus; a second address
// space lets the host select a periodic set of PEs (start, end, increment) and
// broadcast one instruction that all selected PEs execute in the same cycle,
// using their own word, their neighbours' words and an operand from the data
// bus.  A priority encoder and a parallel counter report which PEs flagged a
// result.  This is the paper's architecture figure: identical PEs with
// nearest-neighbour links, and a controller holding the array decoder and the
// priority encoder, between an address bus and a data bus.  Each PE holds
// NCTX addressable registers so that the data of several jobs can stay in
// place; a controller register selects the current one (context switch).  The PE operation
// set is the content-computable member of the paper's family (CCM), which
// contains the movable, searchable and value-comparable members; MEMBER
// selects a smaller member of the family (cpm_pkg::member_e).
//
// Interface: see cpm_controller for the bus protocol and address map.  The
// chain_* ports are the two ends of the 1-D neighbour chain (left of element 0
// and right of element N-1), for cascading devices; tie them to zero for a
// single device.  Timing: one bus transfer or one broadcast instruction per
// clock; reads return one cycle later.
module cpm_top
  import cpm_pkg::*;
#(
  parameter int W      = 16,
  parameter int ROWS   = 8,
  parameter int COLS   = 8,
  parameter int ABUS_W = 20,
  parameter int NCTX   = 2,
  parameter member_e MEMBER = CCM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bus_en,
  input  logic              bus_we,
  input  logic [ABUS_W-1:0] bus_addr,
  input  logic [W-1:0]      bus_wdata,
  output logic [W-1:0]      bus_rdata,
  output logic              bus_rvalid,
  input  logic [W-1:0]      chain_left_r,
  input  logic              chain_left_s,
  input  logic [W-1:0]      chain_right_r,
  output logic [W-1:0]      chain_first_r,
  output logic [W-1:0]      chain_last_r,
  output logic              chain_last_s
);

  localparam int N   = ROWS * COLS;
  localparam int CXW = (NCTX > 1) ? $clog2(NCTX) : 1;

  logic [N-1:0] active, wr_en, clr_s, pe_s;
  logic         instr_valid;
  logic [CXW-1:0] ctx;
  instr_t       instr;
  logic [W-1:0] operand, wr_data;
  logic [W-1:0] pe_a [N];

  cpm_controller #(.N(N), .W(W), .ABUS_W(ABUS_W), .MEMBER(MEMBER), .NCTX(NCTX)) u_ctrl (
    .clk, .rst_n,
    .bus_en, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_rvalid,
    .active, .ctx, .instr_valid, .instr, .operand, .wr_en, .wr_data, .clr_s,
    .pe_a, .pe_s
  );

  pe_array #(.W(W), .ROWS(ROWS), .COLS(COLS), .MEMBER(MEMBER), .NCTX(NCTX)) u_array (
    .clk, .rst_n,
    .ctx,
    .active, .instr_valid, .instr, .operand, .wr_en, .wr_data, .clr_s,
    .chain_left_r, .chain_left_s, .chain_right_r,
    .chain_first_r, .chain_last_r, .chain_last_s,
    .a (pe_a),
    .r (),          // R is seen only by neighbouring PEs
    .s (pe_s)
  );

endmodule
