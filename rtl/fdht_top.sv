// fdht_top: FDHT-LSTM accelerator for hierarchical-Tucker (HT) layers.
//
// An FDHT-LSTM replaces the whole LSTM weight matrix [W V] by a small HT
// network, so one time step is a chain of small matrix products (Fig. 6 of
// the source paper: X' x U4', then x B34', x U3', x U2', x B12', x U1',
// x B1234'), with a permutation of the intermediate matrix T into T' between
// products. This top wires the blocks of that architecture:
//   - a PE array of NPE x NMAC MACs (16 x 16 = 256 MACs per cycle);
//   - two copies of the working memory, each a 2-D SRAM array of G banks
//     (ping-pong: a step reads one copy and writes the other);
//   - the weight SRAM holding the U' and B' factors;
//   - the address generator (write half places every product element so that
//     the next read yields T'; read half walks the array in address order);
//   - the assemble unit, which cuts each array read into rows of T';
//   - the main controller, which runs the steps.
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   w_*   writes one weight word (row, lane) while idle;
//   cfg_* writes a step descriptor while idle, nsteps gives the count;
//   in_*  writes one element of the input matrix (flat row-major index) while
//         idle; it is placed in the layout the first step reads;
//   start runs all steps; busy is high until done pulses; the last step's
//         product appears on out_valid/out_idx/out_data, one element a cycle,
//         out_idx being its flat row-major index.
// `sat` pulses when an accumulator saturates. The bias, sigmoid/tanh and cell
// update of the LSTM are not part of this block: the paper does not describe
// hardware for them, so the host applies them to the streamed result.
module fdht_top
  import fdht_pkg::*;
#(
  parameter int unsigned G      = 14,     // banks per working-SRAM copy
  parameter int unsigned SDEPTH = 2048,   // rows per bank (M)
  parameter int unsigned WDEPTH = 8808,   // weight words
  localparam int unsigned SWID  = WORDS * 16,
  localparam int unsigned KMAX  = G * WORDS,
  localparam int unsigned WROWS = (WDEPTH + NMAC - 1) / NMAC,
  localparam int unsigned ABW   = $clog2(SDEPTH),
  localparam int unsigned BW    = $clog2(G),
  localparam int unsigned RAW   = $clog2(WROWS),
  localparam int unsigned SW    = $clog2(STEPS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_we,
  input  logic [RAW-1:0]        w_addr,
  input  logic [3:0]            w_lane,
  input  logic signed [DW-1:0]  w_data,
  input  logic                  cfg_we,
  input  logic [SW-1:0]         cfg_idx,
  input  step_t                 cfg_step,
  input  logic [SW:0]           nsteps,
  input  logic                  in_valid,
  input  logic [IDXW-1:0]       in_idx,
  input  logic signed [DW-1:0]  in_data,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  out_valid,
  output logic [IDXW-1:0]       out_idx,
  output logic signed [DW-1:0]  out_data,
  output logic                  sat
);
  // controller <-> read path
  logic              rd_start, rd_sel, rd_busy, rd_req;
  xform_e            rd_type;
  layout_t           rd_lay;
  logic [IDXW-1:0]   rd_reads;
  logic [ABW-1:0]    rd_addr;
  logic [BW-1:0]     rd_grp;
  logic              row_valid, row_ready;
  logic signed [DW-1:0] row_data [KMAX];
  logic [SWID-1:0]   rdata0 [G];
  logic [SWID-1:0]   rdata1 [G];
  logic [SWID-1:0]   rdata  [G];
  logic              rd_sel_q;
  // controller <-> write path
  layout_t           wa_lay;
  logic [IDXW-1:0]   wa_f;
  logic [BW-1:0]     wa_bank;
  logic [ABW-1:0]    wa_addr;
  logic [3:0]        wa_z;
  logic [4:0]        wa_room;
  logic              wa_ovf;
  logic              wr_en, wr_sel;
  logic [BW-1:0]     wr_bank;
  logic [ABW-1:0]    wr_addr;
  logic [WORDS-1:0]  wr_mask;
  logic [SWID-1:0]   wr_data;
  // weights and PE array
  logic              w_re;
  logic [RAW-1:0]    w_raddr;
  logic signed [DW-1:0] wgt [NMAC];
  logic              pe_en, pe_clr;
  logic signed [DW-1:0] pe_act [NPE];
  logic signed [AW-1:0] pe_acc [NPE][NMAC];

  main_controller #(.G(G), .DEPTH(SDEPTH), .WROWS(WROWS)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_step, .nsteps,
    .in_valid, .in_idx, .in_data,
    .start, .busy, .done, .out_valid, .out_idx, .out_data,
    .rd_start, .rd_type, .rd_lay, .rd_reads, .rd_sel,
    .row_valid, .row_ready, .row_data,
    .wa_lay, .wa_f, .wa_bank, .wa_addr, .wa_z, .wa_room, .wa_ovf,
    .wr_en, .wr_sel, .wr_bank, .wr_addr, .wr_mask, .wr_data,
    .w_re, .w_raddr,
    .pe_en, .pe_clr, .pe_act, .pe_acc
  );

  // ---- address generator ------------------------------------------------------
  wr_addr_gen #(.G(G), .DEPTH(SDEPTH)) u_wag (
    .lay(wa_lay), .f(wa_f), .bank(wa_bank), .addr(wa_addr), .z(wa_z),
    .room(wa_room), .overflow(wa_ovf)
  );

  rd_addr_gen #(.G(G), .DEPTH(SDEPTH)) u_rag (
    .clk, .rst_n, .start(rd_start), .lay(rd_lay), .reads(rd_reads),
    .next(rd_req), .busy(rd_busy), .addr(rd_addr), .grp(rd_grp), .last()
  );

  // ---- ping-pong working SRAM (2-D SRAM arrays #1 and #2) ---------------------
  working_sram_array #(.G(G), .WIDTH(SWID), .DEPTH(SDEPTH)) u_wsram0 (
    .clk,
    .we(wr_en && !wr_sel), .wbank(wr_bank), .waddr(wr_addr), .wmask(wr_mask), .wdata(wr_data),
    .re(rd_req && !rd_sel), .raddr(rd_addr), .rdata(rdata0)
  );
  working_sram_array #(.G(G), .WIDTH(SWID), .DEPTH(SDEPTH)) u_wsram1 (
    .clk,
    .we(wr_en && wr_sel), .wbank(wr_bank), .waddr(wr_addr), .wmask(wr_mask), .wdata(wr_data),
    .re(rd_req && rd_sel), .raddr(rd_addr), .rdata(rdata1)
  );
  always_ff @(posedge clk) rd_sel_q <= rd_sel;
  assign rdata = rd_sel_q ? rdata1 : rdata0;

  // ---- assemble unit ------------------------------------------------------------
  assemble_unit #(.G(G)) u_au (
    .clk, .rst_n, .start(rd_start), .xtype(rd_type), .lay(rd_lay),
    .rd_busy, .rd_req, .rd_grp, .rdata,
    .row_valid, .row_ready, .row_data, .stall()
  );

  // ---- weight SRAM -----------------------------------------------------------------
  weight_sram #(.DEPTH(WDEPTH), .LANES(NMAC)) u_wgt (
    .clk, .we(w_we && !busy), .waddr(w_addr), .wlane(w_lane), .wdata(w_data),
    .re(w_re), .raddr(w_raddr), .rdata(wgt)
  );

  // ---- PE array ----------------------------------------------------------------------
  pe_array u_pe (
    .clk, .rst_n, .en(pe_en), .clr(pe_clr), .act(pe_act), .wgt(wgt),
    .acc(pe_acc), .sat
  );
endmodule
