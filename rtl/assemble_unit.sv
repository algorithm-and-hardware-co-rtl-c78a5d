// assemble_unit: forms rows of the transformed matrix T' from array reads.
//
// It asks the read address generator for one access at a time (`rd_req`).
// One cycle after the access the G x 256-bit read is available; the unit keeps
// the X banks of the addressed bank group, Z words each, in its register file
// (G x 16 words = 448 bytes at the defaults, the size the paper quotes) and
// then hands out rows of T' on a valid/ready port, one row per cycle:
//   Type I   (Fig. 10): X rows, row i = the Z words of bank i;
//   Type II  (Figs. 9, 11): one row, the banks' Z-word groups side by side;
//   Type III (Fig. 12): Z rows, row j = word j of each of the X banks.
// Row words beyond the row length are zero. A read that arrives while the
// register file is still busy waits in the SRAM banks' output registers
// (they hold their value while no read is issued), so one read can be in
// flight while the rows of the previous one are handed out. While rows are
// refused (`row_ready` low) the unit stalls and issues no further reads. With
// `row_ready` high Type II streams one row per cycle after two cycles of
// latency; Types I and III give X or Z rows per read. Which rows the three types form follows the
// paper's figures; the handshake and request timing are this design's.
module assemble_unit
  import fdht_pkg::*;
#(
  parameter int unsigned G     = 14,
  localparam int unsigned KMAX = G * WORDS,
  localparam int unsigned BW   = $clog2(G)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,      // new step: latch type and layout
  input  xform_e                 xtype,
  input  layout_t                lay,
  // to/from the read address generator and the working SRAM
  input  logic                   rd_busy,    // reads remain in the walk
  output logic                   rd_req,     // issue one read this cycle
  input  logic [BW-1:0]          rd_grp,     // bank group of the issued read
  input  logic [WORDS*16-1:0]    rdata [G],  // array read data, one cycle after rd_req
  // rows of T'
  output logic                   row_valid,
  input  logic                   row_ready,
  output logic signed [15:0]     row_data [KMAX],
  output logic                   stall       // rows waiting but refused
);
  xform_e              t_q;
  layout_t             lay_q;
  logic signed [15:0]  rf [G][WORDS];        // the register file
  logic                full;                 // rf holds rows not yet all taken
  logic                pend;                 // the SRAM output registers hold a read not yet loaded
  logic [BW-1:0]       grp_q;
  logic [4:0]          row_idx, nrows;
  logic                take, last_row, load;

  assign nrows     = rows_per_read(t_q, lay_q);
  assign take      = row_valid && row_ready;
  assign last_row  = (row_idx + 1'b1 == nrows);
  assign load      = pend && (!full || (take && last_row));
  assign rd_req    = rd_busy && !start && (!pend || load);
  assign row_valid = full;
  assign stall     = full && !row_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q     <= XF_II;
      lay_q   <= '0;
      full    <= 1'b0;
      pend    <= 1'b0;
      grp_q   <= '0;
      row_idx <= '0;
    end else if (start) begin
      t_q     <= xtype;
      lay_q   <= lay;
      full    <= 1'b0;
      pend    <= 1'b0;
      row_idx <= '0;
    end else begin
      pend <= rd_req || (pend && !load);
      if (rd_req) grp_q <= rd_grp;
      if (take) begin
        if (last_row) row_idx <= '0;
        else          row_idx <= row_idx + 1'b1;
      end
      if (load)                  full <= 1'b1;
      else if (take && last_row) full <= 1'b0;
    end
  end

  // load the X banks of the addressed group from the SRAM output registers
  always_ff @(posedge clk) begin
    if (load) begin
      for (int x = 0; x < G; x++)
        for (int w = 0; w < WORDS; w++)
          rf[x][w] <= (x < int'(lay_q.x)) ? rdata[(int'(grp_q) * int'(lay_q.x) + x) % G][w*16 +: 16]
                                           : 16'sd0;
    end
  end

  // form the current row
  always_comb begin
    for (int i = 0; i < KMAX; i++) row_data[i] = '0;
    case (t_q)
      XF_I: begin
        for (int w = 0; w < WORDS; w++)
          if (w < int'(lay_q.z)) row_data[w] = rf[BW'(row_idx)][w];
      end
      XF_II: begin
        for (int x = 0; x < G; x++)
          for (int w = 0; w < WORDS; w++)
            if (x < int'(lay_q.x) && w < int'(lay_q.z))
              row_data[x * int'(lay_q.z) + w] = rf[x][w];
      end
      default: begin
        for (int x = 0; x < G; x++)
          if (x < int'(lay_q.x)) row_data[x] = rf[x][row_idx[3:0]];
      end
    endcase
  end
endmodule
