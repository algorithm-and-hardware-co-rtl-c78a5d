// main_controller: runs the chain of multiply / transform steps of one
// HT-structured layer.
//
// The host loads up to STEPS step descriptors (step_t) and the count, writes
// the input matrix X' element by element (placed by the write address
// generator in the layout the first step reads) and pulses `start`. Step s
// reads working-SRAM copy s%2 and writes copy 1-s%2 (ping-pong); the last step
// streams its product to the host instead. For every step:
//   1. the read address generator and the assemble unit are restarted with the
//      step's read layout and transformation type;
//   2. LOAD: up to NPE rows of T' are taken from the assemble unit into the
//      operand stage (NPE x G*16 words);
//   3. COMP: for each 16-column tile of the product, kred cycles feed the PE
//      array one column of the stage and one weight-SRAM row each
//      (256 MACs per cycle), plus one cycle for the last MAC to land;
//   4. DRAIN: the 16 x 16 tile is requantised to 16 bits and written back,
//      each access storing the run of consecutive elements that falls into one
//      Z-word group of the write layout (so the write order is row-major within
//      a tile, and one access per group when tiles and groups line up);
//   then the next row block is loaded, until all rows of T' are done.
// Weight rows for column tile c of a step sit at wbase + c*kred + k.
// Sequencing through Fig. 6's steps and the ping-pong use of the working SRAM
// are the paper's; the descriptor format, the operand stage, the tile loop
// order and the host ports are this design's.
// The assertion at the end checks that no write leaves the G banks; its
// `disable iff` uses the asynchronous reset in a clocked context, which lint
// reports as a net used both synchronously and asynchronously. That use is
// for checking only and creates no logic.
module main_controller
  import fdht_pkg::*;
#(
  parameter int unsigned G     = 14,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WROWS = 551,
  localparam int unsigned KMAX = G * WORDS,
  localparam int unsigned ABW  = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(G),
  localparam int unsigned RAW  = $clog2(WROWS),
  localparam int unsigned SW   = $clog2(STEPS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host: descriptors, input matrix, start/done, results
  input  logic                   cfg_we,
  input  logic [SW-1:0]          cfg_idx,
  input  step_t                  cfg_step,
  input  logic [SW:0]            nsteps,
  input  logic                   in_valid,
  input  logic [IDXW-1:0]        in_idx,
  input  logic signed [DW-1:0]   in_data,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic                   out_valid,
  output logic [IDXW-1:0]        out_idx,
  output logic signed [DW-1:0]   out_data,
  // read address generator and assemble unit
  output logic                   rd_start,
  output xform_e                 rd_type,
  output layout_t                rd_lay,
  output logic [IDXW-1:0]        rd_reads,
  output logic                   rd_sel,      // working copy being read
  input  logic                   row_valid,
  output logic                   row_ready,
  input  logic signed [DW-1:0]   row_data [KMAX],
  // write address generator
  output layout_t                wa_lay,
  output logic [IDXW-1:0]        wa_f,
  input  logic [BW-1:0]          wa_bank,
  input  logic [ABW-1:0]         wa_addr,
  input  logic [3:0]             wa_z,
  input  logic [4:0]             wa_room,
  input  logic                   wa_ovf,
  // working SRAM write (to copy wr_sel)
  output logic                   wr_en,
  output logic                   wr_sel,
  output logic [BW-1:0]          wr_bank,
  output logic [ABW-1:0]         wr_addr,
  output logic [WORDS-1:0]       wr_mask,
  output logic [WORDS*16-1:0]    wr_data,
  // weight SRAM read
  output logic                   w_re,
  output logic [RAW-1:0]         w_raddr,
  // PE array
  output logic                   pe_en,
  output logic                   pe_clr,
  output logic signed [DW-1:0]   pe_act [NPE],
  input  logic signed [AW-1:0]   pe_acc [NPE][NMAC]
);
  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_LOAD, S_COMP, S_WAIT, S_DRAIN, S_NEXT} state_e;
  state_e state;

  step_t              steps [STEPS];
  step_t              cur;
  logic [SW:0]        s;                 // current step
  logic [8:0]         kred, kk;
  logic [IDXW-1:0]    rows, r0;          // T' rows, first row of the block
  logic [4:0]         ld_cnt, blk_rows, p;
  assign blk_rows = (rows - r0 < IDXW'(NPE)) ? 5'(rows - r0) : 5'(NPE);
  logic [4:0]         ntiles, ct;
  logic [4:0]         pos, tile_cols, len;
  logic signed [DW-1:0] stage [NPE][KMAX];
  logic               v_q, first_q;

  assign cur      = steps[s[SW-1:0]];
  assign kred     = kred_of(cur.rd_type, cur.rd);
  assign busy     = (state != S_IDLE);
  assign rd_type  = cur.rd_type;
  assign rd_lay   = cur.rd;
  assign rd_reads = cur.rd_reads;
  assign rd_sel   = s[0];
  assign wr_sel   = busy ? ~s[0] : 1'b0;

  // ---- descriptor memory ----------------------------------------------------
  always_ff @(posedge clk) if (cfg_we && !busy) steps[cfg_idx] <= cfg_step;

  // ---- operand stage load ----------------------------------------------------
  assign row_ready = (state == S_LOAD) && (ld_cnt < blk_rows);
  always_ff @(posedge clk) begin
    if (row_valid && row_ready) stage[ld_cnt[3:0]] <= row_data;
  end

  // ---- compute issue (weights arrive one cycle after the address) -----------
  assign w_re    = (state == S_COMP);
  assign w_raddr = RAW'(cur.wbase) + RAW'(ct * kred) + RAW'(kk);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0;
    end else begin
      v_q     <= (state == S_COMP);
      first_q <= (state == S_COMP) && (kk == '0);
    end
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < NPE; i++)
      pe_act[i] <= (state == S_COMP && 5'(i) < blk_rows) ? stage[i][kk[$clog2(KMAX)-1:0]] : '0;
  end
  assign pe_en  = v_q;
  assign pe_clr = first_q;

  // ---- drain: one group run per cycle ----------------------------------------
  logic [4:0] left;
  always_comb begin
    left    = tile_cols - pos;
    wa_lay  = busy ? cur.wr : steps[0].rd;
    wa_f    = busy ? (r0 + IDXW'(p)) * IDXW'(cur.ncols) + IDXW'(ct) * IDXW'(16) + IDXW'(pos)
                   : in_idx;
    len     = (cur.last) ? 5'd1 : ((wa_room < left) ? wa_room : left);
  end

  always_comb begin
    wr_en   = 1'b0;
    wr_bank = wa_bank;
    wr_addr = wa_addr;
    wr_mask = '0;
    wr_data = '0;
    if (!busy) begin
      wr_en = in_valid;
      wr_mask[wa_z] = 1'b1;
      wr_data[wa_z*16 +: 16] = in_data;
    end else if (state == S_DRAIN && !cur.last) begin
      wr_en = 1'b1;
      for (int j = 0; j < WORDS; j++) begin
        if (j >= int'(wa_z) && j < int'(wa_z) + int'(len)) begin
          wr_mask[j] = 1'b1;
          wr_data[j*16 +: 16] = requant(pe_acc[p[3:0]][(int'(pos) + j - int'(wa_z)) % NMAC], cur.shift);
        end
      end
    end
  end

  assign out_valid = (state == S_DRAIN) && cur.last;
  assign out_idx   = wa_f;
  assign out_data  = requant(pe_acc[p[3:0]][pos[3:0]], cur.shift);

  // ---- sequencing --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; s <= '0; done <= 1'b0; rd_start <= 1'b0;
      kk <= '0; rows <= '0; r0 <= '0; ld_cnt <= '0;       p <= '0; ntiles <= '0; ct <= '0; pos <= '0; tile_cols <= '0;
    end else begin
      done     <= 1'b0;
      rd_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          s     <= '0;
          state <= S_SETUP;
        end
        S_SETUP: begin
          rd_start <= 1'b1;
          rows     <= cur.rd_reads * IDXW'(rows_per_read(cur.rd_type, cur.rd));
          ntiles   <= 5'((10'(cur.ncols) + 10'd15) >> 4);
          r0       <= '0;
          ld_cnt   <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          if (row_valid && row_ready) ld_cnt <= ld_cnt + 1'b1;
          if (ld_cnt == blk_rows && ld_cnt != '0) begin
            ct        <= '0;
            kk        <= '0;
            tile_cols <= (cur.ncols < 9'd16) ? 5'(cur.ncols) : 5'd16;
            state     <= S_COMP;
          end
        end
        S_COMP: begin
          if (kk + 1'b1 == kred) state <= S_WAIT;
          else                   kk    <= kk + 1'b1;
        end
        S_WAIT: begin
          p     <= '0;
          pos   <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (pos + len == tile_cols) begin
            pos <= '0;
            if (p + 1'b1 == blk_rows) begin
              if (ct + 1'b1 < ntiles) begin
                ct        <= ct + 1'b1;
                kk        <= '0;
                tile_cols <= (cur.ncols - 9'({ct + 5'd1, 4'd0}) < 9'd16)
                             ? 5'(cur.ncols - 9'({ct + 5'd1, 4'd0})) : 5'd16;
                state     <= S_COMP;
              end else if (r0 + IDXW'(blk_rows) < rows) begin
                r0     <= r0 + IDXW'(blk_rows);
                ld_cnt <= '0;
                state  <= S_LOAD;
              end else begin
                state <= S_NEXT;
              end
            end else begin
              p <= p + 1'b1;
            end
          end else begin
            pos <= pos + len;
          end
        end
        S_NEXT: begin
          if (s + 1'b1 == nsteps) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            s     <= s + 1'b1;
            state <= S_SETUP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // every element written must land inside the G banks of the array
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) !(wr_en && wa_ovf);
  endproperty
  a_no_overflow: assert property (p_no_overflow);
endmodule
