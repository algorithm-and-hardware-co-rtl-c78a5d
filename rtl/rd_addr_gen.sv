// rd_addr_gen: read half of the address generator.
//
// Walks a matrix stored in the 2-D SRAM array in the read order of the paper:
// k (row within a segment) fastest, then y (segment). Since the physical row
// is ys*K + k, that is simply an address that counts up by one per read; when
// it reaches nseg*K the bank group `grp` advances and the address restarts at
// zero (bank folding, see wr_addr_gen). Every read addresses all banks at once.
// `start` loads a new walk of `reads` accesses; each cycle with `next` high
// while `busy` issues one read at `addr`/`grp` and advances. `last` marks the
// final read of the walk. The counting scheme is the paper's; the handshake
// is this design's.
module rd_addr_gen
  import fdht_pkg::*;
#(
  parameter int unsigned G     = 14,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned ABW  = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(G)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layout_t         lay,
  input  logic [IDXW-1:0] reads,
  input  logic            next,
  output logic            busy,
  output logic [ABW-1:0]  addr,
  output logic [BW-1:0]   grp,
  output logic            last
);
  logic [IDXW-1:0] remain;
  logic [IDXW-1:0] seg_rows;   // rows per bank actually used: nseg * K
  logic [IDXW-1:0] row_cnt;

  assign busy = (remain != '0);
  assign last = (remain == IDXW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain   <= '0;
      row_cnt  <= '0;
      grp      <= '0;
      seg_rows <= '0;
    end else if (start) begin
      remain   <= reads;
      row_cnt  <= '0;
      grp      <= '0;
      seg_rows <= IDXW'(lay.nseg) * IDXW'(lay.k);
    end else if (next && busy) begin
      remain <= remain - 1'b1;
      if (row_cnt + 1'b1 == seg_rows) begin
        row_cnt <= '0;
        grp     <= grp + 1'b1;
      end else begin
        row_cnt <= row_cnt + 1'b1;
      end
    end
  end

  assign addr = ABW'(row_cnt);
endmodule
