// weight_sram: storage for the flattened HT weights (leaf frames U' and
// transfer tensors B').
//
// Holds DEPTH 16-bit words (8808 in the design example, the size of the
// UCF11 model). The words are organised as LANES side-by-side lanes of
// ceil(DEPTH/LANES) rows so that one read returns one row of a 16-column tile
// of a weight matrix, one weight for each multiplier column of the PE array.
// The host writes single words (row, lane). A read returns the row addressed in
// the previous cycle. The word count follows the paper; the lane organisation
// is this design's choice, since the paper does not say how 16 PEs are fed from
// a 16-bit wide memory.
module weight_sram #(
  parameter int unsigned DEPTH = 8808,
  parameter int unsigned LANES = 16,
  localparam int unsigned ROWS = (DEPTH + LANES - 1) / LANES,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned LW   = $clog2(LANES)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [RAW-1:0]          waddr,
  input  logic [LW-1:0]           wlane,
  input  logic signed [15:0]      wdata,
  input  logic                    re,
  input  logic [RAW-1:0]          raddr,
  output logic signed [15:0]      rdata [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [15:0] mem [ROWS];
    always_ff @(posedge clk) begin
      if (we && wlane == LW'(l)) mem[waddr] <= wdata;
      if (re) rdata[l] <= mem[raddr];
    end
  end
endmodule
