// working_sram_bank: one physical bank of the working memory.
//
// A synchronous SRAM with one write and one read port, WIDTH bits wide and DEPTH rows deep, split
// into 16-bit words that can be written one by one (a word-enable mask), so a
// group of Z < 16 words can be stored without disturbing its neighbours.
// A read returns the row addressed in the previous cycle (one cycle latency);
// the output register keeps its value while `re` is low.
// A write and a read in the same cycle are allowed; the read then returns the
// old contents. Width 256 and depth 2048 are the design example's; the word
// mask and the read-during-write behaviour are this design's choice. Written
// as an array, standing in for a foundry SRAM macro.
module working_sram_bank #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned NW   = WIDTH / 16,
  localparam int unsigned ABW  = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [ABW-1:0]   waddr,
  input  logic [NW-1:0]    wmask,   // one bit per 16-bit word
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [ABW-1:0]   raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int w = 0; w < NW; w++)
        if (wmask[w]) mem[waddr][w*16 +: 16] <= wdata[w*16 +: 16];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
