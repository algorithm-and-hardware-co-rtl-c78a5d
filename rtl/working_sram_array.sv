// working_sram_array: the 2-D SRAM array holding the intermediate results.
//
// G physical banks of W bits x M rows. The controller views each bank as N
// segments of D rows (M = N x D) and stores one group of up to W/16 words of a
// matrix per (bank, segment, row). A write stores one group into one bank
// (word-enable mask selects the words). A read applies one address to all G
// banks at once and returns G x W bits one cycle later, which is how a row of
// the transformed matrix T' is fetched in a single access without conflicts.
// One instance is one copy of the ping-pong working memory. G, W and M are the
// design example's (14 x 256 bits x 2048); the one-write-one-read port set is
// this design's choice.
module working_sram_array #(
  parameter int unsigned G     = 14,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned NW   = WIDTH / 16,
  localparam int unsigned ABW  = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(G)
) (
  input  logic               clk,
  // write one group
  input  logic               we,
  input  logic [BW-1:0]      wbank,
  input  logic [ABW-1:0]     waddr,
  input  logic [NW-1:0]      wmask,
  input  logic [WIDTH-1:0]   wdata,
  // read all banks at one address
  input  logic               re,
  input  logic [ABW-1:0]     raddr,
  output logic [WIDTH-1:0]   rdata [G]
);
  for (genvar b = 0; b < G; b++) begin : g_bank
    working_sram_bank #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .we    (we && (wbank == BW'(b))),
      .waddr (waddr),
      .wmask (wmask),
      .wdata (wdata),
      .re    (re),
      .raddr (raddr),
      .rdata (rdata[b])
    );
  end
endmodule
