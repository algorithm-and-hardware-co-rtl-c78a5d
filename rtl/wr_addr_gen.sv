// wr_addr_gen: write half of the address generator.
//
// Maps the element at flat position f = row*N + col of a product matrix T to
// its place in the 2-D SRAM array. With the layout (X, K, Z, nseg) of the
// matrix, f is read as the mixed-radix number ((y*X + x)*K + k)*Z + z: z is the
// word in the row, k the row in the segment, x the bank and y the segment.
// This one rule reproduces the write schemes of the basic transformation and
// of Types I, II and III: consecutive groups of Z words fill a segment along k,
// then move to the next bank along x, then to the next segment along y.
// When y runs past the nseg segments a bank holds, the matrix continues in the
// next group of X banks (bank = yg*X + x), which lets a tall matrix use banks
// the layout would leave idle; that folding is this design's addition.
// Purely combinational. `room` is the number of words left in the group from z
// on, so a caller can write up to `room` consecutive elements in one access.
module wr_addr_gen
  import fdht_pkg::*;
#(
  parameter int unsigned G     = 14,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned ABW  = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(G)
) (
  input  layout_t          lay,
  input  logic [IDXW-1:0]  f,
  output logic [BW-1:0]    bank,
  output logic [ABW-1:0]   addr,
  output logic [3:0]       z,
  output logic [4:0]       room,
  output logic             overflow   // element falls outside the G banks
);
  logic [IDXW-1:0] g, q, y, yg, ys;
  logic [IDXW-1:0] zz, kk, xx, bank_full;

  always_comb begin
    g  = f / IDXW'(lay.z);
    zz = f % IDXW'(lay.z);
    q  = g / IDXW'(lay.k);
    kk = g % IDXW'(lay.k);
    y  = q / IDXW'(lay.x);
    xx = q % IDXW'(lay.x);
    yg = y / IDXW'(lay.nseg);
    ys = y % IDXW'(lay.nseg);
    bank_full = yg * IDXW'(lay.x) + xx;
    bank     = BW'(bank_full);
    addr     = ABW'(ys * IDXW'(lay.k) + kk);
    z        = zz[3:0];
    room     = 5'(lay.z) - 5'(zz);
    overflow = (bank_full >= IDXW'(G));
  end
endmodule
