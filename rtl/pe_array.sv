// pe_array: the PE array, NPE PEs x NMAC multipliers (16 x 16 = 256 MACs per
// cycle in the design example).
//
// Output-stationary outer product: PE p holds 16 sums of one row of the
// result tile and multiplier m of every PE holds column m. Each cycle the
// array takes one column slice of the operand T' (act[p], one element of each
// of the NPE rows, same reduction index) and one row slice of the weight
// matrix (wgt[m], shared by all PEs), so after `kred` cycles acc[p][m] holds
// sum_k T'(r0+p, k) * B'(k, c0+m) for a 16 x 16 tile. `clr` on the first
// cycle of a tile restarts the sums. The PE and multiplier counts are the
// paper's; the dataflow is this design's choice (the paper does not give one).
module pe_array
  import fdht_pkg::*;
#(
  parameter int unsigned NP = NPE,
  parameter int unsigned NM = NMAC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,
  input  logic signed [DW-1:0]  act [NP],
  input  logic signed [DW-1:0]  wgt [NM],
  output logic signed [AW-1:0]  acc [NP][NM],
  output logic                  sat
);
  logic [NP-1:0] sat_p;
  for (genvar p = 0; p < NP; p++) begin : g_pe
    pe #(.NM(NM)) u_pe (
      .clk(clk), .rst_n(rst_n), .en(en), .clr(clr),
      .act(act[p]), .wgt(wgt), .acc(acc[p]), .sat(sat_p[p])
    );
  end
  assign sat = |sat_p;
endmodule
