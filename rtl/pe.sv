// pe: one processing element of the PE array.
//
// NMAC 16-bit signed multipliers, each feeding its own 24-bit accumulator
// (16 and 16 in the design example). All multipliers share one activation
// `act`; multiplier m takes weight wgt[m]. With `en` high, accumulator m
// becomes sat24(acc[m] + ((act * wgt[m]) >>> PSHIFT)); `clr` starts a new
// sum from that product alone (or from zero when `en` is low). One MAC per
// multiplier per cycle, result visible the cycle after. Counts and widths
// are the paper's; the product scaling and saturation are this design's.
module pe
  import fdht_pkg::*;
#(
  parameter int unsigned NM = NMAC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  clr,
  input  logic signed [DW-1:0]  act,
  input  logic signed [DW-1:0]  wgt [NM],
  output logic signed [AW-1:0]  acc [NM],
  output logic                  sat        // some accumulator saturated this cycle
);
  logic [NM-1:0] sat_m;

  for (genvar m = 0; m < NM; m++) begin : g_mac
    logic signed [2*DW-1:0] prod;
    logic signed [AW+1:0]   base, sum;
    always_comb begin
      prod     = act * wgt[m];
      base     = clr ? '0 : (AW+2)'(acc[m]);
      sum      = base + (AW+2)'(prod >>> PSHIFT);
      sat_m[m] = en && (sum != (AW+2)'(sat_acc(sum)));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   acc[m] <= '0;
      else if (en)  acc[m] <= sat_acc(sum);
      else if (clr) acc[m] <= '0;
    end
  end

  assign sat = |sat_m;
endmodule
