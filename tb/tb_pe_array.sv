// tb_pe_array: self-checking test of the 16 x 16 PE array at full size.
//
// Each cycle the array takes 16 activations (one per PE) and 16 weights
// (shared by all PEs) and performs 256 multiply-accumulates: PE p, MAC m adds
// act[p] * wgt[m] (shifted right by 8) to acc[p][m]. The testbench streams
// random matrices A (16 x K) and B (K x 16) column by column / row by row,
// K cycles per product, and checks the 16 x 16 result against a 64-bit model
// with 24-bit saturation, one cycle after the last operand. It also checks
// the rate: a product of depth K finishes after exactly K enabled cycles,
// i.e. 256 MACs per cycle.
module tb_pe_array;
  import fdht_pkg::*;
  localparam int unsigned NP = 16, NM = 16;

  logic clk = 0, rst_n = 0;
  logic en = 0, clr = 0;
  logic signed [DW-1:0] act [NP];
  logic signed [DW-1:0] wgt [NM];
  logic signed [AW-1:0] acc [NP][NM];
  logic sat;
  int checks = 0, failures = 0, n_en = 0, macs = 0;
  longint model [NP][NM];

  pe_array #(.NP(NP), .NM(NM)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (en) n_en++;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat24(longint v);
    if (v > 8388607)  return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  initial begin
    foreach (act[p]) act[p] = '0;
    foreach (wgt[m]) wgt[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int K, en0;
      K = int'($urandom_range(1, 224));
      en0 = n_en;
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        en = 1; clr = (k == 0);
        foreach (act[p]) act[p] = DW'(int'($urandom_range(8000)) - 4000);
        foreach (wgt[m]) wgt[m] = DW'(int'($urandom_range(8000)) - 4000);
        if (n == 7) act[0] = 16'sh7fff;   // drive row 0 towards saturation
        if (n == 7) wgt[0] = 16'sh7fff;
        foreach (model[p, m]) begin
          model[p][m] = sat24((clr ? 64'sd0 : model[p][m]) +
                              ((longint'(act[p]) * longint'(wgt[m])) >>> PSHIFT));
          macs++;
        end
      end
      @(negedge clk);
      en = 0; clr = 0;
      checks++;
      if (n_en - en0 != K) begin failures++; $display("FAIL: %0d enabled cycles for K=%0d", n_en - en0, K); end
      foreach (model[p, m]) begin
        checks++;
        if (longint'(acc[p][m]) != model[p][m]) begin
          failures++;
          if (failures < 8) $display("FAIL: run %0d acc[%0d][%0d]=%0d expected %0d", n, p, m, acc[p][m], model[p][m]);
        end
      end
    end
    checks++;
    if (macs != 256 * n_en) begin failures++; $display("FAIL: %0d MACs in %0d cycles", macs, n_en); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
