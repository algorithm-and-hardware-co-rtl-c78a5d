// tb_pe: self-checking test of one processing element (16 MACs).
//
// The PE multiplies one activation by 16 weights per cycle and adds each
// product, shifted right by 8 bits, into its own 24-bit saturating
// accumulator; `clr` starts a new sum. The testbench runs random dot products
// of random length, some with full-scale operands so that the accumulators
// saturate in both directions, and compares all 16 accumulators with a model
// computed in 64-bit integers. It checks that each enabled cycle performs
// one MAC per multiplier (the result is ready the cycle after the last
// operand), that the accumulators hold while `en` is low and that the `sat`
// flag rises exactly in the cycles where the model saturates.
module tb_pe;
  import fdht_pkg::*;
  localparam int unsigned NM = 16;

  logic clk = 0, rst_n = 0;
  logic en = 0, clr = 0;
  logic signed [DW-1:0] act = '0;
  logic signed [DW-1:0] wgt [NM];
  logic signed [AW-1:0] acc [NM];
  logic sat;
  int checks = 0, failures = 0, n_sat = 0;
  longint model [NM];

  pe #(.NM(NM)) dut (.*);

  always #5 clk = ~clk;

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
    foreach (wgt[m]) wgt[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int len;
      bit big, exp_sat;
      len = int'($urandom_range(1, 40));
      big = (n % 5 == 4);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = 1; clr = (c == 0);
        act = big ? (($urandom_range(1) != 0) ? 16'sh7fff : 16'sh8000) : DW'($urandom);
        exp_sat = 0;
        foreach (wgt[m]) begin
          longint s;
          wgt[m] = big ? (($urandom_range(1) != 0) ? 16'sh7fff : 16'sh8000) : DW'($urandom);
          s = (clr ? 64'sd0 : model[m]) + ((longint'(act) * longint'(wgt[m])) >>> PSHIFT);
          if (s != sat24(s)) exp_sat = 1;
          model[m] = sat24(s);
        end
        #1;
        checks++;
        if (sat != exp_sat) begin failures++; $display("FAIL: sat flag %0d expected %0d", sat, exp_sat); end
        if (exp_sat) n_sat++;
      end
      @(negedge clk);
      en = 0; clr = 0;
      // result is in place one cycle after the last operand and holds
      repeat (int'($urandom_range(1, 3))) begin
        foreach (acc[m]) begin
          checks++;
          if (longint'(acc[m]) != model[m]) begin
            failures++;
            if (failures < 8) $display("FAIL: run %0d mac %0d acc %0d expected %0d", n, m, acc[m], model[m]);
          end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
