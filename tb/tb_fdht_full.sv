// tb_fdht_full: one complete HT-layer evaluation on fdht_top at its default
// sizes (14 banks x 2048 x 256 bits per working copy, 8808 weight words,
// 16 x 16 MACs).
//
// The layer has input shape I = 8x8x8x15 (7680 inputs), output shape
// O = 4x4x4x4 (256 outputs), leaf rank 14 and non-leaf ranks 4: the UCF11
// configuration of the paper with I1..I3 halved and the non-leaf ranks reduced
// so that every intermediate matrix fits the array mapping (see the notes on
// capacity in the documentation). The eight-step chain runs with random
// weights and inputs, and all 256 outputs are compared with the reference
// model of fdht_ref.svh. The PE-array enable count is checked against
// sum(ceil(rows/16) * tiles * kred).
module tb_fdht_full;
  import fdht_pkg::*;
  localparam int unsigned G = 14, SDEPTH = 2048, WDEPTH = 8808;
  localparam int unsigned RAW = $clog2((WDEPTH + 15) / 16);

  logic clk = 0, rst_n = 0;
  logic w_we; logic [RAW-1:0] w_addr; logic [3:0] w_lane; logic signed [15:0] w_data;
  logic cfg_we; logic [2:0] cfg_idx; step_t cfg_step; logic [3:0] nsteps;
  logic in_valid; logic [IDXW-1:0] in_idx; logic signed [15:0] in_data;
  logic start, busy, done, out_valid, sat; logic [IDXW-1:0] out_idx; logic signed [15:0] out_data;
  int checks = 0, failures = 0;

  fdht_top dut (.*);

  always #5 clk = ~clk;

  `include "fdht_ref.svh"

  int n_pe = 0;
  always @(posedge clk) if (rst_n && dut.pe_en) n_pe++;

  int in_mat [];
  int cycles, exp_pe, tot, kr;

  initial begin
    host_idle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    build_chain(8, 8, 8, 15, 4, 4, 4, 4, 14, 4, 4, -1);
    make_weights(400);
    in_mat = new[8 * 8 * 8 * 15];
    foreach (in_mat[i]) in_mat[i] = int'($urandom_range(2000)) - 1000;
    cur_flat = in_mat;
    ref_run();
    exp_pe = 0; tot = in_mat.size();
    foreach (chain[si]) begin
      kr = f_kred(chain[si]);
      exp_pe += ((tot / kr + 15) / 16) * ((chain[si].n + 15) / 16) * kr;
      tot = tot / kr * chain[si].n;
    end
    host_load(in_mat);
    host_run_and_check(2000000, cycles);
    checks++;
    if (n_pe != exp_pe) begin failures++; $display("FAIL: PE enabled %0d cycles, expected %0d", n_pe, exp_pe); end
    $display("cycles=%0d pe_cycles=%0d", cycles, n_pe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
