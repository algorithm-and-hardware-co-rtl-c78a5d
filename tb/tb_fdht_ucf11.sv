// tb_fdht_ucf11: the part of the UCF11 video-recognition layer that the
// default-size accelerator can hold, run end to end.
//
// Layer shape: input 16x16x16x15 (57,600 features, 61,440 with the layout of
// the first step), output 4x4x4x4 (256 hidden units), leaf rank 14,
// non-leaf rank 12. At the default sizes (14 banks x 2048 x 256 bits per
// working copy, 458,752 words) only the first step of the chain can be held:
// X' (4096 x 15) x U4' (15 x 56) = 229,376 words. The product of the second
// step, 16384 x 168 = 2,752,512 words, exceeds one working copy (and the
// 20-bit element index), and the third step would need 16 banks per group.
// So the test loads the full input, runs the first step and streams its
// product to the host. Every output is compared with the reference model
// (fdht_ref.svh), and the PE-array enable count is checked against
// ceil(rows/16) * tiles * kred = 256 * 4 * 15.
module tb_fdht_ucf11;
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
    build_chain(16, 16, 16, 15, 4, 4, 4, 4, 14, 12, 12, -1);
    $display("step 2 needs %0d banks per group, the array has %0d", chain[2].x, G);
    while (chain.size() > 1) void'(chain.pop_back());
    make_weights(400);
    in_mat = new[16 * 16 * 16 * 15];
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
    host_run_and_check(1000000, cycles);
    checks++;
    if (n_pe != exp_pe) begin failures++; $display("FAIL: PE enabled %0d cycles, expected %0d", n_pe, exp_pe); end
    $display("outputs=%0d cycles=%0d pe_cycles=%0d", out_n, cycles, n_pe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
