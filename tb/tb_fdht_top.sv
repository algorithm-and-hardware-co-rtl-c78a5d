// tb_fdht_top: end-to-end test of the accelerator on a small HT layer.
//
// Runs the eight-step chain of one d = 4 HT layer (I = 4x3x3x5, O = 2x2x2x3,
// leaf rank 6, non-leaf ranks 2) through fdht_top with the working SRAM
// reduced to 64 rows per bank, so that the operand of the third step spills
// into a second bank group. The streamed result is compared element by element with the
// reference model of fdht_ref.svh. It also counts how often each mechanism
// occurred (Type I/II/III rows, bank-group folding, assemble-unit stalls,
// partial group writes, multi-tile products, saturation, both ping-pong
// copies written) and fails any that never did, and checks that the PE array
// was enabled for exactly sum(ceil(rows/16) * tiles * kred) cycles, i.e. that
// every enabled cycle does 256 MACs.
module tb_fdht_top;
  import fdht_pkg::*;
  localparam int unsigned G = 14, SDEPTH = 64, WDEPTH = 8808;
  localparam int unsigned RAW = $clog2((WDEPTH + 15) / 16);

  logic clk = 0, rst_n = 0;
  logic w_we; logic [RAW-1:0] w_addr; logic [3:0] w_lane; logic signed [15:0] w_data;
  logic cfg_we; logic [2:0] cfg_idx; step_t cfg_step; logic [3:0] nsteps;
  logic in_valid; logic [IDXW-1:0] in_idx; logic signed [15:0] in_data;
  logic start, busy, done, out_valid, sat; logic [IDXW-1:0] out_idx; logic signed [15:0] out_data;
  int checks = 0, failures = 0;

  fdht_top #(.G(G), .SDEPTH(SDEPTH), .WDEPTH(WDEPTH)) dut (.*);

  always #5 clk = ~clk;

  `include "fdht_ref.svh"

  // ---- mechanism counters ------------------------------------------------------
  int n_rows [3];
  int n_fold = 0, n_stall = 0, n_partial = 0, n_tile = 0, n_sat = 0, n_copy1 = 0, n_pe = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_au.row_valid && dut.u_au.row_ready) n_rows[int'(dut.u_au.t_q)]++;
    if (dut.rd_req && dut.rd_grp != 0) n_fold++;
    if (dut.u_au.stall) n_stall++;
    if (dut.wr_en && dut.busy && $countones(dut.wr_mask) < int'(dut.wa_lay.z)) n_partial++;
    if (dut.w_re && dut.u_ctrl.ct != 0) n_tile++;
    if (sat) n_sat++;
    if (dut.wr_en && dut.busy && dut.wr_sel) n_copy1++;
    if (dut.pe_en) n_pe++;
  end

  int in_mat [];
  int cycles, exp_pe, tot, kr;

  initial begin
    host_idle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    build_chain(4, 3, 3, 5, 2, 2, 2, 3, 6, 2, 2, -1);
    chain[0].shift = 6;   // fixed, so the forced full-scale terms saturate
    make_weights(300);
    kr = chain[0].n;   // force saturation in the first product
    wmat[0][0] = 32767; wmat[0][kr] = 32767; wmat[0][2 * kr] = 32767;
    in_mat = new[4 * 3 * 3 * 5];
    foreach (in_mat[i]) in_mat[i] = int'($urandom_range(1200)) - 600;
    in_mat[0] = 32767; in_mat[1] = 32767; in_mat[2] = 32767;
    cur_flat = in_mat;
    ref_run();
    // expected PE-enabled cycles
    exp_pe = 0; tot = in_mat.size();
    foreach (chain[si]) begin
      kr = f_kred(chain[si]);
      exp_pe += ((tot / kr + 15) / 16) * ((chain[si].n + 15) / 16) * kr;
      tot = tot / kr * chain[si].n;
    end
    host_load(in_mat);
    host_run_and_check(200000, cycles);
    checks++;
    if (n_pe != exp_pe) begin failures++; $display("FAIL: PE enabled %0d cycles, expected %0d", n_pe, exp_pe); end
    $display("cycles=%0d pe_cycles=%0d rowsI=%0d rowsII=%0d rowsIII=%0d fold=%0d stall=%0d partial=%0d tile=%0d sat=%0d copy1=%0d",
             cycles, n_pe, n_rows[0], n_rows[1], n_rows[2], n_fold, n_stall, n_partial, n_tile, n_sat, n_copy1);
    foreach (n_rows[i]) begin checks++; if (n_rows[i] == 0) begin failures++; $display("FAIL: no Type %0d rows", i + 1); end end
    checks++; if (n_fold == 0)    begin failures++; $display("FAIL: no bank-group folding"); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL: no assemble stall"); end
    checks++; if (n_partial == 0) begin failures++; $display("FAIL: no partial group write"); end
    checks++; if (n_tile == 0)    begin failures++; $display("FAIL: no multi-tile product"); end
    checks++; if (n_sat == 0)     begin failures++; $display("FAIL: no saturation"); end
    checks++; if (n_copy1 == 0)   begin failures++; $display("FAIL: second ping-pong copy never written"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
