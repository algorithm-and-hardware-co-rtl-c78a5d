// tb_main_controller: self-checking test of the step sequencer.
//
// The controller runs with the real PE array and write address generator; the
// testbench stands in for the read path (it serves rows of T' on the
// valid/ready port with random gaps), for the weight memory (a registered
// model indexed by the controller's weight address) and for both working
// copies (a model array written by the controller's group writes).
// A two-step chain is run:
//   step 0: T'0 (20 x 10, two row blocks) x B0 (10 x 18, two column tiles),
//           result written to copy 1 in layout X = 3, K = 2, Z = 4 with
//           8 segments per bank, so it folds into a second bank group;
//   step 1: T'1 = Type-II read of that result (30 x 12) x B1 (12 x 5),
//           streamed to the host as the last step.
// The testbench checks: the host load path into copy 0; the step-0 result
// decoded from the write model with its own counters; ping-pong selection
// (step s reads copy s%2 and writes copy 1-s%2); one write per run of
// elements inside a Z-word group; every streamed output; the done pulse; and
// the compute rate, i.e. the PE array is enabled for exactly
// sum(ceil(rows/16) * tiles * kred) cycles (256 MACs per enabled cycle).
module tb_main_controller;
  import fdht_pkg::*;
  localparam int unsigned G = 14, DEPTH = 16, WROWS = 551;
  localparam int unsigned KMAX = G * WORDS, ABW = $clog2(DEPTH), BW = $clog2(G);
  localparam int unsigned RAW = $clog2(WROWS), SW = $clog2(STEPS);

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [SW-1:0] cfg_idx = '0; step_t cfg_step = '0; logic [SW:0] nsteps = '0;
  logic in_valid = 0; logic [IDXW-1:0] in_idx = '0; logic signed [DW-1:0] in_data = '0;
  logic start = 0, busy, done, out_valid; logic [IDXW-1:0] out_idx; logic signed [DW-1:0] out_data;
  logic rd_start; xform_e rd_type; layout_t rd_lay; logic [IDXW-1:0] rd_reads; logic rd_sel;
  logic row_valid, row_ready; logic signed [DW-1:0] row_data [KMAX];
  layout_t wa_lay; logic [IDXW-1:0] wa_f; logic [BW-1:0] wa_bank; logic [ABW-1:0] wa_addr;
  logic [3:0] wa_z; logic [4:0] wa_room; logic wa_ovf;
  logic wr_en, wr_sel; logic [BW-1:0] wr_bank; logic [ABW-1:0] wr_addr;
  logic [WORDS-1:0] wr_mask; logic [WORDS*16-1:0] wr_data;
  logic w_re; logic [RAW-1:0] w_raddr;
  logic pe_en, pe_clr; logic signed [DW-1:0] pe_act [NPE]; logic signed [AW-1:0] pe_acc [NPE][NMAC];
  logic signed [DW-1:0] wgt [NMAC];
  logic pe_sat;
  int checks = 0, failures = 0;

  main_controller #(.G(G), .DEPTH(DEPTH), .WROWS(WROWS)) dut (.*);
  wr_addr_gen #(.G(G), .DEPTH(DEPTH)) u_wag (
    .lay(wa_lay), .f(wa_f), .bank(wa_bank), .addr(wa_addr), .z(wa_z), .room(wa_room), .overflow(wa_ovf));
  pe_array u_pe (.clk, .rst_n, .en(pe_en), .clr(pe_clr), .act(pe_act), .wgt, .acc(pe_acc), .sat(pe_sat));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference arithmetic --------------------------------------------------
  function automatic int sat24(longint v);
    if (v > 64'sd8388607)  return 8388607;
    if (v < -64'sd8388608) return -8388608;
    return int'(v);
  endfunction
  function automatic int rq(int acc, int sh);
    int v;
    v = acc >>> sh;
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction
  function automatic void matmul(input int a [], input int b [], input int rows, input int kr,
                                 input int n, input int sh, output int c []);
    longint acc;
    c = new[rows * n];
    for (int r = 0; r < rows; r++)
      for (int j = 0; j < n; j++) begin
        acc = 0;
        for (int k = 0; k < kr; k++)
          acc = longint'(sat24(acc + ((a[r * kr + k] * b[k * n + j]) >>> PSHIFT)));
        c[r * n + j] = rq(int'(acc), sh);
      end
  endfunction

  // chain sizes
  localparam int R0 = 20, K0 = 10, N0 = 18, SH0 = 4;
  localparam int X1 = 3, KD1 = 2, Z1 = 4, NS1 = DEPTH / KD1;
  localparam int K1 = X1 * Z1, R1 = R0 * N0 / K1, N1 = 5, SH1 = 5;
  int tp0 [], b0 [], p0 [], tp1 [], b1 [], p1 [];
  int wbase1;

  // ---- weight memory model: row wbase + ct*kred + k, lane l = B[k][ct*16+l] --
  logic signed [DW-1:0] wmem [WROWS][NMAC];
  always_ff @(posedge clk) if (w_re) wgt <= wmem[w_raddr];

  // ---- working-copy model ------------------------------------------------------
  logic signed [DW-1:0] smem [2][G][DEPTH][WORDS];
  bit                   swr  [2][G][DEPTH][WORDS];
  int n_wr [2];
  always @(posedge clk) if (wr_en) begin
    n_wr[wr_sel]++;
    for (int w = 0; w < int'(WORDS); w++)
      if (wr_mask[w]) begin
        smem[wr_sel][wr_bank][wr_addr][w] <= wr_data[w*16 +: 16];
        swr[wr_sel][wr_bank][wr_addr][w]  <= 1'b1;
      end
  end

  // ---- row source ---------------------------------------------------------------
  int step_i = -1, row_i = 0, rd_sel_err = 0, n_pe = 0;
  logic gap_ok = 1'b1;
  assign row_valid = (step_i >= 0) && (row_i < ((step_i == 0) ? R0 : R1)) && gap_ok;
  always_comb begin
    for (int i = 0; i < int'(KMAX); i++) row_data[i] = '0;
    if (step_i == 0 && row_i < R0) for (int k = 0; k < K0; k++) row_data[k] = DW'(tp0[row_i * K0 + k]);
    if (step_i == 1 && row_i < R1) for (int k = 0; k < K1; k++) row_data[k] = DW'(tp1[row_i * K1 + k]);
  end
  always @(posedge clk) if (rst_n) begin
    gap_ok <= ($urandom_range(3) != 0);
    if (rd_start) begin
      step_i <= step_i + 1; row_i <= 0;
      if (int'(rd_sel) != (step_i + 1) % 2) rd_sel_err++;
    end else if (row_valid && row_ready) row_i <= row_i + 1;
    if (pe_en) n_pe++;
  end

  // ---- output collector -------------------------------------------------------
  int got [R1 * N1];
  bit got_v [R1 * N1];
  int n_out = 0;
  always @(posedge clk) if (out_valid) begin
    n_out++;
    if (int'(out_idx) < R1 * N1) begin got[int'(out_idx)] = int'(out_data); got_v[int'(out_idx)] = 1'b1; end
  end

  function automatic layout_t L(int x, int k, int z, int ns);
    layout_t l;
    l = '0; l.x = 5'(x); l.k = DEPW'(k); l.z = 5'(z); l.nseg = DEPW'(ns);
    return l;
  endfunction

  initial begin
    step_t d;
    int cyc, exp_pe, exp_wr, flat, idx, bad;
    foreach (wgt[m]) wgt[m] = '0;
    foreach (wmem[r, l]) wmem[r][l] = '0;
    foreach (smem[c, b, a, w]) begin smem[c][b][a][w] = '0; swr[c][b][a][w] = 0; end
    foreach (got[i]) begin got[i] = 0; got_v[i] = 0; end
    n_wr[0] = 0; n_wr[1] = 0;
    // operands and reference
    tp0 = new[R0 * K0]; foreach (tp0[i]) tp0[i] = int'($urandom_range(4000)) - 2000;
    b0  = new[K0 * N0]; foreach (b0[i])  b0[i]  = int'($urandom_range(1600)) - 800;
    b1  = new[K1 * N1]; foreach (b1[i])  b1[i]  = int'($urandom_range(1600)) - 800;
    matmul(tp0, b0, R0, K0, N0, SH0, p0);
    // Type-II read of p0 in layout (X1, KD1, Z1): T'((a1*K+kk), (a2*Z+b2)) = flat(((a1*X+a2)*K+kk)*Z+b2)
    tp1 = new[R1 * K1];
    for (int a1 = 0; a1 < R0 * N0 / (X1 * KD1 * Z1); a1++)
      for (int a2 = 0; a2 < X1; a2++)
        for (int kk = 0; kk < KD1; kk++)
          for (int b2 = 0; b2 < Z1; b2++)
            tp1[(a1 * KD1 + kk) * K1 + a2 * Z1 + b2] = p0[((a1 * X1 + a2) * KD1 + kk) * Z1 + b2];
    matmul(tp1, b1, R1, K1, N1, SH1, p1);
    // weights in tile layout
    for (int ct = 0; ct < 2; ct++)
      for (int k = 0; k < K0; k++)
        for (int l = 0; l < 16; l++)
          wmem[ct * K0 + k][l] = (ct * 16 + l < N0) ? DW'(b0[k * N0 + ct * 16 + l]) : '0;
    wbase1 = 2 * K0;
    for (int k = 0; k < K1; k++)
      for (int l = 0; l < N1; l++) wmem[wbase1 + k][l] = DW'(b1[k * N1 + l]);

    repeat (2) @(negedge clk);
    rst_n = 1;
    // descriptors
    d = '0; d.rd_type = XF_II; d.rd = L(2, 1, 5, DEPTH); d.rd_reads = IDXW'(R0);
    d.wr = L(X1, KD1, Z1, NS1); d.ncols = 9'(N0); d.wbase = '0; d.shift = 5'(SH0); d.last = 0;
    @(negedge clk); cfg_we = 1; cfg_idx = 0; cfg_step = d;
    d = '0; d.rd_type = XF_II; d.rd = L(X1, KD1, Z1, NS1); d.rd_reads = IDXW'(R1);
    d.wr = L(X1, KD1, Z1, NS1); d.ncols = 9'(N1); d.wbase = 10'(wbase1); d.shift = 5'(SH1); d.last = 1;
    @(negedge clk); cfg_idx = 1; cfg_step = d;
    @(negedge clk); cfg_we = 0; nsteps = 2;
    // host load path: element i of the input goes to copy 0 in step 0's read layout
    // (X = 2, K = 1, Z = 5): bank (i/5) % 2, address i / 10, word i % 5
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); in_valid = 1; in_idx = IDXW'(i); in_data = DW'(i * 3 + 1);
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (smem[0][(i / 5) % 2][i / 10][i % 5] != DW'(i * 3 + 1) || n_wr[1] != 0) begin
        failures++; $display("FAIL: host load element %0d", i);
      end
    end
    // run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (!done && busy) begin failures++; $display("FAIL: chain did not finish"); end
    $display("chain took %0d cycles, %0d PE cycles, %0d writes to copy 1", cyc, n_pe, n_wr[1]);
    // step-0 result in copy 1, decoded with counters
    bad = 0; flat = 0;
    for (int y = 0; y < R0 * N0 / (X1 * KD1 * Z1); y++)
      for (int x = 0; x < X1; x++)
        for (int kk = 0; kk < KD1; kk++)
          for (int z = 0; z < Z1; z++) begin
            checks++;
            if (!swr[1][(y / NS1) * X1 + x][(y % NS1) * KD1 + kk][z] ||
                int'(smem[1][(y / NS1) * X1 + x][(y % NS1) * KD1 + kk][z]) != p0[flat]) begin
              failures++; bad++;
              if (bad < 6) $display("FAIL: step-0 element %0d wrong in copy 1", flat);
            end
            flat++;
          end
    // one write per run inside a Z-word group
    exp_wr = 0;
    for (int r = 0; r < R0; r++)
      for (int c = 0; c < N0; c++)
        if (c == 0 || c == 16 || ((r * N0 + c) % Z1) == 0) exp_wr++;
    checks++;
    if (n_wr[1] != exp_wr) begin failures++; $display("FAIL: %0d group writes, expected %0d", n_wr[1], exp_wr); end
    // streamed outputs
    for (int i = 0; i < R1 * N1; i++) begin
      checks++;
      if (!got_v[i] || got[i] != p1[i]) begin
        failures++;
        if (failures < 10) $display("FAIL: y[%0d]=%0d expected %0d", i, got[i], p1[i]);
      end
    end
    checks++;
    if (n_out != R1 * N1) begin failures++; $display("FAIL: %0d outputs, expected %0d", n_out, R1 * N1); end
    // ping-pong and rate
    checks++;
    if (rd_sel_err != 0 || step_i != 1) begin failures++; $display("FAIL: read copy selection"); end
    exp_pe = ((R0 + 15) / 16) * 2 * K0 + ((R1 + 15) / 16) * 1 * K1;
    checks++;
    if (n_pe != exp_pe) begin failures++; $display("FAIL: PE enabled %0d cycles, expected %0d", n_pe, exp_pe); end
    checks++;
    if (busy) begin failures++; $display("FAIL: still busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
