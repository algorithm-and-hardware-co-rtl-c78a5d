// fdht_ref.svh: reference model and host driver shared by the end-to-end
// testbenches of fdht_top. Included inside a testbench module that declares
// clk, rst_n, the fdht_top port signals, localparams G, SDEPTH, WDEPTH and the
// counters `checks` and `failures`.
//
// The reference works on matrices as flat row-major int arrays. The
// permutation between steps uses the index formulas of the three
// transformation types directly (0-based), not the bank/address mapping of the
// hardware:
//   Type I  : T'(a*B1+b1, b2)               = T(a, b1*B2+b2)
//   Type II : T'((a1*K+kk), (a2*Z+b2))      = T_flat(((a1*X+a2)*K+kk)*Z+b2)
//   Type III: T'((a1*K+a3)*Z+b, a2)         = T_flat(((a1*X+a2)*K+a3)*Z+b)
// The product accumulates k = 0..kred-1 in order with the same 24-bit
// saturation and product scaling as the PE, then requantises. The result
// check also fails when most expected outputs are near zero, so that a chain
// whose values have decayed cannot hide a broken data path.

  typedef struct {
    xform_e t;
    int x, k, z, n, shift;
  } tstep_t;

  tstep_t  chain [$];
  int      cur_flat [];      // current matrix, row-major
  int      wmat [STEPS][];   // weights per step, kred x n row-major
  int      wbase_of [STEPS];
  int      got [];
  bit      got_v [];
  int      out_n;

  function automatic int f_kred(tstep_t s);
    case (s.t)
      XF_I:    return s.z;
      XF_II:   return s.x * s.z;
      default: return s.x;
    endcase
  endfunction

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

  // permute a flat matrix into T' (row-major, row length kred)
  function automatic void permute(input tstep_t s, input int src [], output int dst []);
    int tot, y, idx;
    tot = src.size();
    dst = new[tot];
    y   = tot / (s.x * s.k * s.z);
    case (s.t)
      XF_I: for (int i = 0; i < tot; i++) dst[i] = src[i];
      XF_II:
        for (int a1 = 0; a1 < y; a1++)
          for (int a2 = 0; a2 < s.x; a2++)
            for (int kk = 0; kk < s.k; kk++)
              for (int b2 = 0; b2 < s.z; b2++) begin
                idx = (a1 * s.k + kk) * (s.x * s.z) + (a2 * s.z + b2);
                dst[idx] = src[((a1 * s.x + a2) * s.k + kk) * s.z + b2];
              end
      default:
        for (int a1 = 0; a1 < y; a1++)
          for (int a2 = 0; a2 < s.x; a2++)
            for (int a3 = 0; a3 < s.k; a3++)
              for (int b = 0; b < s.z; b++) begin
                idx = ((a1 * s.k + a3) * s.z + b) * s.x + a2;
                dst[idx] = src[((a1 * s.x + a2) * s.k + a3) * s.z + b];
              end
    endcase
  endfunction

  // run the whole chain on the reference; result left in cur_flat.
  // A step whose shift is negative gets the smallest shift that brings its
  // largest accumulator below 8192, so values keep their scale down the chain.
  task automatic ref_run();
    int tp [];
    int nxt [];
    int accs [];
    int kr, rows, amax;
    longint acc;
    foreach (chain[si]) begin
      permute(chain[si], cur_flat, tp);
      kr   = f_kred(chain[si]);
      rows = tp.size() / kr;
      accs = new[rows * chain[si].n];
      amax = 0;
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < chain[si].n; c++) begin
          acc = 0;
          for (int k = 0; k < kr; k++)
            acc = longint'(sat24(acc + ((tp[r * kr + k] * wmat[si][k * chain[si].n + c]) >>> PSHIFT)));
          accs[r * chain[si].n + c] = int'(acc);
          if (acc > amax) amax = int'(acc);
          if (-acc > amax) amax = int'(-acc);
        end
      if (chain[si].shift < 0) begin
        chain[si].shift = 0;
        while ((amax >>> chain[si].shift) >= 8192) chain[si].shift++;
      end
      nxt = new[accs.size()];
      foreach (accs[i]) nxt[i] = rq(accs[i], chain[si].shift);
      cur_flat = nxt;
    end
  endtask

  // ---- host driver ---------------------------------------------------------------
  function automatic layout_t mk_lay(tstep_t s);
    layout_t l;
    l.x    = 5'(s.x);
    l.k    = DEPW'(s.k);
    l.z    = 5'(s.z);
    l.nseg = DEPW'(SDEPTH / s.k);
    return l;
  endfunction

  task automatic host_idle();
    w_we = 0; cfg_we = 0; in_valid = 0; start = 0;
    w_addr = '0; w_lane = '0; w_data = '0; cfg_idx = '0; cfg_step = '0;
    in_idx = '0; in_data = '0; nsteps = '0;
  endtask

  // load weights, descriptors and the input matrix into the DUT
  task automatic host_load(input int in_mat []);
    int wrow, kr, nt, tot;
    step_t d;
    wrow = 0;
    tot  = in_mat.size();
    foreach (chain[si]) begin
      kr = f_kred(chain[si]);
      nt = (chain[si].n + 15) / 16;
      wbase_of[si] = wrow;
      for (int ct = 0; ct < nt; ct++)
        for (int k = 0; k < kr; k++)
          for (int l = 0; l < 16; l++) begin
            @(negedge clk);
            w_we   = 1;
            w_addr = $bits(w_addr)'(wrow + ct * kr + k);
            w_lane = 4'(l);
            w_data = (ct * 16 + l < chain[si].n) ? 16'(wmat[si][k * chain[si].n + ct * 16 + l]) : 16'sd0;
          end
      wrow += nt * kr;
    end
    @(negedge clk); w_we = 0;
    foreach (chain[si]) begin
      // the operand layout must fit: K rows per segment, ceil(Y / nseg) * X banks
      checks++;
      if (chain[si].k > int'(SDEPTH) ||
          ((tot / (chain[si].x * chain[si].k * chain[si].z)) + SDEPTH / chain[si].k - 1)
            / (SDEPTH / chain[si].k) * chain[si].x > int'(G)) begin
        failures++;
        $display("FAIL: step %0d layout X=%0d K=%0d Z=%0d does not fit the array", si, chain[si].x, chain[si].k, chain[si].z);
      end
      d = '0;
      d.rd_type  = chain[si].t;
      d.rd       = mk_lay(chain[si]);
      d.rd_reads = IDXW'(tot / (chain[si].x * chain[si].z));   // Y*K reads
      d.wr       = (si + 1 < chain.size()) ? mk_lay(chain[si + 1]) : mk_lay(chain[si]);
      d.ncols    = 9'(chain[si].n);
      d.wbase    = 10'(wbase_of[si]);
      d.shift    = 5'(chain[si].shift);
      d.last     = (si + 1 == chain.size());
      @(negedge clk);
      cfg_we = 1; cfg_idx = $bits(cfg_idx)'(si); cfg_step = d;
      tot = tot / f_kred(chain[si]) * chain[si].n;
    end
    @(negedge clk); cfg_we = 0; nsteps = $bits(nsteps)'(chain.size());
    foreach (in_mat[i]) begin
      @(negedge clk);
      in_valid = 1; in_idx = IDXW'(i); in_data = 16'(in_mat[i]);
    end
    @(negedge clk); in_valid = 0;
  endtask

  // start, collect the streamed result, compare with the reference
  task automatic host_run_and_check(input int max_cycles, output int cycles);
    int n, bad, nz;
    out_n = cur_flat.size();
    got   = new[out_n];
    got_v = new[out_n];
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 0;
    while (!done && cycles < max_cycles) begin
      @(posedge clk); cycles++;
      if (out_valid) begin
        if (int'(out_idx) < out_n) begin
          got[out_idx] = int'(out_data);
          got_v[out_idx] = 1'b1;
        end else begin
          failures++;
          $display("FAIL: output index %0d out of range", out_idx);
        end
      end
    end
    if (!done) begin failures++; $display("FAIL: no done after %0d cycles", cycles); end
    bad = 0;
    nz  = 0;
    foreach (cur_flat[i]) if (cur_flat[i] > 1 || cur_flat[i] < -1) nz++;
    checks++;
    if (nz * 2 < out_n) begin
      failures++;
      $display("FAIL: only %0d of %0d expected outputs are outside -1..1; the test data are too weak", nz, out_n);
    end
    for (int i = 0; i < out_n; i++) begin
      checks++;
      if (!got_v[i] || got[i] != cur_flat[i]) begin
        failures++; bad++;
        if (bad <= 8) $display("FAIL: y[%0d] got %0d (valid %0d) expected %0d", i, got[i], got_v[i], cur_flat[i]);
      end
    end
  endtask

  // Fig. 6 chain of one HT layer with d = 4 as eight steps (type, X, K, Z, N).
  // The last transformation of the figure (moving r34 and r12 to the columns
  // together) takes two steps here: a Type III read multiplied by an identity
  // R12 x R12 matrix, then a Type II read.
  task automatic build_chain(input int i1, i2, i3, i4, o1, o2, o3, o4, rl, r34, r12, sh);
    tstep_t s;
    chain.delete();
    s = '{XF_II,  1,   1,                      i4,  o4 * rl,   sh}; chain.push_back(s); // X' x U4'
    s = '{XF_I,   o4,  1,                      rl,  r34 * rl,  sh}; chain.push_back(s); // (1)  x B34'
    s = '{XF_II,  i3,  o4 * r34,               rl,  o3,        sh}; chain.push_back(s); // (2)  x U3'
    s = '{XF_III, i2,  o4 * r34,               o3,  o2 * rl,   sh}; chain.push_back(s); // (3)  x U2'
    s = '{XF_I,   o2,  1,                      rl,  r12 * rl,  sh}; chain.push_back(s); // (4)  x B12'
    s = '{XF_II,  i1,  o4 * r34 * o3 * o2 * r12, rl, o1,       sh}; chain.push_back(s); // (5)  x U1'
    s = '{XF_III, r12, 1,                      o1,  r12,       0};  chain.push_back(s); // (6a) x I
    s = '{XF_II,  r34, o4 * o3 * o2 * o1,      r12, 1,         sh}; chain.push_back(s); // (6b) x B1234'
  endtask

  // random weights; the (6a) step gets the identity (1.0 = 256 in Q8)
  task automatic make_weights(input int wmax);
    int kr;
    foreach (chain[si]) begin
      kr = f_kred(chain[si]);
      wmat[si] = new[kr * chain[si].n];
      foreach (wmat[si][j]) begin
        if (si == 6) wmat[si][j] = ((j / chain[si].n) == (j % chain[si].n)) ? 256 : 0;
        else         wmat[si][j] = int'($urandom_range(2 * wmax)) - wmax;
      end
    end
  endtask
