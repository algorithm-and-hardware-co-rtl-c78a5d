// tb_assemble_unit: self-checking test of the assemble unit at full width.
//
// The testbench plays the read address generator and the SRAM array: it
// counts the reads the unit requests, gives each a random bank group, and one
// clock later puts a pattern word pat(read, bank, word) on the banks' output
// registers, which then hold until the next request, as the SRAM banks do.
// For Type I, II and III steps with random layouts it predicts every row of
// T' from the same pattern:
//   Type I  : X rows per read, row i = words 0..Z-1 of bank (g*X + i) % G
//   Type II : one row per read, word x*Z + w = word w of bank (g*X + x) % G
//   Type III: Z rows per read, row j, word x = word j of bank (g*X + x) % G
// with all words beyond the row length zero. `row_ready` is random in half
// of the runs, which exercises the stall and the read held in the output
// registers; with `row_ready` held high the test checks the rate: all
// rows * reads rows come out in reads * rows + 2 cycles (one row per cycle
// after two cycles of latency).
module tb_assemble_unit;
  import fdht_pkg::*;
  localparam int unsigned G = 14, KMAX = G * WORDS, BW = $clog2(G);

  logic clk = 0, rst_n = 0;
  logic start = 0;
  xform_e xtype = XF_II;
  layout_t lay = '0;
  logic rd_busy, rd_req;
  logic [BW-1:0] rd_grp = '0;
  logic [WORDS*16-1:0] rdata [G];
  logic row_valid, row_ready = 0, stall;
  logic signed [15:0] row_data [KMAX];
  int checks = 0, failures = 0, n_stall = 0;

  assemble_unit #(.G(G)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] pat(int n, int b, int w);
    return 16'(n * 293 + b * 17 + w * 3 + 1);
  endfunction

  // read source: request counter, bank group per read, SRAM output registers
  int reads_left = 0, n_issued = 0;
  int grp_of [$];
  always @(posedge clk) begin
    if (rd_req) begin
      for (int b = 0; b < G; b++)
        for (int w = 0; w < WORDS; w++) rdata[b][w*16 +: 16] <= pat(n_issued, b, w);
      grp_of.push_back(int'(rd_grp));
      n_issued++;
      reads_left--;
    end
    if (stall) n_stall++;
  end
  assign rd_busy = (reads_left > 0);

  initial begin
    foreach (rdata[b]) rdata[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 90; n++) begin
      int X, Z, R, nr, kr, rows_got, cyc, last_cyc, rd_i, row_i, bank;
      bit rnd_ready;
      logic signed [15:0] e;
      X = int'($urandom_range(1, G));
      Z = int'($urandom_range(1, 16));
      R = int'($urandom_range(1, 12));
      rnd_ready = (n % 2 == 1);
      @(negedge clk);
      xtype = xform_e'(n % 3);
      lay = '0; lay.x = 5'(X); lay.z = 5'(Z); lay.k = DEPW'(1); lay.nseg = DEPW'(1);
      nr = (xtype == XF_I) ? X : (xtype == XF_II) ? 1 : Z;
      kr = (xtype == XF_I) ? Z : (xtype == XF_II) ? X * Z : X;
      start = 1; reads_left = R; n_issued = 0; grp_of.delete();
      @(negedge clk); start = 0;
      rows_got = 0; cyc = 0; last_cyc = 0;
      while (rows_got < R * nr && cyc < 5000) begin
        row_ready = rnd_ready ? ($urandom_range(1) != 0) : 1'b1;
        rd_grp = BW'($urandom_range(3));
        #1;
        if (row_valid && row_ready) begin
          rd_i  = rows_got / nr;
          row_i = rows_got % nr;
          for (int i = 0; i < int'(KMAX); i++) begin
            e = '0;
            case (xtype)
              XF_I: if (i < Z) e = pat(rd_i, (grp_of[rd_i] * X + row_i) % G, i);
              XF_II: if (i < X * Z) e = pat(rd_i, (grp_of[rd_i] * X + i / Z) % G, i % Z);
              default: if (i < X) e = pat(rd_i, (grp_of[rd_i] * X + i) % G, row_i);
            endcase
            checks++;
            if (row_data[i] !== e) begin
              failures++;
              if (failures < 8) $display("FAIL: type %0d X%0d Z%0d read %0d row %0d word %0d got %h exp %h",
                                         xtype, X, Z, rd_i, row_i, i, row_data[i], e);
            end
          end
          rows_got++;
          last_cyc = cyc;
        end
        @(negedge clk);
        cyc++;
      end
      row_ready = 0;
      checks++;
      if (rows_got != R * nr || n_issued != R) begin
        failures++;
        $display("FAIL: %0d rows from %0d reads, expected %0d from %0d", rows_got, n_issued, R * nr, R);
      end
      if (!rnd_ready) begin
        checks++;
        if (last_cyc + 1 != R * nr + 2) begin
          failures++;
          $display("FAIL: type %0d: %0d rows took %0d cycles, expected %0d", xtype, R * nr, last_cyc + 1, R * nr + 2);
        end
      end
      repeat (2) @(negedge clk);
      checks++;
      if (row_valid) begin failures++; $display("FAIL: extra row after the last read"); end
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: no stall exercised"); end
    $display("stalls=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
