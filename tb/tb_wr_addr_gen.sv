// tb_wr_addr_gen: self-checking test of the write address mapping.
//
// Part 1 checks hand-worked placements of the small examples of the 2-D SRAM
// array: the generic row-to-segment example (G = 2, M = 4, two words per row,
// A1 = A2 = B1 = B2 = 2) and the Type-I example (A = 3, B1 = 3, B2 = 2).
// Part 2 walks random layouts element by element with nested counters
// (y, x, k, z), which gives the expected bank, address and word without any
// division, and compares every element, including the bank-group folding
// (segment y beyond the segments of one bank goes to bank group y / nseg),
// the room left in the group and the overflow flag.
// The module is combinational; there is no clock rate to check.
module tb_wr_addr_gen;
  import fdht_pkg::*;
  localparam int unsigned G = 14, DEPTH = 64;
  localparam int unsigned ABW = $clog2(DEPTH), BW = $clog2(G);

  layout_t lay = '0;
  logic [IDXW-1:0] f = '0;
  logic [BW-1:0] bank;
  logic [ABW-1:0] addr;
  logic [3:0] z;
  logic [4:0] room;
  logic overflow;
  int checks = 0, failures = 0;
  logic clk = 0;

  wr_addr_gen #(.G(G), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_at(input int idx, input int eb, input int ea, input int ez, input string what);
    f = IDXW'(idx);
    #1;
    checks++;
    if (int'(bank) != eb || int'(addr) != ea || int'(z) != ez) begin
      failures++;
      $display("FAIL: %s f=%0d got bank %0d addr %0d z %0d, expected %0d %0d %0d",
               what, idx, bank, addr, z, eb, ea, ez);
    end
  endtask

  function automatic layout_t L(int x, int k, int zz, int nseg);
    layout_t l;
    l.x = 5'(x); l.k = DEPW'(k); l.z = 5'(zz); l.nseg = DEPW'(nseg);
    return l;
  endfunction

  initial begin
    // ---- generic example: M is 4 x 4 ((A1 x A2) x (B1 x B2)), D = B1 = 2 ----
    // row r of M goes to bank r % A2, segment r / A2; group b1 to row b1 of the segment
    lay = L(2, 2, 2, 2);
    expect_at(0,  0, 0, 0, "M(1,1)");   // S(1,1,1,1)
    expect_at(3,  0, 1, 1, "M(1,4)");   // S(1,1,2,2)
    expect_at(4,  1, 0, 0, "M(2,1)");   // second bank, first segment
    expect_at(7,  1, 1, 1, "M(2,4)");
    expect_at(8,  0, 2, 0, "M(3,1)");   // first bank, second segment
    expect_at(15, 1, 3, 1, "M(4,4)");
    // ---- Type I example: T is 3 x (3 x 2), D = 1 ----
    lay = L(3, 1, 2, DEPTH);
    for (int a = 0; a < 3; a++)
      for (int b1 = 0; b1 < 3; b1++)
        for (int b2 = 0; b2 < 2; b2++)
          expect_at(a * 6 + b1 * 2 + b2, b1, a, b2, "typeI");
    // ---- random layouts, walked with counters ----
    for (int n = 0; n < 300; n++) begin
      int X, K, Z, NS, Y, idx, exp_bank, exp_addr;
      X  = int'($urandom_range(1, 6));
      Z  = int'($urandom_range(1, 16));
      K  = int'($urandom_range(1, 20));
      NS = DEPTH / K;
      Y  = int'($urandom_range(1, 3 * NS));
      lay = L(X, K, Z, NS);
      idx = 0;
      for (int y = 0; y < Y; y++)
        for (int x = 0; x < X; x++)
          for (int k = 0; k < K; k++)
            for (int zz = 0; zz < Z; zz++) begin
              exp_bank = (y / NS) * X + x;
              exp_addr = (y % NS) * K + k;
              f = IDXW'(idx);
              #1;
              checks++;
              if (overflow != (exp_bank >= int'(G)) || int'(room) != Z - zz ||
                  (exp_bank < int'(G) && (int'(bank) != exp_bank || int'(addr) != exp_addr || int'(z) != zz))) begin
                failures++;
                if (failures < 8)
                  $display("FAIL: X%0d K%0d Z%0d f=%0d got b%0d a%0d z%0d r%0d o%0d exp b%0d a%0d z%0d",
                           X, K, Z, idx, bank, addr, z, room, overflow, exp_bank, exp_addr, zz);
              end
              idx++;
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
