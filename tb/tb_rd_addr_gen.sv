// tb_rd_addr_gen: self-checking test of the read address walk.
//
// For random layouts and read counts the generator is started and advanced
// with `next` asserted on random cycles. Expected addresses come from
// counting (k inner, then segment y): address = (y % nseg) * K + k and
// bank group = y / nseg. The test checks every issued address and group, the
// `last` flag on the final read, and that `busy` is high for exactly the
// requested number of reads: one read is issued per cycle in which `next`
// is high, so a walk with `next` held high takes exactly `reads` cycles.
module tb_rd_addr_gen;
  import fdht_pkg::*;
  localparam int unsigned G = 14, DEPTH = 64;
  localparam int unsigned ABW = $clog2(DEPTH), BW = $clog2(G);

  logic clk = 0, rst_n = 0;
  logic start = 0, next = 0;
  layout_t lay = '0;
  logic [IDXW-1:0] reads = '0;
  logic busy, last;
  logic [ABW-1:0] addr;
  logic [BW-1:0] grp;
  int checks = 0, failures = 0;

  rd_addr_gen #(.G(G), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int K, NS, R, y, k, issued, cyc;
      bit gaps;
      K  = int'($urandom_range(1, 24));
      NS = DEPTH / K;
      R  = int'($urandom_range(1, 3 * NS * K));
      gaps = (n % 2 == 1);
      @(negedge clk);
      lay = '0; lay.x = 5'($urandom_range(1, 4)); lay.z = 5'($urandom_range(1, 16));
      lay.k = DEPW'(K); lay.nseg = DEPW'(NS);
      reads = IDXW'(R); start = 1;
      @(negedge clk); start = 0;
      y = 0; k = 0; issued = 0; cyc = 0;
      while (busy && cyc < 10000) begin
        next = gaps ? ($urandom_range(2) != 0) : 1'b1;
        #1;
        if (next) begin
          checks++;
          if (int'(addr) != (y % NS) * K + k || int'(grp) != y / NS || last != (issued == R - 1)) begin
            failures++;
            if (failures < 8) $display("FAIL: K%0d NS%0d read %0d got a%0d g%0d l%0d exp a%0d g%0d",
                                       K, NS, issued, addr, grp, last, (y % NS) * K + k, y / NS);
          end
          issued++;
          k++;
          if (k == K) begin k = 0; y++; end
        end
        @(negedge clk);
        cyc++;
      end
      next = 0;
      checks++;
      if (issued != R || (!gaps && cyc != R)) begin
        failures++;
        $display("FAIL: %0d reads issued in %0d cycles, expected %0d", issued, cyc, R);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
