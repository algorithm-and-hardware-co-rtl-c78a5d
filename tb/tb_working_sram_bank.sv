// tb_working_sram_bank: self-checking test of one working-memory bank.
//
// A reduced bank (256 bits x 64 rows) receives random word-masked writes and
// random reads, often both in the same cycle. A shadow copy of the bank kept
// in the testbench predicts every read; the read data must appear exactly
// one clock after the read enable and hold while no read is issued.
// Every row is written in full first so that nothing undefined is ever read.
module tb_working_sram_bank;
  localparam int unsigned WIDTH = 256, DEPTH = 64, NW = WIDTH / 16;
  localparam int unsigned ABW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0, re = 0;
  logic [ABW-1:0] waddr = '0, raddr = '0;
  logic [NW-1:0] wmask = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  logic [WIDTH-1:0] shadow [DEPTH];
  logic [WIDTH-1:0] expect_q;
  logic             exp_valid = 0;

  working_sram_bank #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd_word();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    // fill every row
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = ABW'(a); wmask = '1; wdata = rnd_word();
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // check the read issued in the previous cycle (or the held value)
      if (exp_valid) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          if (failures < 6) $display("FAIL: cycle %0d read %h expected %h", n, rdata, expect_q);
        end
      end
      re    = ($urandom_range(3) != 0);
      we    = ($urandom_range(1) != 0);
      raddr = ABW'($urandom_range(DEPTH - 1));
      waddr = ABW'($urandom_range(DEPTH - 1));
      wmask = NW'($urandom);
      wdata = rnd_word();
      // read sees the contents before this cycle's write
      if (re) begin expect_q = shadow[raddr]; exp_valid = 1; end
      if (we)
        for (int w = 0; w < NW; w++)
          if (wmask[w]) shadow[waddr][w*16 +: 16] = wdata[w*16 +: 16];
    end
    @(negedge clk); we = 0; re = 0;
    // final sweep
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1; raddr = ABW'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== shadow[a]) begin failures++; $display("FAIL: sweep row %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
