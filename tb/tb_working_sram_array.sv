// tb_working_sram_array: self-checking test of the 2-D working-memory array.
//
// Fourteen banks (the full bank count, 32 rows each) are written one
// (bank, address, word mask) group at a time, and read all together at one
// address. A shadow array predicts every read. The test checks that a write
// lands only in the addressed bank, that all G banks return the addressed row
// in the same read, and that read data arrives one clock after the request.
module tb_working_sram_array;
  localparam int unsigned G = 14, WIDTH = 256, DEPTH = 32, NW = WIDTH / 16;
  localparam int unsigned ABW = $clog2(DEPTH), BW = $clog2(G);

  logic clk = 0;
  logic we = 0, re = 0;
  logic [BW-1:0] wbank = '0;
  logic [ABW-1:0] waddr = '0, raddr = '0;
  logic [NW-1:0] wmask = '0;
  logic [WIDTH-1:0] wdata = '0;
  logic [WIDTH-1:0] rdata [G];
  int checks = 0, failures = 0;

  logic [WIDTH-1:0] shadow [G][DEPTH];

  working_sram_array #(.G(G), .WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  task automatic read_check(input int a);
    @(negedge clk); re = 1; raddr = ABW'(a);
    @(negedge clk); re = 0;
    for (int b = 0; b < G; b++) begin
      checks++;
      if (rdata[b] !== shadow[b][a]) begin
        failures++;
        if (failures < 6) $display("FAIL: bank %0d row %0d read %h expected %h", b, a, rdata[b], shadow[b][a]);
      end
    end
  endtask

  initial begin
    for (int b = 0; b < G; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; wbank = BW'(b); waddr = ABW'(a); wmask = '1; wdata = rnd_word();
        shadow[b][a] = wdata;
      end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) read_check(a);
    // masked single-group writes, each followed by a read of that row
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      we = 1; wbank = BW'($urandom_range(G - 1)); waddr = ABW'($urandom_range(DEPTH - 1));
      wmask = NW'($urandom); wdata = rnd_word();
      for (int w = 0; w < NW; w++)
        if (wmask[w]) shadow[wbank][waddr][w*16 +: 16] = wdata[w*16 +: 16];
      if (n % 3 == 0) begin
        @(negedge clk); we = 0;
        read_check(int'(waddr));
      end
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) read_check(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
