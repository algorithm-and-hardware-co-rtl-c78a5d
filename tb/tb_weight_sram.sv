// tb_weight_sram: self-checking test of the weight memory at full size.
//
// The 8808-word memory is organised as 16 lanes of 551 rows. Every lane of
// every row is written with a value derived from its position
// (v = (row*16 + lane) * 7 + 3, 16 bits), then random rows are read: all 16
// lanes of a row must come back together one clock after the read enable and
// hold while no read is issued. A second pass overwrites random single words
// and checks that neighbouring lanes are untouched.
module tb_weight_sram;
  localparam int unsigned DEPTH = 8808, LANES = 16;
  localparam int unsigned ROWS = (DEPTH + LANES - 1) / LANES;
  localparam int unsigned RAW = $clog2(ROWS), LW = $clog2(LANES);

  logic clk = 0;
  logic we = 0, re = 0;
  logic [RAW-1:0] waddr = '0, raddr = '0;
  logic [LW-1:0] wlane = '0;
  logic signed [15:0] wdata = '0;
  logic signed [15:0] rdata [LANES];
  int checks = 0, failures = 0;
  logic [15:0] shadow [ROWS][LANES];

  weight_sram #(.DEPTH(DEPTH), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int r);
    @(negedge clk); re = 1; raddr = RAW'(r);
    @(negedge clk); re = 0;
    repeat ($urandom_range(1)) @(negedge clk);   // data must hold
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rdata[l] !== shadow[r][l]) begin
        failures++;
        if (failures < 6) $display("FAIL: row %0d lane %0d read %h expected %h", r, l, rdata[l], shadow[r][l]);
      end
    end
  endtask

  initial begin
    if (ROWS != 551) begin failures++; $display("FAIL: %0d rows, expected 551", ROWS); end
    checks++;
    for (int r = 0; r < ROWS; r++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        we = 1; waddr = RAW'(r); wlane = LW'(l); wdata = 16'((r * 16 + l) * 7 + 3);
        shadow[r][l] = 16'((r * 16 + l) * 7 + 3);
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 600; n++) read_check(int'($urandom_range(ROWS - 1)));
    read_check(0); read_check(ROWS - 1);
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1; waddr = RAW'($urandom_range(ROWS - 1)); wlane = LW'($urandom_range(LANES - 1));
      wdata = 16'($urandom);
      shadow[waddr][wlane] = wdata;
      @(negedge clk); we = 0;
      read_check(int'(waddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
