// tb_xnor_crossbar -- programs random cells, applies random wordlines and
// checks each bitline count against a count of the programmed LRS cells on
// active rows, including the one-cycle sampling latency.
module tb_xnor_crossbar;
  localparam int ROWS = 20, COLS = 12, CNT_W = 5;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, rd_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [COLS-1:0] prog_data = '0;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0][CNT_W-1:0] bl_level;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xnor_crossbar #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) dut (.*);

  task automatic check_read();
    logic [COLS-1:0][CNT_W-1:0] prev;
    wl = ROWS'({$urandom, $urandom});
    prev = bl_level;
    rd_en = 1;
    #1;
    checks++;
    if (bl_level !== prev) begin failures++; $display("level changed before the clock edge"); end
    @(posedge clk); #1;
    rd_en = 0;
    for (int c = 0; c < COLS; c++) begin
      int exp_n = 0;
      for (int r = 0; r < ROWS; r++) exp_n += (wl[r] && model[r][c]) ? 1 : 0;
      checks++;
      if (int'(bl_level[c]) != exp_n) begin
        failures++;
        if (failures < 10) $display("col %0d got %0d exp %0d", c, bl_level[c], exp_n);
      end
    end
    // the level holds without a read
    prev = bl_level;
    wl = ~wl;
    @(posedge clk); #1;
    checks++;
    if (bl_level !== prev) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      model[r] = COLS'($urandom);
      prog_en = 1; prog_row = r[$clog2(ROWS)-1:0]; prog_data = model[r];
      @(posedge clk); #1;
    end
    prog_en = 0;
    repeat (50) check_read();
    // reprogram a few rows and read again
    for (int i = 0; i < 5; i++) begin
      automatic int r = $urandom_range(ROWS-1);
      model[r] = COLS'($urandom);
      prog_en = 1; prog_row = r[$clog2(ROWS)-1:0]; prog_data = model[r];
      @(posedge clk); #1;
    end
    prog_en = 0;
    repeat (50) check_read();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
