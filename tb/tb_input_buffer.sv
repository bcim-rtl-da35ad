// tb_input_buffer -- slides K x K windows over a random Cin-channel binary
// image and checks, after every streamed column, that the buffer holds the
// window in the column-sliced layout: slot s = image column j+s, bit
// s*K*Cin + c*K + r = channel c, row r.  Covers one-beat columns (K=3,
// Cin=4, 12 bits) and two-beat columns (K=5, Cin=8, 40 bits), with and
// without the extra next-window slot, refresh at row ends, random word
// writes, and the number of bus beats per column.
module tb_input_buffer;
  localparam int N_IN = 256, BUS_W = 32, IMG = 10;
  logic clk = 0, rst_n = 0;
  logic [8:0] slot_bits = '0, nslots = '0;
  logic clear = 0, wr_en = 0, col_en = 0, col_last = 0;
  logic [2:0] wr_addr = '0;
  logic [BUS_W-1:0] wr_data = '0, col_data = '0;
  logic [N_IN-1:0] vec;
  logic shifted;
  int checks = 0, failures = 0, beats = 0;
  bit img [8][IMG][IMG];  // channel, row, column

  always #5 clk = ~clk;
  input_buffer #(.N_IN(N_IN), .BUS_W(BUS_W)) dut (.*);

  task automatic stream_col(int K, int C, int row0, int col);
    logic [63:0] bits = '0;
    int sb = K * C;
    int nb = (sb + BUS_W - 1) / BUS_W;
    for (int c = 0; c < C; c++)
      for (int r = 0; r < K; r++)
        bits[c*K + r] = img[c][row0 + r][col];
    for (int b = 0; b < nb; b++) begin
      col_en = 1; col_data = bits[b*BUS_W +: BUS_W]; col_last = (b == nb - 1);
      beats++;
      @(posedge clk); #1;
      checks++;
      if (shifted !== (b == nb - 1)) failures++;
    end
    col_en = 0; col_last = 0;
  endtask

  task automatic check_window(int K, int C, int S, int row0, int col0);
    logic [N_IN-1:0] exp_v = '0;
    for (int s = 0; s < S; s++)
      for (int c = 0; c < C; c++)
        for (int r = 0; r < K; r++)
          exp_v[s*K*C + c*K + r] = img[c][row0 + r][col0 + s];
    checks++;
    if (vec !== exp_v) begin
      failures++;
      if (failures < 5) $display("window row %0d col %0d mismatch K=%0d S=%0d", row0, col0, K, S);
    end
  endtask

  task automatic run_layer(int K, int C, int S);
    slot_bits = 9'(K * C); nslots = 9'(S);
    for (int row0 = 0; row0 + K <= IMG; row0 += 2) begin
      // refresh: empty, then fill S columns
      clear = 1; @(posedge clk); #1; clear = 0;
      checks++; if (vec !== '0) failures++;
      for (int j = 0; j < S; j++) stream_col(K, C, row0, j);
      check_window(K, C, S, row0, 0);
      for (int j = S; j < IMG; j++) begin
        stream_col(K, C, row0, j);
        check_window(K, C, S, row0, j - S + 1);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < 8; c++)
      for (int r = 0; r < IMG; r++)
        for (int q = 0; q < IMG; q++) img[c][r][q] = 1'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // word writes (fully connected load)
    begin
      logic [N_IN-1:0] exp_v = '0;
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int w = 0; w < N_IN / BUS_W; w++) begin
        wr_en = 1; wr_addr = 3'(w); wr_data = $urandom;
        exp_v[w*BUS_W +: BUS_W] = wr_data;
        @(posedge clk); #1;
      end
      wr_en = 0;
      checks++; if (vec !== exp_v) failures++;
    end
    beats = 0;
    run_layer(3, 4, 3);   // 12-bit slots, K slots
    checks++; if (beats != 4 * 10) failures++;   // 4 row bands x 10 columns x 1 beat
    beats = 0;
    run_layer(3, 4, 4);   // with the extra next-window slot
    run_layer(5, 8, 5);   // 40-bit slots: two beats per column
    checks++; if (beats != 4 * 10 * 1 + 3 * 10 * 2) failures++;
    run_layer(5, 8, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
