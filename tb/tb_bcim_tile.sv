// tb_bcim_tile -- one reduced crossbar (48 inputs x 10 columns): random
// weights are programmed as differential cell pairs, random inputs loaded
// over the bus, and after a read and three compare cycles every column's
// three results must equal popcount(XNOR(x, w_c)) > ref_i computed here
// from the weights; also checks single-reference evaluation and that
// positions >= n_active and both-HRS positions add nothing.
module tb_bcim_tile;
  localparam int N_IN = 48, COLS = 10, NREF = 3, BUS_W = 32;
  localparam int ROWS = 2 * N_IN, CNT_W = $clog2(N_IN + 1);
  logic clk = 0, rst_n = 0;
  logic [CNT_W-1:0] n_active = '0, vec_size = '0, aux_x = '0, slot_bits = '0, nslots = '0;
  logic prog_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [COLS-1:0] prog_data = '0;
  logic clear = 0, wr_en = 0, col_en = 0, col_last = 0, shifted;
  logic [0:0] wr_addr = '0;
  logic [BUS_W-1:0] wr_data = '0, col_data = '0;
  logic rd_en = 0, cmp_en = 0;
  logic [1:0] sel = '0;
  logic [COLS-1:0][NREF-1:0] res;
  bit w [N_IN][COLS];
  bit zero_pos [N_IN][COLS];
  logic [63:0] x;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  bcim_tile #(.N_IN(N_IN), .COLS(COLS), .NREF(NREF), .BUS_W(BUS_W)) dut (.*);

  task automatic program_all();
    for (int k = 0; k < N_IN; k++) begin
      for (int h = 0; h < 2; h++) begin
        for (int c = 0; c < COLS; c++)
          prog_data[c] = zero_pos[k][c] ? 1'b0 : (h == 0 ? w[k][c] : !w[k][c]);
        prog_en = 1; prog_row = 7'(2 * k + h);
        @(posedge clk); #1;
      end
    end
    prog_en = 0;
  endtask

  task automatic evaluate(int nact, int vsize, int xdist, int nref);
    n_active = CNT_W'(nact); vec_size = CNT_W'(vsize); aux_x = CNT_W'(xdist);
    x = {$urandom, $urandom};
    for (int a = 0; a < 2; a++) begin
      wr_en = 1; wr_addr = 1'(a); wr_data = x[a*32 +: 32];
      @(posedge clk); #1;
    end
    wr_en = 0;
    rd_en = 1; @(posedge clk); #1; rd_en = 0;
    for (int i = 0; i < NREF; i++) begin
      if (nref == 1 && i != 1) continue;
      cmp_en = 1; sel = 2'(i); @(posedge clk); #1;
    end
    cmp_en = 0;
    for (int c = 0; c < COLS; c++) begin
      int pc = 0;
      for (int k = 0; k < nact; k++)
        if (!zero_pos[k][c] && (x[k] == w[k][c])) pc++;
      for (int i = 0; i < NREF; i++) begin
        int rf = vsize / 2 + (i - 1) * xdist;
        if (nref == 1 && i != 1) continue;
        if (rf < 0) rf = 0;
        checks++;
        if (res[c][i] !== (pc > rf)) begin
          failures++;
          if (failures < 6) $display("col %0d ref %0d pc %0d rf %0d got %b", c, i, pc, rf, res[c][i]);
        end
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N_IN; k++)
      for (int c = 0; c < COLS; c++) begin
        w[k][c] = 1'($urandom);
        zero_pos[k][c] = 1'b0;
      end
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    program_all();
    repeat (40) evaluate(N_IN, N_IN, 3, 3);
    repeat (40) evaluate(N_IN, N_IN, 0, 1);
    repeat (40) evaluate(30, 30, 2, 3);
    // spare positions: columns 0..4 ignore inputs 40..47, columns 5..9
    // ignore inputs 0..7 (two windows sharing one read)
    for (int k = 0; k < N_IN; k++)
      for (int c = 0; c < COLS; c++)
        zero_pos[k][c] = (c < 5) ? (k >= 40) : (k < 8);
    program_all();
    repeat (40) evaluate(N_IN, 40, 2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
