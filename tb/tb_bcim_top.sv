// tb_bcim_top -- end-to-end test of the layer engine at reduced size
// (64 inputs x 16 columns per crossbar, three crossbars).
//
// Random binary weights are programmed as differential cell pairs and
// random inputs streamed in over the 32-bit bus.  The expected activations
// are computed here from the weights and inputs: popcounts of XNOR, the
// n/2 sign threshold, and the cascading conditions written out on the
// partial popcounts.  Scenarios:
//   fully connected layer fitting one crossbar, one reference
//   vector split over two crossbars: AND, OR (one reference) and
//     cascading functions 1 and 2 (three references)
//   vector split over three crossbars: AND and OR
//   3x3 convolution over 4 channels, sliding window with the extra
//     next-window column: two windows per read, refresh at every row band
// It counts each mechanism (input stall, output back-pressure, column
// shift, refresh, dual-window read, every cascading function, one- and
// three-reference evaluation) and fails any that never happened; every
// evaluation's latency is checked against nref + 2 cycles.
module tb_bcim_top;
  import bcim_pkg::*;
  localparam int N_IN = 64, COLS = 16, NT = 3, NREF = 3, BUS_W = 32;
  // scenario sizes
  localparam int FC1_V = 50;                  // fits one crossbar
  localparam int FC2_V = 128, FC2_O = 16;     // two parts of 64
  localparam int FC3_V = 150;                 // three parts of 50
  localparam int CK = 3, CC = 4, CO = 8, IMG = 8;  // conv K, Cin, Cout, image

  localparam int ROWS = 2 * N_IN;
  localparam int NW = (N_IN + BUS_W - 1) / BUS_W;
  localparam int AW = (NW > 1) ? $clog2(NW) : 1;
  localparam int TW = (NT > 1) ? $clog2(NT) : 1;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic [NT-1:0][15:0] n_active, vec_size;
  logic prog_en = 0;
  logic [TW-1:0] prog_tile = '0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [COLS-1:0] prog_data = '0;
  logic in_valid = 0, in_ready, in_last = 0;
  in_kind_e in_kind = IN_WORD;
  logic [TW-1:0] in_tile = '0;
  logic [AW-1:0] in_addr = '0;
  logic [BUS_W-1:0] in_data = '0;
  logic start = 0, start_ready, busy, act_valid;
  logic [NT-1:0] col_shifted;
  logic [COLS-1:0] act;
  logic out_valid, out_ready = 1, out_last;
  logic [BUS_W-1:0] out_data;

  bcim_top #(.N_IN(N_IN), .COLS(COLS), .NTILES(NT), .NREF(NREF), .BUS_W(BUS_W)) dut (.*);

  always #5 clk = ~clk;

  // golden model state
  bit wt [NT][N_IN][COLS];   // weight bit of position k, column c, tile t
  bit zm [NT][N_IN][COLS];   // 1 = both cells HRS (position unused)
  bit xin [NT][N_IN];        // input vector of each tile's buffer
  logic [BUS_W-1:0] exp_words [$];
  logic [COLS-1:0] exp_act;

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_shift = 0, n_refresh = 0, n_dual = 0;
  int n_fn [5] = '{0, 0, 0, 0, 0};
  int n_ref1 = 0, n_ref3 = 0, n_words = 0, n_approx = 0;

  // ---- output bus monitor with random back-pressure
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_backpressure++;
      if (out_valid && out_ready) begin
        checks++;
        n_words++;
        if (exp_words.size() == 0) begin
          failures++; $display("unexpected output word");
        end else begin
          automatic logic [BUS_W-1:0] e = exp_words.pop_front();
          if (out_data !== e) begin
            failures++; $display("output word %h expected %h", out_data, e);
          end
        end
      end
      out_ready <= ($urandom_range(3) != 0);
    end
  end

  always @(posedge clk) if (rst_n && |col_shifted) n_shift++;

  // ---- input bus
  task automatic send(in_kind_e kind, int tile, int addr, logic [BUS_W-1:0] data, logic last);
    in_valid = 1; in_kind = kind; in_tile = TW'(tile); in_addr = AW'(addr);
    in_data = data; in_last = last;
    @(posedge clk);
    while (!in_ready) begin n_stall++; @(posedge clk); end
    #1;
    in_valid = 0;
  endtask

  task automatic program_tiles(int ntiles);
    for (int t = 0; t < ntiles; t++)
      for (int r = 0; r < ROWS; r++) begin
        for (int c = 0; c < COLS; c++)
          prog_data[c] = zm[t][r/2][c] ? 1'b0 : ((r % 2 == 0) ? wt[t][r/2][c] : !wt[t][r/2][c]);
        prog_en = 1; prog_tile = TW'(t); prog_row = ($clog2(ROWS))'(r);
        @(posedge clk); #1;
      end
    prog_en = 0;
  endtask

  task automatic load_words(int t);
    send(IN_CLEAR, t, 0, '0, 1'b0);
    for (int w = 0; w < NW; w++) begin
      logic [BUS_W-1:0] d;
      for (int b = 0; b < BUS_W; b++) d[b] = (w*BUS_W + b < N_IN) ? xin[t][w*BUS_W + b] : 1'b0;
      send(IN_WORD, t, w, d, 1'b0);
    end
  endtask

  // expected activation of column c from the partial popcounts
  function automatic logic expected(int c, int nparts, casc_fn_e fn, int psize, int x, int n_act);
    int m [NT];
    int q = psize / 2;
    int total = 0;
    logic r;
    for (int t = 0; t < NT; t++) begin
      m[t] = 0;
      if (t < nparts)
        for (int k = 0; k < n_act; k++)
          if (!zm[t][k][c] && xin[t][k] == wt[t][k][c]) m[t]++;
      total += m[t];
    end
    case (fn)
      CASC_NONE: r = m[0] > q;
      CASC_AND: begin r = 1; for (int t = 0; t < nparts; t++) r &= (m[t] > q); end
      CASC_OR:  begin r = 0; for (int t = 0; t < nparts; t++) r |= (m[t] > q); end
      CASC_F1:  r = (m[0] > q - x && m[1] > q + x) || (m[0] > q && m[1] > q)
                    || (m[0] > q + x && m[1] > q - x);
      default:  r = (m[1] > q + x) || (m[0] > q - x && m[1] > q)
                    || (m[0] > q && m[1] > q - x) || (m[0] > q + x);
    endcase
    // count where splitting makes the result differ from the exact sign
    if (fn != CASC_NONE && r != (2 * total > nparts * psize)) n_approx++;
    return r;
  endfunction

  task automatic evaluate(int nparts, casc_fn_e fn, int nref, int psize, int x, int n_act,
                          int ncols, int probe_tile);
    int lat = 0;
    cfg.fn = fn; cfg.nparts = 4'(nparts); cfg.nref = 4'(nref); cfg.aux_x = 16'(x);
    cfg.ncols_out = 16'(ncols);
    for (int t = 0; t < NT; t++) begin n_active[t] = 16'(n_act); vec_size[t] = 16'(psize); end
    for (int c = 0; c < COLS; c++) exp_act[c] = expected(c, nparts, fn, psize, x, n_act);
    n_fn[int'(fn)]++;
    if (nref == 1) n_ref1++; else n_ref3++;
    start = 1;
    @(posedge clk);
    while (!start_ready) @(posedge clk);
    #1;
    start = 0;
    fork
      begin
        lat = 1;
        while (!act_valid) begin @(posedge clk); #1; lat++; end
        checks++;
        if (lat != nref + 3) begin failures++; $display("latency %0d for nref %0d", lat, nref); end
        checks++;
        if (act !== exp_act) begin failures++; $display("act %b expected %b (fn %0d)", act, exp_act, fn); end
        for (int w = 0; w < (ncols + BUS_W - 1) / BUS_W; w++) begin
          logic [BUS_W-1:0] e = '0;
          for (int b = 0; b < BUS_W; b++) if (w*BUS_W + b < ncols) e[b] = exp_act[w*BUS_W + b];
          exp_words.push_back(e);
        end
      end
      begin
        // a word for an idle crossbar during the evaluation must stall
        if (probe_tile >= 0) send(IN_WORD, probe_tile, 0, '0, 1'b0);
      end
    join
  endtask

  task automatic random_fc(int nparts, int v);
    int p = v / nparts;
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < N_IN; k++) begin
        xin[t][k] = (t < nparts && k < p) ? 1'($urandom) : 1'b0;
        for (int c = 0; c < COLS; c++) begin
          wt[t][k][c] = 1'($urandom);
          zm[t][k][c] = !(t < nparts && k < p);
        end
      end
  endtask

  // conv: image and kernels
  bit img [CC][IMG][IMG];
  bit ker [CO][CC][CK][CK];

  task automatic stream_column(int row0, int col);
    logic [63:0] bits = '0;
    int sb = CK * CC;
    for (int ch = 0; ch < CC; ch++)
      for (int r = 0; r < CK; r++) bits[ch*CK + r] = img[ch][row0 + r][col];
    for (int b = 0; b < (sb + BUS_W - 1) / BUS_W; b++)
      send(IN_COL, 0, 0, bits[b*BUS_W +: BUS_W], b == (sb + BUS_W - 1) / BUS_W - 1);
  endtask

  task automatic conv_layer();
    int sb = CK * CC;
    // column o: kernel o on slots 0..K-1 (window j); column CO+o: kernel o
    // on slots 1..K (window j+1); the unused slot of each is zero cells
    for (int k = 0; k < N_IN; k++)
      for (int c = 0; c < COLS; c++) begin
        int s = k / sb, ch = (k % sb) / CK, r = k % CK;
        int o = c % CO, sh = c / CO;
        zm[0][k][c] = (k >= (CK + 1) * sb) || (sh > 1) || (s - sh < 0) || (s - sh >= CK);
        wt[0][k][c] = zm[0][k][c] ? 1'b0 : ker[o][ch][r][s - sh];
      end
    program_tiles(1);
    cfg.slot_bits = 16'(sb); cfg.nslots = 16'(CK + 1);
    for (int row0 = 0; row0 + CK <= IMG; row0++) begin
      send(IN_CLEAR, 0, 0, '0, 1'b0);
      n_refresh++;
      for (int j = 0; j <= CK; j++) stream_column(row0, j);
      for (int j = 0; j + CK < IMG; j += 2) begin
        if (j > 0) begin
          stream_column(row0, j + CK - 1);
          stream_column(row0, j + CK);
        end
        // golden input of this read, built from the image directly
        for (int k = 0; k < N_IN; k++) begin
          int s = k / sb, ch = (k % sb) / CK, r = k % CK;
          xin[0][k] = (s <= CK) ? img[ch][row0 + r][j + s] : 1'b0;
        end
        evaluate(1, CASC_NONE, 1, CK * CK * CC, 0, (CK + 1) * sb, COLS, -1);
        n_dual++;
        // independent check of two output channels against a direct
        // convolution sum: sign(2*matches - K*K*C) > 0
        for (int o = 0; o < CO; o++)
          for (int sh = 0; sh < 2; sh++) begin
            int mt = 0;
            for (int ch = 0; ch < CC; ch++)
              for (int r = 0; r < CK; r++)
                for (int q = 0; q < CK; q++)
                  if (img[ch][row0 + r][j + sh + q] == ker[o][ch][r][q]) mt++;
            checks++;
            if (act[sh*CO + o] !== (2 * mt - CK * CK * CC > 0)) failures++;
          end
      end
    end
  endtask

  initial begin
    cfg = '0; n_active = '0; vec_size = '0;
    cfg.fn = CASC_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;

    // fully connected, fits one crossbar
    random_fc(1, FC1_V);
    program_tiles(NT);
    repeat (6) begin
      for (int k = 0; k < FC1_V; k++) xin[0][k] = 1'($urandom);
      load_words(0);
      evaluate(1, CASC_NONE, 1, FC1_V, 0, FC1_V, COLS, 2);
    end

    // split over two crossbars
    random_fc(2, FC2_V);
    program_tiles(NT);
    for (int it = 0; it < 24; it++) begin
      for (int t = 0; t < 2; t++)
        for (int k = 0; k < FC2_V / 2; k++) xin[t][k] = 1'($urandom);
      load_words(0); load_words(1);
      evaluate(2, CASC_AND, 1, FC2_V / 2, 0, FC2_V / 2, FC2_O, 2);
      evaluate(2, CASC_OR,  1, FC2_V / 2, 0, FC2_V / 2, FC2_O, -1);
      evaluate(2, CASC_F1,  3, FC2_V / 2, 4, FC2_V / 2, FC2_O, -1);
      evaluate(2, CASC_F2,  3, FC2_V / 2, 4, FC2_V / 2, FC2_O, 2);
    end

    // split over three crossbars
    random_fc(3, FC3_V);
    program_tiles(NT);
    for (int it = 0; it < 8; it++) begin
      for (int t = 0; t < 3; t++)
        for (int k = 0; k < FC3_V / 3; k++) xin[t][k] = 1'($urandom);
      for (int t = 0; t < 3; t++) load_words(t);
      evaluate(3, CASC_AND, 1, FC3_V / 3, 0, FC3_V / 3, 10, -1);
      evaluate(3, CASC_OR,  3, FC3_V / 3, 5, FC3_V / 3, 10, -1);
    end

    // convolution with sliding window
    for (int o = 0; o < CO; o++)
      for (int ch = 0; ch < CC; ch++)
        for (int r = 0; r < CK; r++)
          for (int q = 0; q < CK; q++) ker[o][ch][r][q] = 1'($urandom);
    for (int ch = 0; ch < CC; ch++)
      for (int r = 0; r < IMG; r++)
        for (int q = 0; q < IMG; q++) img[ch][r][q] = 1'($urandom);
    conv_layer();

    repeat (40) @(posedge clk);
    checks++;
    if (exp_words.size() != 0) begin failures++; $display("%0d words never sent", exp_words.size()); end

    $display("mechanisms: stall=%0d backpressure=%0d shift=%0d refresh=%0d dual=%0d ref1=%0d ref3=%0d",
             n_stall, n_backpressure, n_shift, n_refresh, n_dual, n_ref1, n_ref3);
    $display("cascade: none=%0d and=%0d or=%0d f1=%0d f2=%0d, outputs changed by splitting=%0d, words=%0d",
             n_fn[0], n_fn[1], n_fn[2], n_fn[3], n_fn[4], n_approx, n_words);
    foreach (n_fn[i]) begin checks++; if (n_fn[i] == 0) failures++; end
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_backpressure == 0) failures++;
    checks++; if (n_shift == 0) failures++;
    checks++; if (n_refresh == 0) failures++;
    checks++; if (n_dual == 0) failures++;
    checks++; if (n_ref1 == 0 || n_ref3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
