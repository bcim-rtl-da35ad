// tb_workload_cnn -- runs the binarized layers of the convolutional
// networks LeNet-5, CNN-1 and CNN-2 through the engine at its default size.
//
// The first convolution of these networks works on non-binary pixels and is
// outside the engine, so each network starts from a random binary feature
// map standing in for its (binarized, pooled) output:
//   LeNet-5: 12x12x6 map -> 5x5 convolution, 16 channels, on the sliding
//            window buffer with the extra next-window column (two windows
//            per read) -> 2x2 pooling (done here, as the host would: OR of
//            the four bits, i.e. max of +-1) -> FC 256-120-84-10
//   CNN-1:   720 features -> FC 720-720-70-10
//   CNN-2:   1210 features -> FC 1210-1210-1210-10 (three parts, AND)
// Fully connected layers are mapped as in tb_workload_mlp.  Every
// convolution output is checked against a direct convolution sum
// sign(2*matches - 150) > 0, every FC pass against activations computed
// here with the same cascading rule; outputs travel over the 32-bit bus
// into the next layer.
module tb_workload_cnn;
  import bcim_pkg::*;
  localparam int N_IN = XBAR_INPUTS, COLS = XBAR_COLS, NT = NTILES_DEF;
  localparam int BUS_W = BUS_WIDTH, ROWS = 2 * N_IN;
  localparam int NW = N_IN / BUS_W, MAXV = 1500;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic [NT-1:0][15:0] n_active, vec_size;
  logic prog_en = 0;
  logic [1:0] prog_tile = '0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [COLS-1:0] prog_data = '0;
  logic in_valid = 0, in_ready, in_last = 0;
  in_kind_e in_kind = IN_WORD;
  logic [1:0] in_tile = '0;
  logic [$clog2(NW)-1:0] in_addr = '0;
  logic [BUS_W-1:0] in_data = '0;
  logic start = 0, start_ready, busy, act_valid;
  logic [NT-1:0] col_shifted;
  logic [COLS-1:0] act;
  logic out_valid, out_ready = 1, out_last;
  logic [BUS_W-1:0] out_data;

  bcim_top dut (.*);

  always #5 clk = ~clk;

  bit x_cur [MAXV];     // input of the current layer
  bit x_next [MAXV];    // output collected from the bus
  bit golden [MAXV];
  int checks = 0, failures = 0, n_split_diff = 0, n_layers = 0, n_passes = 0;
  int n_words_got = 0;

  // output bus collector
  int collect_base = 0, collect_n = 0, word_idx = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      for (int b = 0; b < BUS_W; b++)
        if (word_idx * BUS_W + b < collect_n)
          x_next[collect_base + word_idx * BUS_W + b] = out_data[b];
      word_idx++;
      n_words_got++;
    end
  end

  function automatic bit wbit(int layer, int o, int i);
    int unsigned h = 32'(layer) * 32'd2246822519 ^ 32'(o) * 32'd3266489917 ^ 32'(i) * 32'd668265263;
    h ^= h >> 15; h *= 32'd2654435761; h ^= h >> 13;
    return h[7];
  endfunction

  task automatic send(in_kind_e kind, int tile, int addr, logic [BUS_W-1:0] data);
    in_valid = 1; in_kind = kind; in_tile = 2'(tile); in_addr = ($clog2(NW))'(addr);
    in_data = data; in_last = 0;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    in_valid = 0;
  endtask

  task automatic run_layer(int layer, int v, int nout);
    int parts = (v + N_IN - 1) / N_IN;
    int ps = (v + parts - 1) / parts;
    casc_fn_e fn = (parts == 1) ? CASC_NONE : (parts == 2) ? CASC_F2 : CASC_AND;
    int nref = (parts == 2) ? 3 : 1;
    int x = ps / 16;
    n_layers++;
    for (int base = 0; base < nout; base += COLS) begin
      int nc = (nout - base < COLS) ? nout - base : COLS;
      n_passes++;
      // program the weights of outputs base .. base+nc-1
      for (int t = 0; t < parts; t++)
        for (int r = 0; r < ROWS; r++) begin
          int i = t * ps + r / 2;
          for (int c = 0; c < COLS; c++) begin
            if (c < nc && r / 2 < ps && i < v)
              prog_data[c] = (r % 2 == 0) ? wbit(layer, base + c, i) : !wbit(layer, base + c, i);
            else
              prog_data[c] = 1'b0;
          end
          prog_en = 1; prog_tile = 2'(t); prog_row = ($clog2(ROWS))'(r);
          @(posedge clk); #1;
        end
      prog_en = 0;
      // load the input parts
      for (int t = 0; t < parts; t++) begin
        send(IN_CLEAR, t, 0, '0);
        for (int w = 0; w < NW; w++) begin
          logic [BUS_W-1:0] d;
          for (int b = 0; b < BUS_W; b++) begin
            int k = w * BUS_W + b, i = t * ps + w * BUS_W + b;
            d[b] = (k < ps && i < v) ? x_cur[i] : 1'b0;
          end
          send(IN_WORD, t, w, d);
        end
      end
      // expected activations of this pass
      for (int c = 0; c < nc; c++) begin
        int m [NT];
        int q = ps / 2, tot = 0;
        bit r;
        for (int t = 0; t < NT; t++) begin
          m[t] = 0;
          for (int k = 0; k < ps; k++)
            if (t < parts && t * ps + k < v && x_cur[t * ps + k] == wbit(layer, base + c, t * ps + k)) m[t]++;
          tot += m[t];
        end
        case (fn)
          CASC_NONE: r = m[0] > q;
          CASC_AND:  r = (m[0] > q) && (m[1] > q) && (m[2] > q);
          default:   r = (m[1] > q + x) || (m[0] > q - x && m[1] > q)
                         || (m[0] > q && m[1] > q - x) || (m[0] > q + x);
        endcase
        golden[base + c] = r;
        if (r != (2 * tot > v)) n_split_diff++;
      end
      cfg = '0;
      cfg.fn = fn; cfg.nparts = 4'(parts); cfg.nref = 4'(nref); cfg.aux_x = 16'(x);
      cfg.ncols_out = 16'(nc);
      for (int t = 0; t < NT; t++) begin
        n_active[t] = (t < parts) ? 16'(ps) : 16'd0;
        vec_size[t] = 16'(ps);
      end
      collect_base = base; collect_n = nc; word_idx = 0;
      start = 1;
      @(posedge clk);
      while (!start_ready) @(posedge clk);
      #1;
      start = 0;
      while (!(word_idx == (nc + BUS_W - 1) / BUS_W && !out_valid)) @(posedge clk);
      #1;
      for (int c = 0; c < nc; c++) begin
        checks++;
        if (x_next[base + c] !== golden[base + c]) begin
          failures++;
          if (failures < 10) $display("layer %0d output %0d mismatch", layer, base + c);
        end
      end
    end
    for (int i = 0; i < nout; i++) x_cur[i] = x_next[i];
    $display("layer %0d: %0d -> %0d, %0d parts, cascading %s", layer, v, nout, parts, fn.name());
  endtask

  // ---- LeNet-5 second convolution on the window buffer
  localparam int CK = 5, CC = 6, CO = 16, IMG = 12, OI = IMG - CK + 1, SB = CK * CC;
  bit fmap [CC][IMG][IMG];
  bit cout_map [CO][OI][OI];
  int n_conv_reads = 0, n_shift = 0;
  always @(posedge clk) if (rst_n && col_shifted[0]) n_shift++;

  function automatic bit kbit(int o, int ch, int r, int q);
    return wbit(7, o, ch * 100 + r * 10 + q);
  endfunction

  task automatic stream_column(int row0, int col);
    logic [BUS_W-1:0] d = '0;
    for (int ch = 0; ch < CC; ch++)
      for (int r = 0; r < CK; r++) d[ch*CK + r] = fmap[ch][row0 + r][col];
    in_valid = 1; in_kind = IN_COL; in_tile = '0; in_data = d; in_last = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    in_valid = 0; in_last = 0;
  endtask

  task automatic conv_layer();
    // column o: kernel o on slots 0..K-1; column CO+o: kernel o on slots
    // 1..K; all other cells high-resistance
    for (int r = 0; r < ROWS; r++) begin
      int k = r / 2, s = k / SB, ch = (k % SB) / CK, kr = k % CK;
      for (int c = 0; c < COLS; c++) begin
        int o = c % CO, sh = c / CO;
        if (sh < 2 && k < (CK + 1) * SB && s - sh >= 0 && s - sh < CK)
          prog_data[c] = (r % 2 == 0) ? kbit(o, ch, kr, s - sh) : !kbit(o, ch, kr, s - sh);
        else
          prog_data[c] = 1'b0;
      end
      prog_en = 1; prog_tile = '0; prog_row = ($clog2(ROWS))'(r);
      @(posedge clk); #1;
    end
    prog_en = 0;
    cfg = '0;
    cfg.fn = CASC_NONE; cfg.nparts = 4'd1; cfg.nref = 4'd1;
    cfg.slot_bits = 16'(SB); cfg.nslots = 16'(CK + 1); cfg.ncols_out = 16'(2 * CO);
    for (int t = 0; t < NT; t++) begin
      n_active[t] = (t == 0) ? 16'((CK + 1) * SB) : 16'd0;
      vec_size[t] = 16'(CK * CK * CC);
    end
    for (int row0 = 0; row0 < OI; row0++) begin
      send(IN_CLEAR, 0, 0, '0);
      for (int j = 0; j <= CK; j++) stream_column(row0, j);
      for (int j = 0; j < OI; j += 2) begin
        if (j > 0) begin
          stream_column(row0, j + CK - 1);
          stream_column(row0, j + CK);
        end
        collect_base = 0; collect_n = 2 * CO; word_idx = 0;
        start = 1;
        @(posedge clk);
        while (!start_ready) @(posedge clk);
        #1;
        start = 0;
        while (!(word_idx == 1 && !out_valid)) @(posedge clk);
        #1;
        n_conv_reads++;
        for (int sh = 0; sh < 2; sh++)
          for (int o = 0; o < CO; o++) begin
            int mt = 0;
            for (int ch = 0; ch < CC; ch++)
              for (int r = 0; r < CK; r++)
                for (int q = 0; q < CK; q++)
                  if (fmap[ch][row0 + r][j + sh + q] == kbit(o, ch, r, q)) mt++;
            cout_map[o][row0][j + sh] = x_next[sh * CO + o];
            checks++;
            if (x_next[sh * CO + o] !== (2 * mt - CK * CK * CC > 0)) begin
              failures++;
              if (failures < 10) $display("conv out ch %0d at %0d,%0d mismatch", o, row0, j + sh);
            end
          end
      end
    end
    // 2x2 pooling and flattening: channel-major, then row, then column
    for (int o = 0; o < CO; o++)
      for (int r = 0; r < OI / 2; r++)
        for (int q = 0; q < OI / 2; q++)
          x_cur[o * (OI / 2) * (OI / 2) + r * (OI / 2) + q] =
            cout_map[o][2*r][2*q] | cout_map[o][2*r][2*q+1] | cout_map[o][2*r+1][2*q] | cout_map[o][2*r+1][2*q+1];
    $display("conv layer: 12x12x6 -> 8x8x16 in %0d reads, %0d columns streamed", n_conv_reads, n_shift);
  endtask

  task automatic run_net(string name, int sizes [], int seed);
    for (int i = 0; i < sizes[0]; i++) x_cur[i] = 1'($urandom);
    for (int l = 0; l + 1 < sizes.size(); l++) run_layer(seed * 10 + l, sizes[l], sizes[l + 1]);
    $display("%s done: class outputs %b%b%b%b%b%b%b%b%b%b", name,
             x_cur[0], x_cur[1], x_cur[2], x_cur[3], x_cur[4], x_cur[5], x_cur[6], x_cur[7], x_cur[8], x_cur[9]);
  endtask

  initial begin
    cfg = '0; n_active = '0; vec_size = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int ch = 0; ch < CC; ch++)
      for (int r = 0; r < IMG; r++)
        for (int q = 0; q < IMG; q++) fmap[ch][r][q] = 1'($urandom);
    conv_layer();
    // LeNet-5 fully connected layers continue from the pooled map
    run_layer(41, 256, 120);
    run_layer(42, 120, 84);
    run_layer(43, 84, 10);
    $display("LeNet-5 done: class outputs %b%b%b%b%b%b%b%b%b%b",
             x_cur[0], x_cur[1], x_cur[2], x_cur[3], x_cur[4], x_cur[5], x_cur[6], x_cur[7], x_cur[8], x_cur[9]);
    run_net("CNN-1", '{720, 720, 70, 10}, 5);
    run_net("CNN-2", '{1210, 1210, 1210, 10}, 6);
    $display("layers=%0d passes=%0d words=%0d neurons changed by splitting=%0d",
             n_layers, n_passes, n_words_got, n_split_diff);
    checks++;
    // passes: LeNet 1+1+1, CNN-1 2+1+1, CNN-2 3+3+1
    if (n_passes != 3 + 4 + 7) failures++;
    checks++;
    if (n_conv_reads != OI * OI / 2 || n_shift != OI * (CK + 1 + OI - 2)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
