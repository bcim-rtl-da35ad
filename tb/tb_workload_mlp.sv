// tb_workload_mlp -- runs the binarized multilayer perceptrons MLP-S
// (784-500-250-10), MLP-M (784-1000-500-250-10) and MLP-L
// (784-1500-1000-500-10) through the engine at its default size, layer
// after layer, with deterministic pseudo-random binary weights and a random
// binary 784-pixel input.
//
// Each layer is mapped as follows: its input vector is split into
// ceil(n/512) equal parts on as many crossbars; its outputs are produced in
// passes of at most 512 columns, the crossbars being reprogrammed for every
// pass.  One part uses the main reference only, two parts use cascading
// function 2 with three references (x = part size / 16), three parts use
// AND.  The words on the output bus are collected and become the next
// layer's input, so the whole network runs end to end.  Every pass is
// checked against activations computed here from the weights and that
// pass's input with the same cascading rule; the number of neurons whose
// value differs from the exact sign because of splitting is reported.
module tb_workload_mlp;
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

  task automatic run_net(string name, int sizes [], int seed);
    for (int i = 0; i < 784; i++) x_cur[i] = 1'($urandom);
    for (int l = 0; l + 1 < sizes.size(); l++) run_layer(seed * 10 + l, sizes[l], sizes[l + 1]);
    $display("%s done: class outputs %b%b%b%b%b%b%b%b%b%b", name,
             x_cur[0], x_cur[1], x_cur[2], x_cur[3], x_cur[4], x_cur[5], x_cur[6], x_cur[7], x_cur[8], x_cur[9]);
  endtask

  initial begin
    cfg = '0; n_active = '0; vec_size = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    run_net("MLP-S", '{784, 500, 250, 10}, 1);
    run_net("MLP-M", '{784, 1000, 500, 250, 10}, 2);
    run_net("MLP-L", '{784, 1500, 1000, 500, 10}, 3);
    $display("layers=%0d passes=%0d words=%0d neurons changed by splitting=%0d",
             n_layers, n_passes, n_words_got, n_split_diff);
    checks++;
    if (n_passes != 3 + 5 + 7) failures++;
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
