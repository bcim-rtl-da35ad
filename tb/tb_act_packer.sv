// tb_act_packer -- random activation vectors of random length go out as
// ceil(nbits/32) words under a random out_ready stall pattern; checks the
// words (unused bits zero), out_last, that load is refused while busy, and
// that busy drops after the last word.
module tb_act_packer;
  localparam int COLS = 100, BUS_W = 32;
  logic clk = 0, rst_n = 0, load = 0, busy, out_valid, out_ready = 0, out_last;
  logic [COLS-1:0] act = '0;
  logic [6:0] nbits = '0;
  logic [BUS_W-1:0] out_data;
  int checks = 0, failures = 0, stalls = 0;

  always #5 clk = ~clk;
  act_packer #(.COLS(COLS), .BUS_W(BUS_W)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int it = 0; it < 200; it++) begin
      automatic logic [127:0] sent = '0;
      automatic logic [COLS-1:0] v = COLS'({$urandom, $urandom, $urandom, $urandom});
      automatic int nb = (it % 7 == 0) ? COLS : $urandom_range(1, COLS);
      automatic int nw = (nb + BUS_W - 1) / BUS_W;
      automatic int got = 0;
      act = v; nbits = 7'(nb); load = 1;
      @(posedge clk); #1;
      load = 0;
      checks++; if (!busy) failures++;
      // a second load while busy must be ignored
      act = ~v; load = 1;
      @(posedge clk); #1;
      load = 0;
      while (busy) begin
        out_ready = ($urandom_range(3) != 0);
        #1;
        if (out_valid && !out_ready) stalls++;
        if (out_valid && out_ready) begin
          sent[got*BUS_W +: BUS_W] = out_data;
          checks++;
          if (out_last != (got == nw - 1)) failures++;
          got++;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
      checks++;
      if (got != nw) failures++;
      for (int b = 0; b < 128; b++) begin
        automatic logic e = (b < nb) ? v[b] : 1'b0;
        if (b >= nw * BUS_W) break;
        checks++;
        if (sent[b] !== e) failures++;
      end
    end
    checks++; if (stalls == 0) failures++;
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
