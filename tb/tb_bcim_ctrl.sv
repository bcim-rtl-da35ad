// tb_bcim_ctrl -- checks the evaluation sequence: rd_en one cycle after an
// accepted start, then nref compare cycles on the right slots, then casc_en,
// i.e. casc_en nref + 2 cycles after the start cycle; busy over the whole
// sequence; start held off while the bus packer is busy.
module tb_bcim_ctrl;
  logic clk = 0, rst_n = 0, start = 0, pk_busy = 0;
  logic [1:0] nref = 2'd1;
  logic start_ready, busy, rd_en, cmp_en, casc_en;
  logic [1:0] sel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  bcim_ctrl #(.NREF(3)) dut (.*);

  task automatic evaluate(int n);
    int lo = 1 - (n - 1) / 2;
    nref = 2'(n);
    checks++; if (!start_ready || busy) failures++;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    // READ
    checks++; if (!rd_en || cmp_en || casc_en || !busy) failures++;
    @(posedge clk); #1;
    for (int i = 0; i < n; i++) begin
      checks++;
      if (rd_en || !cmp_en || int'(sel) != lo + i || casc_en || !busy) begin failures++; $display("cmp %0d sel %0d", i, sel); end
      @(posedge clk); #1;
    end
    checks++; if (!casc_en || cmp_en || !busy) failures++;
    @(posedge clk); #1;
    checks++; if (busy || casc_en) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    evaluate(1);
    evaluate(3);
    evaluate(3);
    evaluate(1);
    // packer busy: start must wait
    pk_busy = 1; start = 1; #1;
    checks++; if (start_ready) failures++;
    repeat (4) begin
      @(posedge clk); #1;
      checks++; if (busy || rd_en) failures++;
    end
    pk_busy = 0;
    @(posedge clk); #1;
    start = 0;
    checks++; if (!rd_en) failures++;
    repeat (6) @(posedge clk);
    #1;
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
