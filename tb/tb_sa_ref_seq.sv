// tb_sa_ref_seq -- one reference takes one compare cycle on the main slot,
// three references take three cycles on slots 0,1,2 (five: 0..4), with done
// in the last; start while busy is ignored.
module tb_sa_ref_seq;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] nref3 = '0;
  logic [2:0] nref5 = '0;
  logic cmp3, done3, cmp5, done5;
  logic [1:0] sel3;
  logic [2:0] sel5;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sa_ref_seq #(.NREF(3)) dut3 (.clk, .rst_n, .start, .nref(nref3), .cmp_en(cmp3), .sel(sel3), .done(done3));
  sa_ref_seq #(.NREF(5)) dut5 (.clk, .rst_n, .start, .nref(nref5), .cmp_en(cmp5), .sel(sel5), .done(done5));

  task automatic run(int n3, int n5);
    int lo3 = 1 - (n3 - 1) / 2, lo5 = 2 - (n5 - 1) / 2;
    int maxn = (n3 > n5) ? n3 : n5;
    nref3 = 2'(n3); nref5 = 3'(n5);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    for (int cyc = 0; cyc < maxn + 2; cyc++) begin
      checks++;
      if (cyc < n3) begin
        if (!cmp3 || int'(sel3) != lo3 + cyc || done3 != (cyc == n3 - 1)) failures++;
      end else if (cmp3) failures++;
      checks++;
      if (cyc < n5) begin
        if (!cmp5 || int'(sel5) != lo5 + cyc || done5 != (cyc == n5 - 1)) failures++;
      end else if (cmp5) failures++;
      if (cyc == 0) start = 1;  // ignored while busy
      @(posedge clk); #1;
      start = 0;
      if (cyc == 0 && n3 == 1) begin
        // a start in the last compare cycle is also ignored; let it drain
      end
    end
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    run(1, 1);
    run(3, 3);
    run(3, 5);
    run(1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
