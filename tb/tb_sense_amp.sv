// tb_sense_amp -- random bitline levels and references; each compare
// cycle must store (level > ref) into the selected slot and leave the others
// unchanged; q/qn are the last decision and its complement.
module tb_sense_amp;
  localparam int NREF = 3, CNT_W = 6;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] sel = '0;
  logic [CNT_W-1:0] level = '0, ref_level = '0;
  logic q, qn;
  logic [NREF-1:0] res, exp_res;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  sense_amp #(.NREF(NREF), .CNT_W(CNT_W)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_res = '0;
    for (int it = 0; it < 300; it++) begin
      logic exp_q;
      level = CNT_W'($urandom);
      ref_level = (it % 4 == 0) ? level : CNT_W'($urandom);
      sel = 2'($urandom_range(NREF-1));
      en = 1;
      exp_q = level > ref_level;
      exp_res[sel] = exp_q;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (q !== exp_q || qn !== ~exp_q || res !== exp_res) begin
        failures++;
        if (failures < 10) $display("it %0d lvl %0d ref %0d q %b res %b exp %b", it, level, ref_level, q, res, exp_res);
      end
      // idle cycle keeps results
      level = CNT_W'($urandom);
      @(posedge clk); #1;
      checks++;
      if (res !== exp_res) failures++;
    end
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
