// tb_sa_ref_gen -- reference levels for random sizes and distances, checked
// against floor(size/2) + (i-mid)*x clamped to the count range, for three
// and five references.
module tb_sa_ref_gen;
  localparam int CNT_W = 10;
  logic [CNT_W-1:0] vec_size, aux_x;
  logic [2:0][CNT_W-1:0] refs3;
  logic [4:0][CNT_W-1:0] refs5;
  int checks = 0, failures = 0;

  sa_ref_gen #(.NREF(3), .CNT_W(CNT_W)) dut3 (.vec_size, .aux_x, .refs(refs3));
  sa_ref_gen #(.NREF(5), .CNT_W(CNT_W)) dut5 (.vec_size, .aux_x, .refs(refs5));

  function automatic int expect_ref(int size, int x, int i, int mid);
    int v = size / 2 + (i - mid) * x;
    if (v < 0) v = 0;
    if (v > 1023) v = 1023;
    return v;
  endfunction

  initial begin
    // the paper's example: V = 784 split in two -> part 392, Ref1 = V/4 = 196
    vec_size = 392; aux_x = 20; #1;
    checks++;
    if (refs3[0] != 176 || refs3[1] != 196 || refs3[2] != 216) failures++;
    for (int it = 0; it < 500; it++) begin
      vec_size = CNT_W'($urandom_range(1, 1023));
      aux_x    = CNT_W'((it % 3 == 0) ? $urandom_range(0, 1023) : $urandom_range(0, 64));
      #1;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (int'(refs3[i]) != expect_ref(int'(vec_size), int'(aux_x), i, 1)) failures++;
      end
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (int'(refs5[i]) != expect_ref(int'(vec_size), int'(aux_x), i, 2)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
