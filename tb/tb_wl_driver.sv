// tb_wl_driver -- checks the complementary wordline pairs against the rule
// WL_k = rd_en & en_k & x_k, WLbar_k = rd_en & en_k & ~x_k on random inputs.
module tb_wl_driver;
  localparam int N = 24;
  logic rd_en;
  logic [N-1:0] in_vec, row_en;
  logic [2*N-1:0] wl;
  int checks = 0, failures = 0;

  wl_driver #(.N_IN(N)) dut (.rd_en, .in_vec, .row_en, .wl);

  initial begin
    for (int it = 0; it < 200; it++) begin
      rd_en  = (it % 5) != 0;
      in_vec = N'({$urandom, $urandom});
      row_en = (it < 100) ? '1 : N'({$urandom, $urandom});
      #1;
      for (int k = 0; k < N; k++) begin
        logic e0, e1;
        e0 = rd_en && row_en[k] && in_vec[k] == 1'b1;
        e1 = rd_en && row_en[k] && in_vec[k] == 1'b0;
        checks++;
        if (wl[2*k] !== e0 || wl[2*k+1] !== e1) begin
          failures++;
          if (failures < 10) $display("mismatch k=%0d", k);
        end
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
