// tb_cascade_unit -- drives the unit with sense results derived from random
// partial popcounts m (part 0) and n (part 1) of a vector of size V split in
// two, with Ref0..Ref2 = V/4-x, V/4, V/4+x for part 0 and Ref3..Ref5 the same
// for part 1, and checks every cascading function against the conditions of
// the paper written out directly on m and n.  It also checks the property
// the paper states for function 1: it never outputs 1 unless m + n > V/2.
// AND / OR / NONE are checked over one, two and three parts.
module tb_cascade_unit;
  import bcim_pkg::*;
  localparam int NP = 3, NR = 3;
  casc_fn_e fn;
  logic [1:0] nparts;
  logic [NP-1:0][NR-1:0] res;
  logic act;
  int checks = 0, failures = 0;
  int n_f1_fn = 0, n_f2_fn = 0;  // false negatives seen (informative)

  cascade_unit #(.NPARTS(NP), .NREF(NR)) dut (.fn, .nparts, .res, .act);

  initial begin
    for (int it = 0; it < 4000; it++) begin
      automatic int V = 2 * $urandom_range(8, 256);
      automatic int x = $urandom_range(1, V / 8);
      automatic int q = V / 4;   // floor(part/2) with part = V/2
      automatic int m = $urandom_range(0, V / 2), n = $urandom_range(0, V / 2), o = $urandom_range(0, V / 2);
      automatic int r0 = q - x, r1 = q, r2 = q + x;
      logic exp_v;
      logic golden;
      res[0] = {m > r2, m > r1, m > r0};
      res[1] = {n > r2, n > r1, n > r0};
      res[2] = {o > r2, o > r1, o > r0};
      golden = (m + n) > V / 2;

      fn = CASC_F1; nparts = 2; #1;
      exp_v = (m > r0 && n > r2) || (m > r1 && n > r1) || (m > r2 && n > r0);
      checks++; if (act !== exp_v) failures++;
      checks++; if (act && !golden) failures++;  // never a false 1
      if (!act && golden) n_f1_fn++;

      fn = CASC_F2; #1;
      exp_v = (n > r2) || (m > r0 && n > r1) || (m > r1 && n > r0) || (m > r2);
      checks++; if (act !== exp_v) failures++;
      if (!act && golden) n_f2_fn++;

      for (int p = 1; p <= NP; p++) begin
        logic a_exp, o_exp;
        nparts = 2'(p);
        a_exp = (m > r1) && (p < 2 || n > r1) && (p < 3 || o > r1);
        o_exp = (m > r1) || (p >= 2 && n > r1) || (p >= 3 && o > r1);
        fn = CASC_AND; #1; checks++; if (act !== a_exp) failures++;
        fn = CASC_OR;  #1; checks++; if (act !== o_exp) failures++;
        fn = CASC_NONE; #1; checks++; if (act !== (m > r1)) failures++;
      end
    end
    // function 2 must recover at least as many true 1s as function 1
    checks++;
    if (n_f2_fn > n_f1_fn) failures++;
    $display("false negatives F1=%0d F2=%0d", n_f1_fn, n_f2_fn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
