// tb_srfd_classifier: checks the D0 xor D1 grouping of BBPD decisions.
// For edge j, D0 = dat[2j], D1 = dat[2j+1]; xor 1 -> group 1, 0 -> group 2.
module tb_srfd_classifier;
  import srfd_pkg::*;
  pd_t pd [N_EDGE];
  logic [N_DATA:0] dat;
  pd_t g1 [N_EDGE];
  pd_t g2 [N_EDGE];
  int checks = 0, failures = 0;

  srfd_classifier dut (.pd, .dat, .g1, .g2);

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_g1 = 0, n_g2 = 0;
    for (int it = 0; it < 300; it++) begin
      for (int j = 0; j < N_EDGE; j++) pd[j] = pd_t'($urandom_range(2));
      dat = {$urandom, $urandom};
      #1;
      for (int j = 0; j < N_EDGE; j++) begin
        bit x;
        x = dat[2*j] ^ dat[2*j+1];
        checks++;
        if (g1[j] != (x ? pd[j] : PD_NONE) || g2[j] != (x ? PD_NONE : pd[j])) begin
          failures++;
          $display("FAIL: it %0d edge %0d", it, j);
        end
        if (x && pd[j] != PD_NONE) n_g1++;
        if (!x && pd[j] != PD_NONE) n_g2++;
      end
    end
    checks++;
    if (n_g1 == 0 || n_g2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
