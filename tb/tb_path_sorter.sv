// tb_path_sorter: random metrics, many of them tied, for L = 8 survivors
// out of 16 forks. The survivors must be distinct forks, carry their own
// metric, be in ascending order, and be exactly the 8 smallest
// {metric, index} keys found by a straightforward selection.
module tb_path_sorter;
  localparam int M = 16, L = 8, QM = 11;
  logic [M-1:0][QM-1:0] pm;
  logic [L-1:0][3:0]    sel_idx;
  logic [L-1:0][QM-1:0] sel_pm;
  int checks = 0, failures = 0;

  path_sorter #(.M(M), .L(L), .QM(QM)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit used[M];
    int best, bk;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < M; i++)
        pm[i] = QM'((t % 2) ? $urandom_range(0, 7) : $urandom_range(0, 2047));
      #1;
      foreach (used[i]) used[i] = 0;
      for (int l = 0; l < L; l++) begin
        best = -1; bk = 0;
        for (int i = 0; i < M; i++)
          if (!used[i] && (best < 0 || int'(pm[i]) < bk)) begin best = i; bk = int'(pm[i]); end
        used[best] = 1;
        checks++;
        if (int'(sel_idx[l]) != best || sel_pm[l] != pm[best]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d l=%0d idx %0d exp %0d pm %0d exp %0d",
                                      t, l, sel_idx[l], best, sel_pm[l], pm[best]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
