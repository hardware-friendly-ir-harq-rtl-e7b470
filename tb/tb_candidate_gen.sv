// tb_candidate_gen: checks candidate forking for one path. First the
// worked example of a length-16 repetition node whose PC_frozen bits
// encode to 1100000000000000, then random candidates, LLRs, node sizes and
// candidate counts against the reference metric, including saturation.
module tb_candidate_gen;
  import harq_ref_pkg::*;
  localparam int NV = 16, LA = 2, QI = 8, QM = 11;
  logic signed [NV-1:0][QI-1:0] alpha;
  logic [QM-1:0]                pm_in;
  logic [LA-1:0][NV-1:0]        cand, beta_f;
  logic [NV-1:0]                pcenc;
  logic [2:0]                   s;
  logic [1:0]                   n_cand;
  logic [LA-1:0][QM-1:0]        pm_f;
  int checks = 0, failures = 0, n_sat = 0;

  candidate_gen #(.NV(NV), .LA(LA), .QI(QI), .QM(QM)) dut (.*);

  function automatic logic [NV-1:0] str2vec(input string str);
    logic [NV-1:0] v;
    for (int k = 0; k < NV; k++) v[k] = (str[k] == "1");
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a[NVR];
    logic [NV-1:0] mask, eb;
    int ep;
    // repetition node example
    cand[0] = '1; cand[1] = '0; pcenc = str2vec("1100000000000000");
    s = 3'd4; n_cand = 2'd2; pm_in = '0;
    for (int k = 0; k < NV; k++) alpha[k] = 8'sd10;
    #1;
    checks += 2;
    if (beta_f[0] !== str2vec("0011111111111111")) begin failures++; $display("FAIL ex0 %b", beta_f[0]); end
    if (beta_f[1] !== str2vec("1100000000000000")) begin failures++; $display("FAIL ex1 %b", beta_f[1]); end
    checks += 2;
    // all alphas positive (hard decision 0): metric adds 10 per 1-bit
    if (pm_f[0] !== 11'd140) begin failures++; $display("FAIL expm0 %0d", pm_f[0]); end
    if (pm_f[1] !== 11'd20)  begin failures++; $display("FAIL expm1 %0d", pm_f[1]); end
    for (int t = 0; t < 3000; t++) begin
      s = 3'($urandom_range(0, 4));
      n_cand = 2'($urandom_range(1, 2));
      pm_in = QM'($urandom_range(0, (t % 3 == 0) ? 2047 : 600));
      cand[0] = NV'($urandom); cand[1] = NV'($urandom); pcenc = NV'($urandom);
      for (int k = 0; k < NV; k++) begin
        a[k] = $urandom_range(0, 255) - 128;
        alpha[k] = QI'(a[k]);
      end
      #1;
      mask = NV'((32'd1 << (32'd1 << s)) - 1);
      for (int j = 0; j < LA; j++) begin
        eb = (cand[j] ^ pcenc) & mask;
        ep = (j >= n_cand) ? 2047 : pm_ref(a, int'(pm_in), eb, int'(s), QM);
        if (ep == 2047) n_sat++;
        checks += 2;
        if (beta_f[j] !== eb) begin failures++; if (failures < 10) $display("FAIL beta j=%0d s=%0d got %h exp %h cand %h pc %h", j, s, beta_f[j], eb, cand[j], pcenc); end
        if (int'(pm_f[j]) != ep) begin
          failures++;
          if (failures < 10) $display("FAIL pm j=%0d s=%0d got %0d exp %0d", j, s, pm_f[j], ep);
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
