// tb_harq_scl_ext: end-to-end run of the IR-HARQ extension at its default
// size (mother code up to 8192 bits, L = 8, nodes of 16 bits).
//
// Transmission sequence of the evaluation: a (2048, 1048) first
// transmission, then six retransmissions of 1024 bits each, up to 8192.
// The plain construction of each length ranks tree positions by (Hamming
// weight, position) and punctures the leftmost bits; it stands in for the
// Gaussian-approximation construction. After every bit-type update the
// vectors, the lut and the pair count are compared with the set-based
// reference. Then one codeword is decoded with the bit types of that
// transmission: the testbench plays the transmitter (random information
// bits, every PC_frozen bit a copy of its I_delta bit through the lut) and
// the SCL core (it walks the 16-bit nodes in decoding order and supplies
// LLRs and candidates). The correct path gets LLRs that agree with its
// codeword and a candidate holding only its information bits, so it keeps
// metric 0; it must survive every node with the correct beta, which only
// happens if the PC_frozen values were routed to the right place earlier.
// The other seven paths are random. Every node is also checked against a
// reference model of the forks, the selection and the PC_frozen memory,
// and its latency of 4 + 2^s clocks. A last, hand-made transmission forces
// an intra-node dependency. Each mechanism (pairing, intra-node fix,
// mother code growth, retransmission inside one mother code, routing,
// path reordering) is counted and must occur.
module tb_harq_scl_ext;
  import harq_pkg::*;
  import harq_ref_pkg::*;
  localparam int N = N_MAX, AW = $clog2(N_MAX), L = L_LIST, NV = NV_MAX, LA = LA_CAND;
  localparam int QI = QI_BITS, QM = QM_BITS, K = 1048, NSZ = 16;
  logic clk = 0, rst_n = 0;
  logic gen_first = 0, gen_next = 0;
  logic [AW:0] n_len = '0;
  logic [N-1:0] fr_star = '1, rm_star = '1;
  logic gen_busy, gen_done, gen_err;
  logic [AW:0] gen_pairs, gen_fixes, n1, n_cur, n_mother;
  logic [N-1:0] fr, rm, pc, iv, fr_z, id;
  logic dec_init = 0, node_start = 0;
  logic [AW-1:0] node_q0 = '0;
  logic [2:0] node_s = 3'd4;
  logic signed [L-1:0][NV-1:0][QI-1:0] node_alpha;
  logic [L-1:0][QM-1:0] node_pm, node_pm_out;
  logic [L-1:0][LA-1:0][NV-1:0] node_cand;
  logic [1:0] node_ncand = 2'd2;
  logic node_busy, node_done;
  logic [L-1:0][2:0] node_parent;
  logic [L-1:0][0:0] node_csel;
  logic [L-1:0][NV-1:0] node_beta;

  int checks = 0, failures = 0;
  int cnt_pairs = 0, cnt_fixes = 0, cnt_grow = 0, cnt_same = 0, cnt_routes = 0, cnt_perm = 0;
  bit rfr[], rpc[], rfs[];
  int rlut[];
  bit ref_mem [L][N];
  bit tmp [L][N];
  bit u [N];

  harq_scl_ext dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mother(input int x);
    int n = 1;
    while (n < x) n = n * 2;
    return n;
  endfunction

  task automatic construct(input int len);
    int n, got;
    n = mother(len);
    fr_star = '1; rm_star = '1;
    for (int q = n - len; q < n; q++) rm_star[n - 1 - q] = 1'b0;
    got = 0;
    for (int w = $clog2(n); w >= 0; w--)
      for (int q = n - 1; q >= n - len; q--)
        if ($countones(q) == w && got < K) begin fr_star[n - 1 - q] = 1'b0; got++; end
  endtask

  task automatic check_types(input string tag, input int ep, input int ef, input int n_old, input int len);
    int bad;
    bad = 0;
    for (int p = 0; p < N; p++)
      if (fr[p] !== rfr[p] || pc[p] !== rpc[p] || rm[p] !== rm_star[p]) bad++;
    checks += 4;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d bit types differ", tag, bad); end
    if (int'(gen_pairs) != ep || int'(gen_fixes) != ef) begin
      failures++; $display("FAIL %s: pairs %0d/%0d fixes %0d/%0d", tag, gen_pairs, ep, gen_fixes, ef);
    end
    if (gen_err) begin failures++; $display("FAIL %s: err", tag); end
    bad = 0;
    for (int p = n_old; p < len; p++)
      if (!rfs[p] && !rfr[p]) begin
        if (int'(dut.u_gen.lut[p]) != rlut[p]) bad++;
      end
    if (bad != 0) begin failures++; $display("FAIL %s: %0d lut entries differ", tag, bad); end
  endtask

  task automatic transmit(input int len, input bit first, input int n_old);
    int ep, ef, cyc;
    bit ee;
    n_len = (AW+1)'(len);
    for (int p = 0; p < N; p++) rfs[p] = fr_star[p];
    if (first) begin
      for (int p = 0; p < N; p++) begin rfr[p] = fr_star[p]; rpc[p] = 0; end
      ep = 0; ef = 0;
    end else begin
      bit_types_ref(rfr, rpc, rlut, rfs, n_old, len, NSZ, ep, ef, ee);
    end
    @(negedge clk);
    if (first) gen_first = 1; else gen_next = 1;
    @(negedge clk); gen_first = 0; gen_next = 0;
    cyc = 1;
    while (!gen_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (cyc > len + 3) begin failures++; $display("FAIL generation took %0d clocks", cyc); end
    check_types($sformatf("Tx N=%0d", len), ep, ef, first ? len : n_old, len);
    cnt_pairs += ep; cnt_fixes += ef;
  endtask

  // Decode one codeword of the current transmission (length len).
  task automatic decode(input int len);
    int n, n1v, tru, sz, f, cyc, p, bad;
    int a [L][NVR];
    logic [NV-1:0] fb [L*LA];
    int fp [L*LA];
    int srt [$];
    logic [NV-1:0] pct, ut, ivt, b0;
    n = mother(len);
    n1v = int'(n1);
    sz = NSZ;
    // transmitter: information bits, then PC_frozen copies in decoding order
    for (int i = 0; i < N; i++) u[i] = (i < n && !rfr[i]) ? 1'($urandom) : 1'b0;
    for (int i = n - 1; i >= 0; i--)
      if (i >= n1v && (!rfr[i] || rpc[i])) u[rlut[i]] = u[i];
    @(negedge clk); dec_init = 1; @(negedge clk); dec_init = 0;
    foreach (ref_mem[l, i]) ref_mem[l][i] = 0;
    tru = 0;
    for (int l = 0; l < L; l++) node_pm[l] = (l == tru) ? '0 : QM'($urandom_range(1, 200));
    for (int q0 = 0; q0 < n; q0 += sz) begin
      ut = '0; ivt = '0;
      for (int k = 0; k < sz; k++) begin
        ut[k]  = u[n - 1 - q0 - k];
        ivt[k] = !rfr[n - 1 - q0 - k];
      end
      for (int l = 0; l < L; l++) begin
        if (l == tru) begin
          node_cand[l][0] = polar_ref(ut & ivt, 4);
          node_cand[l][1] = NV'($urandom);
          b0 = polar_ref(ut, 4);
          for (int k = 0; k < NV; k++) begin
            a[l][k] = b0[k] ? -$urandom_range(1, 30) : $urandom_range(1, 30);
            node_alpha[l][k] = QI'(a[l][k]);
          end
        end else begin
          for (int j = 0; j < LA; j++) node_cand[l][j] = NV'($urandom);
          for (int k = 0; k < NV; k++) begin
            a[l][k] = $urandom_range(0, 60) - 30;
            node_alpha[l][k] = QI'(a[l][k]);
          end
        end
      end
      for (int l = 0; l < L; l++) begin
        pct = '0;
        for (int k = 0; k < sz; k++) pct[k] = ref_mem[l][n - 1 - q0 - k];
        pct = polar_ref(pct, 4);
        for (int j = 0; j < LA; j++) begin
          f = l * LA + j;
          fb[f] = node_cand[l][j] ^ pct;
          fp[f] = pm_ref(a[l], int'(node_pm[l]), fb[f], 4, QM);
        end
      end
      node_q0 = AW'(q0);
      @(negedge clk); node_start = 1; @(negedge clk); node_start = 0;
      cyc = 1;
      while (!node_done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 4 + sz) begin failures++; $display("FAIL node latency %0d", cyc); end
      srt.delete();
      for (int i = 0; i < L * LA; i++) srt.push_back(fp[i]);
      srt.sort();
      bad = 0;
      for (int l = 0; l < L; l++) begin
        f = int'(node_parent[l]) * LA + int'(node_csel[l]);
        if (int'(node_pm_out[l]) != fp[f] || node_beta[l] !== fb[f] || int'(node_pm_out[l]) != srt[l]) bad++;
        if (int'(node_parent[l]) != l) cnt_perm++;
      end
      checks++;
      if (bad != 0) begin failures++; if (failures < 10) $display("FAIL node q0=%0d: %0d survivors wrong", q0, bad); end
      // follow the correct path
      f = -1;
      for (int l = 0; l < L; l++)
        if (int'(node_parent[l]) == tru && node_csel[l] == 1'b0 && f < 0) f = l;
      checks++;
      if (f < 0 || node_beta[f] !== polar_ref(ut, 4) || node_pm_out[f] != '0) begin
        failures++;
        if (failures < 10) $display("FAIL N=%0d node q0=%0d: correct path lost or wrong", len, q0);
        f = (f < 0) ? 0 : f;
      end
      // reference copy and routing
      tmp = ref_mem;
      for (int l = 0; l < L; l++) if (int'(node_parent[l]) != l)
        for (int i = 0; i < n; i++) ref_mem[l][i] = tmp[node_parent[l]][i];
      for (int l = 0; l < L; l++) begin
        b0 = polar_ref(node_beta[l], 4);
        for (int k = 0; k < sz; k++) begin
          p = n - 1 - q0 - k;
          if (p >= n1v && (!rfr[p] || rpc[p])) begin
            ref_mem[l][rlut[p]] = b0[k];
            if (l == 0) cnt_routes++;
          end
        end
      end
      tru = f;
      node_pm = node_pm_out;
    end
    bad = 0;
    for (int l = 0; l < L; l++) for (int i = 0; i < N; i++)
      if (dut.u_pcf.mem[l][i] !== ref_mem[l][i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL N=%0d: %0d PC_frozen memory bits differ", len, bad); end
  endtask

  initial begin
    int n_prev;
    rfr = new[N]; rpc = new[N]; rfs = new[N]; rlut = new[N];
    repeat (2) @(negedge clk);
    rst_n = 1;
    construct(2048);
    transmit(2048, 1, 0);
    decode(2048);
    n_prev = 2048;
    for (int len = 3072; len <= N; len += 1024) begin
      construct(len);
      if (mother(len) > mother(n_prev)) cnt_grow++; else cnt_same++;
      transmit(len, 0, n_prev);
      checks++;
      if (int'(n_mother) != mother(len)) begin failures++; $display("FAIL mother length %0d", n_mother); end
      decode(len);
      $display("Tx N=%0d done: pairs so far %0d, routed bits so far %0d", len, cnt_pairs, cnt_routes);
      n_prev = len;
    end
    // hand-made transmission pair with an intra-node dependency
    fr_star = '1; rm_star = '0;
    fr_star[3] = 0; fr_star[35] = 0; fr_star[37] = 0;
    transmit(40, 1, 0);
    fr_star = '1; fr_star[3] = 0; fr_star[41] = 0; fr_star[50] = 0;
    transmit(56, 0, 40);
    decode(56);
    checks++;
    if (cnt_pairs == 0 || cnt_fixes == 0 || cnt_grow == 0 || cnt_same == 0 || cnt_routes == 0 || cnt_perm == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("mechanisms: pairs=%0d intra-node fixes=%0d mother growth=%0d same-mother=%0d routed bits=%0d reordered survivors=%0d",
             cnt_pairs, cnt_fixes, cnt_grow, cnt_same, cnt_routes, cnt_perm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
