// tb_harq_node_unit: the node unit together with a PC_frozen memory, on a
// small code (N = 64, first transmission 32 bits) with random bit types and
// a random I_delta -> PC_frozen lut. Random nodes of every size 1..16 are
// decoded; for each the testbench recomputes, from its own copy of the
// PC_frozen memory, the encoded PC_frozen bits, all L x La forked
// candidates and metrics, checks that the survivors are distinct forks
// holding their own candidate and metric and are the L smallest metrics in
// ascending order, then applies the path copy and the routing to its copy
// and compares the whole memory. The latency 4 + 2^s clocks is checked.
module tb_harq_node_unit;
  import harq_ref_pkg::*;
  localparam int N = 64, AW = 6, L = 8, NV = 16, LA = 2, QI = 8, QM = 11, N1 = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] q0 = '0;
  logic [2:0]    s = '0;
  logic [AW:0]   n_mother = (AW+1)'(N);
  logic signed [L-1:0][NV-1:0][QI-1:0] alpha;
  logic [L-1:0][QM-1:0]          pm_in, pm_out;
  logic [L-1:0][LA-1:0][NV-1:0]  cand;
  logic [1:0]                    n_cand;
  logic busy, done;
  logic [L-1:0][2:0]             parent;
  logic [L-1:0][0:0]             csel;
  logic [L-1:0][NV-1:0]          beta;
  logic [N-1:0] fr, pc;
  logic [AW:0]  n1 = (AW+1)'(N1);
  logic [AW-1:0] lut_raddr, lut_rdata;
  logic [AW-1:0] pcf_rd_base, pcf_wr_addr;
  logic [L-1:0][NV-1:0] pcf_rd_data;
  logic pcf_copy_en;
  logic [L-1:0][2:0] pcf_copy_parent;
  logic [L-1:0] pcf_wr_en, pcf_wr_data;
  logic clr = 0;
  int lut [N];
  bit ref_mem [L][N], tmp [L][N];
  int checks = 0, failures = 0, n_routes = 0, n_perm = 0;

  assign lut_rdata = AW'(lut[lut_raddr]);

  harq_node_unit #(.N(N), .L(L), .NV(NV), .LA(LA), .QI(QI), .QM(QM)) dut (.*);
  pcf_mem #(.N(N), .L(L), .NV(NV)) u_mem (.clk, .rst_n, .clr,
    .rd_base(pcf_rd_base), .rd_data(pcf_rd_data), .copy_en(pcf_copy_en),
    .copy_parent(pcf_copy_parent), .wr_en(pcf_wr_en), .wr_addr(pcf_wr_addr),
    .wr_data(pcf_wr_data));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [L][NVR];
    logic [NV-1:0] fb [L*LA];
    int fp [L*LA];
    int srt [$];
    bit used [L*LA];
    int sz, f, cyc, p;
    logic [NV-1:0] pct, b0;
    for (int i = 0; i < N; i++) begin
      fr[i] = $urandom_range(0, 1);
      pc[i] = fr[i] && ($urandom_range(0, 2) == 0);
      lut[i] = $urandom_range(0, N - 1);
    end
    foreach (ref_mem[l, i]) ref_mem[l][i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      s = 3'($urandom_range(0, 4));
      sz = 1 << s;
      q0 = AW'($urandom_range(0, N / sz - 1) * sz);
      n_cand = 2'($urandom_range(1, 2));
      for (int l = 0; l < L; l++) begin
        pm_in[l] = QM'($urandom_range(0, 300));
        for (int j = 0; j < LA; j++) cand[l][j] = NV'($urandom);
        for (int k = 0; k < NV; k++) begin
          a[l][k] = $urandom_range(0, 60) - 30;
          alpha[l][k] = QI'(a[l][k]);
        end
      end
      // reference forks
      for (int l = 0; l < L; l++) begin
        pct = '0;
        for (int k = 0; k < sz; k++) pct[k] = ref_mem[l][N - 1 - int'(q0) - k];
        pct = polar_ref(pct, int'(s));
        for (int j = 0; j < LA; j++) begin
          f = l * LA + j;
          fb[f] = (cand[l][j] ^ pct) & NV'((32'd1 << sz) - 1);
          fp[f] = (j >= n_cand) ? 2047 : pm_ref(a[l], int'(pm_in[l]), fb[f], int'(s), QM);
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 4 + sz) begin failures++; $display("FAIL latency %0d for s=%0d", cyc, s); end
      // survivors
      srt.delete();
      for (int i = 0; i < L * LA; i++) begin srt.push_back(fp[i]); used[i] = 0; end
      srt.sort();
      for (int l = 0; l < L; l++) begin
        f = int'(parent[l]) * LA + int'(csel[l]);
        checks += 3;
        if (used[f]) begin failures++; $display("FAIL fork %0d kept twice", f); end
        used[f] = 1;
        if (int'(pm_out[l]) != fp[f] || beta[l] !== fb[f]) begin
          failures++; if (failures < 10) $display("FAIL survivor %0d pm %0d/%0d", l, pm_out[l], fp[f]);
        end
        if (int'(pm_out[l]) != srt[l]) begin
          failures++; if (failures < 10) $display("FAIL rank %0d pm %0d exp %0d", l, pm_out[l], srt[l]);
        end
        if (int'(parent[l]) != l) n_perm++;
      end
      // path copy and routing in the reference memory
      tmp = ref_mem;
      for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) ref_mem[l][i] = tmp[parent[l]][i];
      for (int l = 0; l < L; l++) begin
        b0 = polar_ref(beta[l], int'(s));
        for (int k = 0; k < sz; k++) begin
          p = N - 1 - int'(q0) - k;
          if (p >= N1 && (!fr[p] || pc[p])) begin
            ref_mem[l][lut[p]] = b0[k];
            if (l == 0) n_routes++;
          end
        end
      end
      for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) begin
        checks++;
        if (u_mem.mem[l][i] !== ref_mem[l][i]) begin
          failures++; if (failures < 10) $display("FAIL mem l=%0d p=%0d t=%0d", l, i, t);
        end
      end
    end
    checks++;
    if (n_routes == 0 || n_perm == 0) begin failures++; $display("FAIL no routing or no path copy"); end
    $display("node unit: routed bits=%0d reordered survivors=%0d", n_routes, n_perm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
