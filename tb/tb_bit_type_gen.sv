// tb_bit_type_gen: runs a sequence of transmissions through the bit-type
// generator (N = 256, first transmission 64 bits of which 30 information
// bits, then +32 bits each time up to 256, so the mother code grows from
// 64 to 128 to 256 and some steps stay inside one mother code). The plain
// construction for each length ranks tree positions by (Hamming weight,
// position) and punctures the leftmost bits. After every step fr, rm, pc,
// the derived iv/fr_z/id vectors, every new lut entry and the pair count
// are compared with the set-based reference, and the sweep time is checked
// against its bound of N^t clocks. Two hand-made transmissions then force
// an intra-node dependency and an I_delta bit without a partner (err).
module tb_bit_type_gen;
  import harq_ref_pkg::*;
  localparam int N = 256, AW = 8, NODE = 16, K = 30;
  logic clk = 0, rst_n = 0, start_first = 0, start_next = 0;
  logic [AW:0]   n_len = '0;
  logic [N-1:0]  fr_star = '1, rm_star = '1;
  logic busy, done, err;
  logic [N-1:0]  fr, rm, pc, iv, fr_z, id;
  logic [AW:0]   n1, n_cur, n_pairs, n_fixes;
  logic [AW-1:0] lut_raddr = '0, lut_rdata;
  int checks = 0, failures = 0;
  int cnt_pairs = 0, cnt_fixes = 0, cnt_err = 0, cnt_grow = 0;

  bit rfr[], rpc[], rfs[];
  int rlut[];

  bit_type_gen #(.N(N), .NODE_SZ(NODE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mother(input int x);
    int n = 1;
    while (n < x) n = n * 2;
    return n;
  endfunction

  // Plain (non-HARQ) construction of a length-len code with K information
  // bits, in paper index order p = n - 1 - q.
  task automatic construct(input int len);
    int n, w, got;
    n = mother(len);
    fr_star = '1; rm_star = '1;
    for (int q = n - len; q < n; q++) rm_star[n - 1 - q] = 1'b0;
    got = 0;
    for (w = $clog2(n); w >= 0; w--)
      for (int q = n - 1; q >= n - len; q--)
        if ($countones(q) == w && got < K) begin fr_star[n - 1 - q] = 1'b0; got++; end
  endtask

  task automatic check_state(input string tag, input int exp_pairs, input int exp_fixes,
                             input bit exp_err, input int n1_ref);
    for (int p = 0; p < N; p++) begin
      checks++;
      if (fr[p] !== rfr[p] || pc[p] !== rpc[p] || rm[p] !== rm_star[p] ||
          iv[p] !== !rfr[p] || fr_z[p] !== (rfr[p] && !rpc[p]) ||
          id[p] !== (p >= n1_ref && !rfr[p])) begin
        failures++;
        if (failures < 10) $display("FAIL %s p=%0d fr %b/%b pc %b/%b", tag, p, fr[p], rfr[p], pc[p], rpc[p]);
      end
    end
    checks += 3;
    if (int'(n_pairs) != exp_pairs) begin failures++; $display("FAIL %s pairs %0d exp %0d", tag, n_pairs, exp_pairs); end
    if (int'(n_fixes) != exp_fixes) begin failures++; $display("FAIL %s fixes %0d exp %0d", tag, n_fixes, exp_fixes); end
    if (err !== exp_err) begin failures++; $display("FAIL %s err %b", tag, err); end
  endtask

  task automatic run_next(input int len, input int n_old, output int cycles);
    n_len = (AW+1)'(len);
    @(negedge clk); start_next = 1; @(negedge clk); start_next = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int n_prev, cyc, ep, ef;
    bit ee;
    rfr = new[N]; rpc = new[N]; rfs = new[N]; rlut = new[N];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- first transmission
    construct(64);
    n_len = 9'd64;
    @(negedge clk); start_first = 1; @(negedge clk); start_first = 0;
    checks++;
    if (!done) begin failures++; $display("FAIL first: no done"); end
    for (int p = 0; p < N; p++) begin rfr[p] = fr_star[p]; rpc[p] = 0; end
    check_state("tx1", 0, 0, 0, 64);
    n_prev = 64;
    // ---- retransmissions
    for (int len = 96; len <= N; len += 32) begin
      construct(len);
      if (mother(len) > mother(n_prev)) cnt_grow++;
      for (int p = 0; p < N; p++) rfs[p] = fr_star[p];
      bit_types_ref(rfr, rpc, rlut, rfs, n_prev, len, NODE, ep, ef, ee);
      run_next(len, n_prev, cyc);
      check_state($sformatf("tx len %0d", len), ep, ef, ee, 64);
      for (int p = n_prev; p < len; p++) if (!rfs[p] && rfr[p] == 0) begin
        lut_raddr = AW'(p); #1;
        checks++;
        if (int'(lut_rdata) != rlut[p]) begin failures++; $display("FAIL lut[%0d]=%0d exp %0d", p, lut_rdata, rlut[p]); end
      end
      checks++;
      if (cyc > len + 3) begin failures++; $display("FAIL sweep took %0d clocks for N=%0d", cyc, len); end
      cnt_pairs += ep; cnt_fixes += ef;
      n_prev = len;
    end
    // ---- intra-node dependency: old info at 3, 35, 37; new info at 41, 50
    fr_star = '1; rm_star = '0;
    fr_star[3] = 0; fr_star[35] = 0; fr_star[37] = 0;
    n_len = 9'd40;
    @(negedge clk); start_first = 1; @(negedge clk); start_first = 0;
    for (int p = 0; p < N; p++) begin rfr[p] = fr_star[p]; rpc[p] = 0; end
    fr_star = '1; fr_star[3] = 0; fr_star[41] = 0; fr_star[50] = 0;
    for (int p = 0; p < N; p++) rfs[p] = fr_star[p];
    bit_types_ref(rfr, rpc, rlut, rfs, 40, 56, NODE, ep, ef, ee);
    run_next(56, 40, cyc);
    check_state("intra", ep, ef, ee, 40);
    checks += 2;
    if (ef != 1 || fr[41] !== 1'b1 || fr[35] !== 1'b0) begin failures++; $display("FAIL intra-node fix not applied"); end
    lut_raddr = 8'd50; #1;
    if (lut_rdata !== 8'd37 || pc[37] !== 1'b1) begin failures++; $display("FAIL intra pair 50->37"); end
    cnt_fixes += ef;
    // ---- no partner: new info bit but every old info bit stays
    fr_star = '1; fr_star[3] = 0; fr_star[35] = 0; fr_star[50] = 0; fr_star[60] = 0;
    run_next(64, 56, cyc);
    checks++;
    if (!err) begin failures++; $display("FAIL err not raised"); end
    else cnt_err++;
    // every mechanism must have happened
    checks++;
    if (cnt_pairs == 0 || cnt_fixes == 0 || cnt_err == 0 || cnt_grow == 0) begin
      failures++; $display("FAIL mechanisms pairs=%0d fixes=%0d err=%0d grow=%0d", cnt_pairs, cnt_fixes, cnt_err, cnt_grow);
    end
    $display("bit_type_gen: pairs=%0d fixes=%0d err=%0d mother-growth=%0d", cnt_pairs, cnt_fixes, cnt_err, cnt_grow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
