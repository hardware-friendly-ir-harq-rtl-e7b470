// harq_node_unit: decodes one fast node of the SCL tree with IR-HARQ
// support, following the node control flow of the paper:
//   ascend  - read this node's PC_frozen values of every path and encode
//             them to stage s with the XOR array (line 2);
//   fork    - XOR them into each of the LA stored candidate codewords of
//             the path and compute the forked path metrics (lines 3-9);
//   select  - keep the L forks of smallest metric (line 11) and make every
//             surviving path's PC_frozen row a copy of its parent's (line 12);
//   descend - transform the surviving beta(s) back to stage-0 bits
//             (line 14);
//   route   - for each bit of the node, in order, whose paper index is at
//             least N^1 and that is an information or PC_frozen bit, write
//             its stage-0 value into the PC_frozen memory of the path at
//             lut[index] (lines 15-19), one bit per clock for all paths.
//
// The SCL core addresses a node by its first bit q0 in decoding order and
// its stage s (size 2^s <= NV); n_mother is the current mother code length.
// Decoding-order position q has paper index p = n_mother - 1 - q, so the
// node covers p in [n_mother - q0 - 2^s, n_mother - q0) with bit k of the
// node at p = n_mother - 1 - q0 - k. All node-level vectors (alpha, cand,
// beta) use bit k = position q0 + k.
//
// Timing: start is sampled at a clock edge in S_IDLE; ascend, select and
// descend take one clock each and routing 2^s clocks, and done is high for
// the clock after the last routing clock, i.e. 4 + 2^s clock edges after
// the one that took start. The unit accepts a new start in that clock. parent, csel (candidate index), beta and pm_out are valid
// from the clock after select until the next start. Inputs are sampled at
// start. The phase order is the paper's; the clock-by-clock schedule and
// the one-bit-per-clock routing (the paper's memory-based alternative to a
// multiplexer tree) are this design's choices.
module harq_node_unit #(
  parameter int unsigned N  = 8192,
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 16,
  parameter int unsigned LA = 2,
  parameter int unsigned QI = 8,
  parameter int unsigned QM = 11,
  localparam int unsigned AW  = $clog2(N),
  localparam int unsigned SW  = $clog2($clog2(NV) + 1),
  localparam int unsigned CW  = $clog2(LA + 1),
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned JW  = (LA > 1) ? $clog2(LA) : 1,
  localparam int unsigned FW  = $clog2(L * LA),
  localparam int unsigned KW  = $clog2(NV) + 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // node request from the SCL core
  input  logic                              start,
  input  logic [AW-1:0]                     q0,
  input  logic [SW-1:0]                     s,
  input  logic [AW:0]                       n_mother,
  input  logic signed [L-1:0][NV-1:0][QI-1:0] alpha,
  input  logic [L-1:0][QM-1:0]              pm_in,
  input  logic [L-1:0][LA-1:0][NV-1:0]      cand,
  input  logic [CW-1:0]                     n_cand,
  output logic                              busy,
  output logic                              done,
  output logic [L-1:0][LW-1:0]              parent,
  output logic [L-1:0][JW-1:0]              csel,
  output logic [L-1:0][NV-1:0]              beta,
  output logic [L-1:0][QM-1:0]              pm_out,
  // bit types
  input  logic [N-1:0]                      fr,
  input  logic [N-1:0]                      pc,
  input  logic [AW:0]                       n1,
  output logic [AW-1:0]                     lut_raddr,
  input  logic [AW-1:0]                     lut_rdata,
  // PC_frozen memory
  output logic [AW-1:0]                     pcf_rd_base,
  input  logic [L-1:0][NV-1:0]              pcf_rd_data,
  output logic                              pcf_copy_en,
  output logic [L-1:0][LW-1:0]              pcf_copy_parent,
  output logic [L-1:0]                      pcf_wr_en,
  output logic [AW-1:0]                     pcf_wr_addr,
  output logic [L-1:0]                      pcf_wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_ASC, S_SEL, S_DESC, S_ROUTE} state_t;
  state_t state;

  // latched request
  logic signed [L-1:0][NV-1:0][QI-1:0] alpha_q;
  logic [L-1:0][QM-1:0]                pm_q;
  logic [L-1:0][LA-1:0][NV-1:0]        cand_q;
  logic [CW-1:0]                       ncand_q;
  logic [SW-1:0]                       s_q;
  logic [AW:0]                         sp_q;     // lowest paper index of the node
  logic [KW-1:0]                       size_q;   // 2^s
  logic [KW-1:0]                       k_q;      // routing bit counter

  // fork results and stage-0 bits of the survivors
  logic [L*LA-1:0][NV-1:0]             fbeta_q;
  logic [L*LA-1:0][QM-1:0]             fpm_q;
  logic [L-1:0][NV-1:0]                beta0_q;

  // ---------------------------------------------------------------- ascend
  logic [AW:0]   win_off;
  logic [L-1:0][NV-1:0] pc_tree, pc_enc;
  logic [L-1:0][LA-1:0][NV-1:0] fbeta_c;
  logic [L-1:0][LA-1:0][QM-1:0] fpm_c;
  logic [L-1:0][NV-1:0] beta0_c;

  assign pcf_rd_base = AW'(sp_q) & ~AW'(NV - 1);
  assign win_off     = sp_q - (AW+1)'(pcf_rd_base);

  always_comb begin
    for (int l = 0; l < int'(L); l++) begin
      pc_tree[l] = '0;
      for (int k = 0; k < int'(NV); k++)
        if (k < int'(size_q))
          pc_tree[l][k] = pcf_rd_data[l][int'(win_off) + int'(size_q) - 1 - k];
    end
  end

  for (genvar l = 0; l < int'(L); l++) begin : g_path
    polar_xor_tree #(.NV(NV)) u_asc (.u(pc_tree[l]), .s(s_q), .x(pc_enc[l]));
    candidate_gen #(.NV(NV), .LA(LA), .QI(QI), .QM(QM)) u_cand (
      .alpha (alpha_q[l]), .pm_in(pm_q[l]), .cand(cand_q[l]), .pcenc(pc_enc[l]),
      .s(s_q), .n_cand(ncand_q), .beta_f(fbeta_c[l]), .pm_f(fpm_c[l]));
    polar_xor_tree #(.NV(NV)) u_desc (.u(beta[l]), .s(s_q), .x(beta0_c[l]));
  end

  // ---------------------------------------------------------------- select
  logic [L-1:0][FW-1:0] sel_idx;
  logic [L-1:0][QM-1:0] sel_pm;

  path_sorter #(.M(L * LA), .L(L), .QM(QM)) u_sort (
    .pm(fpm_q), .sel_idx(sel_idx), .sel_pm(sel_pm));

  always_comb begin
    pcf_copy_en = (state == S_SEL);
    for (int l = 0; l < int'(L); l++) pcf_copy_parent[l] = LW'(sel_idx[l] / LA);
  end

  // ----------------------------------------------------------------- route
  logic [AW:0] rt_p;
  logic        rt_cond;
  assign rt_p       = sp_q + (AW+1)'(size_q) - 1'b1 - (AW+1)'(k_q);
  assign lut_raddr  = rt_p[AW-1:0];
  assign rt_cond    = (state == S_ROUTE) && (rt_p >= n1) &&
                      (!fr[rt_p[AW-1:0]] || pc[rt_p[AW-1:0]]);
  assign pcf_wr_addr = lut_rdata;
  always_comb begin
    for (int l = 0; l < int'(L); l++) begin
      pcf_wr_en[l]   = rt_cond;
      pcf_wr_data[l] = beta0_q[l][k_q[KW-2:0]];
    end
  end

  // ------------------------------------------------------------ controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      k_q     <= '0;
      s_q     <= '0;
      sp_q    <= '0;
      size_q  <= KW'(1);
      ncand_q <= '0;
      alpha_q <= '0;
      pm_q    <= '0;
      cand_q  <= '0;
      fbeta_q <= '0;
      fpm_q   <= '0;
      beta0_q <= '0;
      parent  <= '0;
      csel    <= '0;
      beta    <= '0;
      pm_out  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          alpha_q <= alpha;
          pm_q    <= pm_in;
          cand_q  <= cand;
          ncand_q <= n_cand;
          s_q     <= s;
          size_q  <= KW'(1) << s;
          sp_q    <= n_mother - (AW+1)'(q0) - ((AW+1)'(1) << s);
          state   <= S_ASC;
        end
        S_ASC: begin
          for (int l = 0; l < int'(L); l++)
            for (int j = 0; j < int'(LA); j++) begin
              fbeta_q[l * LA + j] <= fbeta_c[l][j];
              fpm_q[l * LA + j]   <= fpm_c[l][j];
            end
          state <= S_SEL;
        end
        S_SEL: begin
          for (int l = 0; l < int'(L); l++) begin
            parent[l] <= LW'(sel_idx[l] / LA);
            csel[l]   <= JW'(sel_idx[l] % LA);
            beta[l]   <= fbeta_q[sel_idx[l]];
            pm_out[l] <= sel_pm[l];
          end
          state <= S_DESC;
        end
        S_DESC: begin
          beta0_q <= beta0_c;
          k_q     <= '0;
          state   <= S_ROUTE;
        end
        S_ROUTE: begin
          if (k_q == size_q - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
          k_q <= k_q + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
