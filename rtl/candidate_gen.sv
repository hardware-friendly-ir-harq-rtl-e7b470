// candidate_gen: forks one list path into LA candidate paths for a node
// (lines 3-9 of the node control flow).
//
// Each stored candidate codeword of the fast node (its information-bit
// part, encoded to stage s) is XOR-ed with the encoded PC_frozen bits of
// this path, which gives the full candidate beta'(s) = cand ^ pcenc. The
// forked path metric is the parent metric plus |alpha_k| for every bit k of
// the node whose candidate bit disagrees with the hard decision of
// alpha_k, the node-level form of the LLR-based SCL metric. Sums saturate
// at 2^QM-1. Candidates with index >= n_cand get the saturated metric so
// the selector never keeps them. Bits at and above 2^s are ignored and
// returned as zero. Combinational.
// The XOR combination follows the paper; the metric formula is the one of
// the fast list decoders the paper builds on; saturation and the n_cand
// mask are this design's choices.
module candidate_gen #(
  parameter int unsigned NV = 16,
  parameter int unsigned LA = 2,
  parameter int unsigned QI = 8,
  parameter int unsigned QM = 11,
  localparam int unsigned SW = $clog2($clog2(NV) + 1),
  localparam int unsigned CW = $clog2(LA + 1)
) (
  input  logic signed [NV-1:0][QI-1:0] alpha,
  input  logic        [QM-1:0]         pm_in,
  input  logic [LA-1:0][NV-1:0]        cand,
  input  logic [NV-1:0]                pcenc,
  input  logic [SW-1:0]                s,
  input  logic [CW-1:0]                n_cand,
  output logic [LA-1:0][NV-1:0]        beta_f,
  output logic [LA-1:0][QM-1:0]        pm_f
);
  localparam int unsigned SUMW = QM + QI + $clog2(NV) + 1;
  localparam logic [QM-1:0] PM_MAX = '1;

  always_comb begin
    logic [NV-1:0]   mask;
    logic [SUMW-1:0] acc;
    logic [QI-1:0]   mag;
    mask = '0;
    acc  = '0;
    mag  = '0;
    for (int k = 0; k < int'(NV); k++) mask[k] = (k < (1 << s));
    for (int j = 0; j < int'(LA); j++) begin
      beta_f[j] = (cand[j] ^ pcenc) & mask;
      acc = SUMW'(pm_in);
      for (int k = 0; k < int'(NV); k++) begin
        mag = alpha[k][QI-1] ? QI'(-alpha[k]) : alpha[k];
        if (mask[k] && (beta_f[j][k] != alpha[k][QI-1])) acc = acc + SUMW'(mag);
      end
      if (j >= int'(n_cand) || acc > SUMW'(PM_MAX)) pm_f[j] = PM_MAX;
      else pm_f[j] = acc[QM-1:0];
    end
  end
endmodule
