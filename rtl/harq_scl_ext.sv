// harq_scl_ext: IR-HARQ support for a fast polar SCL decoder, the part of
// the decoder that the hardware-friendly IR-HARQ scheme adds.
//
// It holds the bit-type generator with its fr/rm/pc vectors and
// I_delta -> PC_frozen lut, the L x N PC_frozen value memory and the HARQ
// node unit. The conventional SCL core (LLR memory, f/g units, partial
// sums, tree scheduling, fast-node candidate lists) and the code
// construction are outside: the construction delivers fr_star/rm_star for
// each transmission, and the core reads the bit types (fr, rm, pc, iv,
// fr_z, id) to classify its nodes and hands every fast node to the node
// unit with its LLRs, path metrics and candidates.
//
// Use: pulse gen_first (n_len = N^1) for the first transmission, or
// gen_next (n_len = N^t) for each retransmission, and wait for gen_done.
// Before decoding a codeword pulse dec_init to clear the PC_frozen memory.
// Then request nodes in decoding order with node_start (see
// harq_node_unit for timing). The mother code length used to map decoding
// positions to bit indices is the smallest power of two >= N^t. The
// composition follows the paper's memory accounting; the port split is
// this design's choice.
module harq_scl_ext
  import harq_pkg::*;
#(
  parameter int unsigned N       = N_MAX,
  parameter int unsigned L       = L_LIST,
  parameter int unsigned NV      = NV_MAX,
  parameter int unsigned LA      = LA_CAND,
  parameter int unsigned QI      = QI_BITS,
  parameter int unsigned QM      = QM_BITS,
  parameter int unsigned NODE    = NODE_SZ,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned SW = $clog2($clog2(NV) + 1),
  localparam int unsigned CW = $clog2(LA + 1),
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned JW = (LA > 1) ? $clog2(LA) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // bit-type generation
  input  logic                                gen_first,
  input  logic                                gen_next,
  input  logic [AW:0]                         n_len,
  input  logic [N-1:0]                        fr_star,
  input  logic [N-1:0]                        rm_star,
  output logic                                gen_busy,
  output logic                                gen_done,
  output logic                                gen_err,
  output logic [AW:0]                         gen_pairs,
  output logic [AW:0]                         gen_fixes,
  output logic [N-1:0]                        fr,
  output logic [N-1:0]                        rm,
  output logic [N-1:0]                        pc,
  output logic [N-1:0]                        iv,
  output logic [N-1:0]                        fr_z,
  output logic [N-1:0]                        id,
  output logic [AW:0]                         n1,
  output logic [AW:0]                         n_cur,
  output logic [AW:0]                         n_mother,
  // decoding
  input  logic                                dec_init,
  input  logic                                node_start,
  input  logic [AW-1:0]                       node_q0,
  input  logic [SW-1:0]                       node_s,
  input  logic signed [L-1:0][NV-1:0][QI-1:0] node_alpha,
  input  logic [L-1:0][QM-1:0]                node_pm,
  input  logic [L-1:0][LA-1:0][NV-1:0]        node_cand,
  input  logic [CW-1:0]                       node_ncand,
  output logic                                node_busy,
  output logic                                node_done,
  output logic [L-1:0][LW-1:0]                node_parent,
  output logic [L-1:0][JW-1:0]                node_csel,
  output logic [L-1:0][NV-1:0]                node_beta,
  output logic [L-1:0][QM-1:0]                node_pm_out
);
  logic [AW-1:0]        lut_raddr, lut_rdata;
  logic [AW-1:0]        pcf_rd_base, pcf_wr_addr;
  logic [L-1:0][NV-1:0] pcf_rd_data;
  logic                 pcf_copy_en;
  logic [L-1:0][LW-1:0] pcf_copy_parent;
  logic [L-1:0]         pcf_wr_en, pcf_wr_data;

  bit_type_gen #(.N(N), .NODE_SZ(NODE)) u_gen (
    .clk, .rst_n,
    .start_first(gen_first), .start_next(gen_next), .n_len,
    .fr_star, .rm_star,
    .busy(gen_busy), .done(gen_done), .err(gen_err),
    .fr, .rm, .pc, .iv, .fr_z, .id, .n1, .n_cur,
    .n_pairs(gen_pairs), .n_fixes(gen_fixes),
    .lut_raddr, .lut_rdata);

  always_comb begin
    n_mother = (AW+1)'(1);
    for (int b = 0; b <= int'(AW); b++)
      if (((AW+1)'(1) << b) < n_cur) n_mother = (AW+1)'(1) << (b + 1);
  end

  pcf_mem #(.N(N), .L(L), .NV(NV)) u_pcf (
    .clk, .rst_n, .clr(dec_init),
    .rd_base(pcf_rd_base), .rd_data(pcf_rd_data),
    .copy_en(pcf_copy_en), .copy_parent(pcf_copy_parent),
    .wr_en(pcf_wr_en), .wr_addr(pcf_wr_addr), .wr_data(pcf_wr_data));

  harq_node_unit #(.N(N), .L(L), .NV(NV), .LA(LA), .QI(QI), .QM(QM)) u_node (
    .clk, .rst_n,
    .start(node_start), .q0(node_q0), .s(node_s), .n_mother,
    .alpha(node_alpha), .pm_in(node_pm), .cand(node_cand), .n_cand(node_ncand),
    .busy(node_busy), .done(node_done), .parent(node_parent), .csel(node_csel),
    .beta(node_beta), .pm_out(node_pm_out),
    .fr, .pc, .n1, .lut_raddr, .lut_rdata,
    .pcf_rd_base, .pcf_rd_data, .pcf_copy_en, .pcf_copy_parent,
    .pcf_wr_en, .pcf_wr_addr, .pcf_wr_data);
endmodule
