// harq_pkg: sizes shared by the IR-HARQ extension of a polar SCL decoder.
//
// The defaults are the main configuration of the evaluation: list size
// L = 8, up to seven transmissions growing a (2048, 1048) code by 1024 bits
// each time, so the mother code reaches N_MAX = 8192 bits, internal LLRs of
// QI = 8 bits and path metrics of QM = 11 bits. The largest fast node the
// HARQ node unit accepts (NV_MAX), the number of candidates per path (LA)
// and the node granularity used for the intra-node dependency check
// (NODE_SZ) are not given numerically and are this design's choice.
package harq_pkg;
  parameter int unsigned N_MAX   = 8192; // largest mother code length n
  parameter int unsigned L_LIST  = 8;    // list size L
  parameter int unsigned NV_MAX  = 16;   // largest node handled by the node unit
  parameter int unsigned LA_CAND = 2;    // candidate codewords per path (L_a)
  parameter int unsigned QI_BITS = 8;    // internal LLR width Q_i
  parameter int unsigned QM_BITS = 11;   // path metric width Q_m
  parameter int unsigned NODE_SZ = 16;   // node size used for the intra-node check

endpackage
