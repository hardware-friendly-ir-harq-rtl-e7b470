// polar_xor_tree: the polar transform x = u * G^{(x)s} of one node, with
// G = [1 0; 1 1], built as the usual log2(NV) x NV/2 XOR butterfly.
//
// Bit 0 is the leftmost bit of the node in decoding (tree) order. Only the
// first s butterfly stages are applied, so the low 2^s bits hold the
// transform of a node of size 2^s; bits at and above 2^s pass through.
// Because G^{(x)s} is its own inverse over GF(2), the same array is used to
// ascend the PC_frozen tree (stage-0 values to stage-s values) and to
// descend it (stage-s candidates back to stage-0 bits). Purely
// combinational. The XOR-array structure follows the paper; the stage
// select input is this design's way of serving every node size with one
// array.
module polar_xor_tree #(
  parameter int unsigned NV = 16,
  localparam int unsigned SW = $clog2($clog2(NV) + 1)
) (
  input  logic [NV-1:0] u,
  input  logic [SW-1:0] s,
  output logic [NV-1:0] x
);
  localparam int unsigned LOGNV = $clog2(NV);

  always_comb begin
    logic [NV-1:0] v;
    v = u;
    for (int st = 0; st < LOGNV; st++) begin
      if (st < int'(s)) begin
        for (int i = 0; i < int'(NV); i++) begin
          if (((i >> st) & 1) == 0 && i < (1 << s)) v[i] = v[i] ^ v[i + (1 << st)];
        end
      end
    end
    x = v;
  end
endmodule
