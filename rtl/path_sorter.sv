// path_sorter: keeps the L forked paths of smallest path metric out of M.
//
// A full bitonic sorting network over M entries (M a power of two) orders
// the keys {metric, fork index}; appending the fork index makes every key
// unique, so ties are broken toward the lower fork index and the result is
// deterministic. The first L outputs are the survivors, smallest metric
// first. Purely combinational. The paper's complexity estimate assumes a
// bitonic sorter; the tie-break is this design's choice.
module path_sorter #(
  parameter int unsigned M  = 16,
  parameter int unsigned L  = 8,
  parameter int unsigned QM = 11,
  localparam int unsigned IW = $clog2(M)
) (
  input  logic [M-1:0][QM-1:0] pm,
  output logic [L-1:0][IW-1:0] sel_idx,
  output logic [L-1:0][QM-1:0] sel_pm
);
  always_comb begin
    logic [M-1:0][QM+IW-1:0] key;
    logic [QM+IW-1:0]        t;
    int                      p;
    t = '0;
    p = 0;
    for (int i = 0; i < int'(M); i++) key[i] = {pm[i], IW'(i)};
    for (int k = 2; k <= int'(M); k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < int'(M); i++) begin
          p = i ^ j;
          if (p > i) begin
            if ((((i & k) == 0) && key[i] > key[p]) ||
                (((i & k) != 0) && key[i] < key[p])) begin
              t = key[i]; key[i] = key[p]; key[p] = t;
            end
          end
        end
      end
    end
    for (int l = 0; l < int'(L); l++) begin
      sel_idx[l] = key[l][IW-1:0];
      sel_pm[l]  = key[l][QM+IW-1:IW];
    end
  end
endmodule
