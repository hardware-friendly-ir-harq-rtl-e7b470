// harq_ref_pkg: reference models used by the testbenches. They are written
// from the definitions, not from the RTL structure: the polar transform as
// the matrix product with G^{(x)s} (entry (i,j) is 1 when the bits of j are
// a subset of the bits of i), the path metric as a plain sum, and the bit
// types of a retransmission with the set operations of the IR-HARQ scheme
// (PF_delta = the first |I_delta| old information bits frozen in I*).
package harq_ref_pkg;
  localparam int NVR = 16;

  function automatic logic [NVR-1:0] polar_ref(input logic [NVR-1:0] u, input int s);
    logic [NVR-1:0] x;
    int sz;
    sz = 1 << s;
    x = u;
    for (int j = 0; j < sz; j++) begin
      x[j] = 1'b0;
      for (int i = 0; i < sz; i++) if ((i & j) == j) x[j] ^= u[i];
    end
    return x;
  endfunction

  function automatic int pm_ref(input int alpha[NVR], input int pm_in, input logic [NVR-1:0] beta,
                                input int s, input int qm);
    int acc, pmax;
    pmax = (1 << qm) - 1;
    acc = pm_in;
    for (int k = 0; k < (1 << s); k++) begin
      if (beta[k] != (alpha[k] < 0)) acc += (alpha[k] < 0) ? -alpha[k] : alpha[k];
    end
    return (acc > pmax) ? pmax : acc;
  endfunction

  // Bit types of a retransmission from the set definitions. fr, pc: the
  // vectors of transmission t-1 on entry, of transmission t on return.
  // lut[b] is set for each new I_delta b; fixes counts I_delta bits turned
  // into frozen bits because their partner lies in the same node.
  task automatic bit_types_ref(ref bit fr[], ref bit pc[], ref int lut[],
                               input bit fr_star[], input int n_old, input int n_new,
                               input int node_sz, output int pairs, output int fixes,
                               output bit err);
    int idelta[$];
    int pf[$];
    int n;
    n = fr.size();
    for (int p = n_old; p < n_new; p++) if (!fr_star[p]) idelta.push_back(p);
    for (int p = 0; p < n_old; p++) if (!fr[p] && fr_star[p]) pf.push_back(p);
    for (int p = n_old; p < n; p++) begin fr[p] = fr_star[p]; pc[p] = 1'b0; end
    pairs = 0; fixes = 0; err = 1'b0;
    if (pf.size() < idelta.size()) err = 1'b1;
    for (int k = 0; k < idelta.size() && k < pf.size(); k++) begin
      if (idelta[k] / node_sz == pf[k] / node_sz) begin
        fr[idelta[k]] = 1'b1;
        fixes++;
      end else begin
        fr[pf[k]] = 1'b1;
        pc[pf[k]] = 1'b1;
        lut[idelta[k]] = pf[k];
        pairs++;
      end
    end
  endtask
endpackage
