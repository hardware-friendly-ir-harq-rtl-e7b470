// tb_polar_xor_tree: checks the node polar transform against the matrix
// product for random inputs at every stage, the pass-through of the bits
// above 2^s, the involution property (encode twice gives the input back),
// and the worked example of a PC_frozen vector ascended to stage 4.
module tb_polar_xor_tree;
  import harq_ref_pkg::*;
  localparam int NV = 16;
  logic [NV-1:0] u, x;
  logic [2:0]    s;
  int checks = 0, failures = 0;

  polar_xor_tree #(.NV(NV)) dut (.u(u), .s(s), .x(x));

  function automatic logic [NV-1:0] str2vec(input string str);
    logic [NV-1:0] v;
    for (int k = 0; k < NV; k++) v[k] = (str[k] == "1");
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NV-1:0] exp_x, first;
    // Example: PC_frozen(0) = 0100000000000000 -> PC_frozen(4) = 1100000000000000
    u = str2vec("0100000000000000"); s = 3'd4; #1;
    checks++;
    if (x !== str2vec("1100000000000000")) begin
      failures++; $display("FAIL example: x=%b", x);
    end
    for (int t = 0; t < 2000; t++) begin
      u = NV'($urandom); s = 3'($urandom_range(0, 4)); #1;
      exp_x = polar_ref(u, int'(s));
      for (int k = (1 << s); k < NV; k++) exp_x[k] = u[k];
      checks++;
      if (x !== exp_x) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d u=%h x=%h exp=%h", s, u, x, exp_x);
      end
      // encoding the result again must return the input
      first = u; u = x; #1;
      checks++;
      if (x !== first) begin failures++; $display("FAIL involution s=%0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
