// tb_pcf_mem: drives random clears, path copies (random parent vectors,
// duplicates allowed) and routed writes into a small PC_frozen memory and
// compares every aligned read window with a plain array model.
module tb_pcf_mem;
  localparam int N = 128, L = 8, NV = 16;
  logic clk = 0, rst_n = 0, clr = 0, copy_en = 0;
  logic [6:0] rd_base = '0, wr_addr = '0;
  logic [L-1:0][NV-1:0] rd_data;
  logic [L-1:0][2:0] copy_parent = '0;
  logic [L-1:0] wr_en = '0, wr_data = '0;
  bit model [L][N], tmp [L][N];
  int checks = 0, failures = 0, n_copy = 0, n_wr = 0;

  pcf_mem #(.N(N), .L(L), .NV(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int w = 0; w < N / NV; w++) begin
      rd_base = 7'(w * NV); #1;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < NV; k++) begin
          checks++;
          if (rd_data[l][k] !== model[l][w * NV + k]) begin
            failures++;
            if (failures < 10) $display("FAIL l=%0d p=%0d", l, w * NV + k);
          end
        end
    end
  endtask

  initial begin
    int op;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (model[l, p]) model[l][p] = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      op = $urandom_range(0, 19);
      clr = (op == 0);
      copy_en = (op >= 1 && op <= 5);
      for (int l = 0; l < L; l++) copy_parent[l] = 3'($urandom);
      wr_en = L'($urandom); wr_data = L'($urandom); wr_addr = 7'($urandom);
      @(posedge clk); #1;
      if (clr) foreach (model[l, p]) model[l][p] = 0;
      else if (copy_en) begin
        tmp = model;
        for (int l = 0; l < L; l++) for (int p = 0; p < N; p++) model[l][p] = tmp[copy_parent[l]][p];
        n_copy++;
      end else begin
        for (int l = 0; l < L; l++) if (wr_en[l]) model[l][wr_addr] = wr_data[l];
        n_wr++;
      end
      clr = 0; copy_en = 0; wr_en = '0;
      if (t % 10 == 0) compare_all();
    end
    compare_all();
    checks++;
    if (n_copy == 0 || n_wr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
