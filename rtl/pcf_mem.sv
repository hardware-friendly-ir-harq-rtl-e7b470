// pcf_mem: the per-path PC_frozen value memory, L rows of N bits.
//
// Row l, bit p holds the value that path l has decided for the PC_frozen
// bit at paper index p (the value of the I_delta bit mapped onto it). All
// bits are cleared by clr before a codeword is decoded. A node reads one
// aligned NV-bit window, rd_data[l] = row l bits [rd_base, rd_base+NV),
// combinationally. After survivor selection copy_en replaces every row l
// by the old row copy_parent[l] in one clock (all rows at once, so any
// permutation or duplication is allowed). Routed writes then set
// row l bit wr_addr to wr_data[l] for each l with wr_en[l], one address
// per clock shared by all rows. Priority: clr, then copy, then write.
// The L x N size is the paper's; the single-clock row copy and the port
// arrangement are this design's choices.
module pcf_mem #(
  parameter int unsigned N  = 8192,
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 16,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic [AW-1:0]         rd_base,
  output logic [L-1:0][NV-1:0]  rd_data,
  input  logic                  copy_en,
  input  logic [L-1:0][LW-1:0]  copy_parent,
  input  logic [L-1:0]          wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [L-1:0]          wr_data
);
  logic [L-1:0][N-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++) mem[l] <= '0;
    end else if (clr) begin
      for (int l = 0; l < int'(L); l++) mem[l] <= '0;
    end else if (copy_en) begin
      for (int l = 0; l < int'(L); l++) mem[l] <= mem[copy_parent[l]];
    end else begin
      for (int l = 0; l < int'(L); l++)
        if (wr_en[l]) mem[l][wr_addr] <= wr_data[l];
    end
  end

  always_comb begin
    for (int l = 0; l < int'(L); l++) rd_data[l] = mem[l][rd_base +: NV];
  end

  // Reads are aligned windows so they never run past the end of a row.
  a_rd_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (int'(rd_base) % NV) == 0);
endmodule
