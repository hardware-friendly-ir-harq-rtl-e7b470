// bit_type_gen: keeps the bit-type vectors of the current transmission and
// updates them when a new transmission is requested.
//
// State: three N-bit vectors indexed by the paper's bit index p (p = 0 is
// the rightmost bit of the encoding tree; the first transmission occupies
// p < N^1 and each later transmission adds the indices above the previous
// length): fr (frozen in any sense), rm (rate-matched, i.e. punctured) and
// pc (PC_frozen), the lut that maps each I_delta bit to the PC_frozen bit
// that copies its value, N^1 and the current length N^t. From them it
// derives iv = ~fr, fr_z = fr & ~pc and id = ~fr above N^1.
//
// start_first loads the first transmission: fr = fr_star, rm = rm_star,
// pc = 0, N^1 = N^t = n_len. Takes one clock.
//
// start_next builds transmission t of length n_len from the construction
// (fr_star, rm_star) of a plain code of that length. In the first clock
// rm = rm_star and, for every p >= N^{t-1}, fr = fr_star and pc = 0 (the
// new part holds only I_delta and frozen bits; bits above the old mother
// code length are thereby extended as frozen). Then two pointers sweep:
// b walks the new part [N^{t-1}, N^t) looking for I_delta bits
// (~fr_star), a walks the old part looking for bits that were information
// bits and are frozen in the new construction (~fr & fr_star). Each pointer
// advances by one per clock until it sits on a hit; when both do, the two
// are paired: pc[a] = fr[a] = 1 and lut[b] = a. This pairs the k-th I_delta
// bit with the k-th candidate, which is what the paper's prefix-count
// condition for pc^t selects, without the adder chain. If a and b lie in
// the same NODE_SZ-aligned block the pair would be an intra-node
// dependency; it is resolved as the paper prescribes: the I_delta bit
// becomes a Frozen_z bit and the candidate stays an information bit. The
// sweep takes at most N^t clocks; done pulses for one clock at the end and
// err is set if an I_delta bit finds no partner (inconsistent input).
// fr_star, rm_star and n_len must stay stable while busy.
//
// Following the paper: the vector equations, the selection of PC_frozen
// bits and the lut. This design's choices: the sequential two-pointer
// sweep, the block-aligned node boundaries of the intra-node check, and
// the command interface.
module bit_type_gen #(
  parameter int unsigned N       = 8192,
  parameter int unsigned NODE_SZ = 16,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_first,
  input  logic          start_next,
  input  logic [AW:0]   n_len,
  input  logic [N-1:0]  fr_star,
  input  logic [N-1:0]  rm_star,
  output logic          busy,
  output logic          done,
  output logic          err,
  output logic [N-1:0]  fr,
  output logic [N-1:0]  rm,
  output logic [N-1:0]  pc,
  output logic [N-1:0]  iv,
  output logic [N-1:0]  fr_z,
  output logic [N-1:0]  id,
  output logic [AW:0]   n1,
  output logic [AW:0]   n_cur,
  output logic [AW:0]   n_pairs,
  output logic [AW:0]   n_fixes,
  input  logic [AW-1:0] lut_raddr,
  output logic [AW-1:0] lut_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_SWEEP, S_DONE} state_t;
  state_t state;

  logic [AW-1:0] lut [N];
  logic [AW:0]   a, b, n_old;

  logic a_in, b_in, a_hit, b_hit;
  assign a_in  = (a < n_old);
  assign b_in  = (b < n_len);
  assign a_hit = a_in && !fr[a[AW-1:0]] && fr_star[a[AW-1:0]];
  assign b_hit = b_in && !fr_star[b[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      fr      <= '1;
      rm      <= '0;
      pc      <= '0;
      n1      <= '0;
      n_cur   <= '0;
      n_old   <= '0;
      a       <= '0;
      b       <= '0;
      err     <= 1'b0;
      done    <= 1'b0;
      n_pairs <= '0;
      n_fixes <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_first) begin
            fr      <= fr_star;
            rm      <= rm_star;
            pc      <= '0;
            n1      <= n_len;
            n_cur   <= n_len;
            err     <= 1'b0;
            n_pairs <= '0;
            n_fixes <= '0;
            done    <= 1'b1;
          end else if (start_next) begin
            rm <= rm_star;
            for (int p = 0; p < int'(N); p++) begin
              if (p >= int'(n_cur)) begin
                fr[p] <= fr_star[p];
                pc[p] <= 1'b0;
              end
            end
            n_old   <= n_cur;
            a       <= '0;
            b       <= n_cur;
            err     <= 1'b0;
            n_pairs <= '0;
            n_fixes <= '0;
            state   <= S_SWEEP;
          end
        end
        S_SWEEP: begin
          if (!b_in) begin
            state <= S_DONE;
          end else if (b_hit && !a_in) begin
            err   <= 1'b1;
            state <= S_DONE;
          end else if (b_hit && a_hit) begin
            if ((int'(a) / NODE_SZ) == (int'(b) / NODE_SZ)) begin
              fr[b[AW-1:0]] <= 1'b1;
              n_fixes       <= n_fixes + 1'b1;
            end else begin
              pc[a[AW-1:0]]  <= 1'b1;
              fr[a[AW-1:0]]  <= 1'b1;
              lut[b[AW-1:0]] <= a[AW-1:0];
              n_pairs        <= n_pairs + 1'b1;
            end
            a <= a + 1'b1;
            b <= b + 1'b1;
          end else begin
            if (!a_hit && a_in) a <= a + 1'b1;
            if (!b_hit) b <= b + 1'b1;
          end
        end
        S_DONE: begin
          n_cur <= n_len;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign lut_rdata = lut[lut_raddr];

  always_comb begin
    for (int p = 0; p < int'(N); p++) begin
      iv[p]   = !fr[p];
      fr_z[p] = fr[p] && !pc[p];
      id[p]   = (p >= int'(n1)) && !fr[p];
    end
  end
endmodule
