// bitalign_pe: one processing element of the BitAlign systolic array.
//
// PE number d computes the status bitvector R[d] of the text character that
// is passing through it (characters are fed from the end of the window to its
// start). Bit convention of Bitap/GenASM: a 0 is a match. For the current
// character i with pattern bitmask PM and successors j = i+h selected by the
// HopBits (h = 1..HOP_LIMIT):
//     M_j = (R_j[d] << 1) | PM        match
//     S_j =  R_j[d-1] << 1            substitution
//     D_j =  R_j[d-1]                 deletion
//     I   =  R_i[d-1] << 1            insertion
//     R_i[d] = I & AND_j (D_j & S_j & M_j),   R_i[0] = AND_j M_j
// A hop whose HopBits entry is 0 uses an all-ones bitvector instead, which
// leaves the AND unchanged; with no hop at all the all-ones terms give the
// result of a character at the end of the text (only the last pattern
// character can match there). R_i[d-1] comes straight from the
// previous PE's output register; R_j[d-1] from the previous PE's hop queue;
// R_j[d] from this PE's output register (h = 1) and hop queue (h >= 2).
// This follows the paper's algorithm and PE figure. The pattern bitmask and
// HopBits pass through registers to the next PE; R[d] is registered in rout
// together with the character index, which also addresses the PE's
// bitvector scratchpad.
//
// Timing: one character per cycle; rout is valid the cycle after in_valid.
module bitalign_pe #(
  parameter int unsigned W         = 128,
  parameter int unsigned HOP_LIMIT = 12,
  parameter int unsigned IW        = 7,
  parameter bit          FIRST     = 1'b0
) (
  input  logic                          clk,
  input  logic                          clear,
  input  logic                          in_valid,
  input  logic [W-1:0]                  in_pm,
  input  logic [HOP_LIMIT-1:0]          in_hop,
  input  logic [IW-1:0]                 in_idx,
  input  logic [W-1:0]                  rprev,    // R_i[d-1]
  input  logic [HOP_LIMIT-1:0][W-1:0]   qprev,    // R_{i+1..i+12}[d-1]
  input  logic [HOP_LIMIT-1:0][W-1:0]   qown,     // R_{i+2..i+13}[d]
  output logic                          out_valid,
  output logic [W-1:0]                  out_pm,
  output logic [HOP_LIMIT-1:0]          out_hop,
  output logic [IW-1:0]                 out_idx,
  output logic [W-1:0]                  rout
);
  logic [W-1:0] r_new;

  always_comb begin
    logic [W-1:0] own_j, prev_j;
    r_new = FIRST ? '1 : (rprev << 1);
    for (int h = 1; h <= HOP_LIMIT; h++) begin
      own_j  = (h == 1) ? rout : qown[(h >= 2) ? h - 2 : 0];
      prev_j = qprev[h-1];
      if (!in_hop[h-1]) begin
        own_j  = '1;
        prev_j = '1;
      end
      if (FIRST) r_new &= (own_j << 1) | in_pm;
      else       r_new &= prev_j & (prev_j << 1) & ((own_j << 1) | in_pm);
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      out_valid <= 1'b0;
      rout      <= '1;
      out_pm    <= '1;
      out_hop   <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      out_pm    <= in_pm;
      out_hop   <= in_hop;
      out_idx   <= in_idx;
      if (in_valid) rout <= r_new;
    end
  end
endmodule
