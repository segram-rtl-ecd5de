// hop_queue_register: the hop queue of one BitAlign processing element.
//
// A shift register of DEPTH bitvectors of W bits. Each cycle in which the PE
// has produced an R[d] bitvector (push), that bitvector enters at entry 0 and
// every entry moves one place on; the oldest falls out. All entries are
// visible at once: the owning PE reads them as oldR[d] and the next PE as
// oldR[d-1], the bitvectors of the characters it can hop to. clear sets every
// entry to all ones, the value that has no effect in the bitwise AND of the
// PE, so that hops past the end of a text window contribute nothing.
// DEPTH = 12 bitvectors of 128 bits (192 bytes) is the paper's size.
module hop_queue_register #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 12
) (
  input  logic                      clk,
  input  logic                      clear,
  input  logic                      push,
  input  logic [W-1:0]              din,
  output logic [DEPTH-1:0][W-1:0]   q
);
  always_ff @(posedge clk) begin
    if (clear)     q <= '1;
    else if (push) q <= {q[DEPTH-2:0], din};
  end
endmodule
