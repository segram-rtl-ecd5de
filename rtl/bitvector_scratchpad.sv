// bitvector_scratchpad: per-PE store of the R[d] bitvectors of one window.
//
// BitAlign keeps only the ANDed status bitvector R[d] of every text
// character (instead of the three intermediate bitvectors per edge of
// GenASM) and regenerates the rest during traceback. Each PE writes the
// R[d] of the character it has just processed at that character's index in
// the window; traceback reads them back. 128 entries of 128 bits (2 kB per
// PE) is the paper's size. One write port, one read port, read data one
// cycle after the address.
module bitvector_scratchpad #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
