// input_scratchpad: BitAlign's input SRAM.
//
// Two arrays: the linearized subgraph, one entry per character (2-bit base
// and 12 HopBits), written by MinSeed's candidate region unit; and the
// pattern bitmasks of the query read, one word per 16 read positions holding
// four 16-bit masks (bit k of mask c is 0 when read position 16w+k is base
// c), written by BitAlign's bitmask generator. Each array has one write and
// one read port with read data one cycle after the address. Sizes: 11000
// characters (a 10 kbp read plus 10% error margin) and 625 words (10 kbp),
// 24.25 kB together against the paper's 24 kB; the split is this design's.
module input_scratchpad
  import segram_pkg::*;
#(
  parameter int unsigned TXT_DEPTH = 11000,
  parameter int unsigned PM_WORDS  = 625,
  localparam int unsigned TAW = $clog2(TXT_DEPTH),
  localparam int unsigned PAW = $clog2(PM_WORDS)
) (
  input  logic              clk,
  input  logic              txt_we,
  input  logic [TAW-1:0]    txt_waddr,
  input  txt_entry_t        txt_wdata,
  input  logic [TAW-1:0]    txt_raddr,
  output txt_entry_t        txt_rdata,
  input  logic              pm_we,
  input  logic [PAW-1:0]    pm_waddr,
  input  logic [63:0]       pm_wdata,
  input  logic [PAW-1:0]    pm_raddr,
  output logic [63:0]       pm_rdata
);
  txt_entry_t  txt [TXT_DEPTH];
  logic [63:0] pmm [PM_WORDS];

  always_ff @(posedge clk) begin
    if (txt_we) txt[txt_waddr] <= txt_wdata;
    txt_rdata <= txt[txt_raddr];
    if (pm_we) pmm[pm_waddr] <= pm_wdata;
    pm_rdata <= pmm[pm_raddr];
  end
endmodule
