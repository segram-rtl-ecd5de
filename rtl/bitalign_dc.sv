// bitalign_dc: BitAlign edit-distance calculation, a linear systolic array.
//
// NPE processing elements in a row; PE d computes R[d]. The text characters
// of a window enter PE 0 one per cycle, from the last character of the window
// to the first, each with its pattern bitmask PM (selected by the character)
// and its HopBits; both travel from PE to PE through registers, so PE d works
// on character i one cycle after PE d-1. Each PE has a hop queue register
// (12 most recent R[d]) and a bitvector scratchpad (R[d] of every character of
// the window, addressed by character index). PE d reads its own queue and
// that of PE d-1, and takes R_i[d-1] from PE d-1's output register, as in the
// paper's PE figure.
//
// After the first character of the window (index 0) has passed PE d,
// found[d] tells whether R_0[d] has a 0 at bit mbit (pattern window length
// minus one): the pattern window aligns at the window start with at most d
// edits. The smallest such d is the window's edit distance. clear resets the
// queues and output registers to all ones before a window.
//
// Traceback reads the scratchpads through two read ports (PE number and
// character index each; the two PEs must differ), data one cycle later.
//
// Sizes follow the paper: 64 PEs of 128 bits, hop limit 12, 2 kB bitvector
// scratchpad per PE. An edit threshold above NPE-1 needs the cyclic reuse of
// the array that the paper mentions; that reuse is not built here.
module bitalign_dc #(
  parameter int unsigned NPE       = 64,
  parameter int unsigned W         = 128,
  parameter int unsigned HOP_LIMIT = 12,
  parameter int unsigned TW        = 128,
  localparam int unsigned IW = $clog2(TW),
  localparam int unsigned PW = $clog2(NPE),
  localparam int unsigned BW = $clog2(W)
) (
  input  logic                  clk,
  input  logic                  clear,
  input  logic                  in_valid,
  input  logic [W-1:0]          in_pm,
  input  logic [HOP_LIMIT-1:0]  in_hop,
  input  logic [IW-1:0]         in_idx,
  input  logic [BW-1:0]         mbit,
  output logic [NPE-1:0]        found,
  output logic [NPE-1:0]        pe_busy,
  input  logic [PW-1:0]         tb_pe_a,
  input  logic [IW-1:0]         tb_addr_a,
  output logic [W-1:0]          tb_data_a,
  input  logic [PW-1:0]         tb_pe_b,
  input  logic [IW-1:0]         tb_addr_b,
  output logic [W-1:0]          tb_data_b
);
  logic [NPE-1:0]                        v;
  logic [NPE-1:0][W-1:0]                 pm, r;
  logic [NPE-1:0][HOP_LIMIT-1:0]         hop;
  logic [NPE-1:0][IW-1:0]                idx;
  logic [NPE-1:0][HOP_LIMIT-1:0][W-1:0]  q;
  logic [W-1:0]                          rd [NPE];
  logic [PW-1:0]                         pe_a_q, pe_b_q;

  for (genvar d = 0; d < NPE; d++) begin : g_pe
    logic                         iv;
    logic [W-1:0]                 ipm, irp;
    logic [HOP_LIMIT-1:0]         ihop;
    logic [IW-1:0]                iidx;
    logic [HOP_LIMIT-1:0][W-1:0]  iq;
    if (d == 0) begin : g_head
      assign iv   = in_valid;
      assign ipm  = in_pm;
      assign ihop = in_hop;
      assign iidx = in_idx;
      assign irp  = '1;
      assign iq   = '1;
    end else begin : g_body
      assign iv   = v[d-1];
      assign ipm  = pm[d-1];
      assign ihop = hop[d-1];
      assign iidx = idx[d-1];
      assign irp  = r[d-1];
      assign iq   = q[d-1];
    end

    bitalign_pe #(.W(W), .HOP_LIMIT(HOP_LIMIT), .IW(IW), .FIRST(d == 0)) u_pe (
      .clk, .clear,
      .in_valid (iv), .in_pm (ipm), .in_hop (ihop), .in_idx (iidx),
      .rprev (irp), .qprev (iq), .qown (q[d]),
      .out_valid (v[d]), .out_pm (pm[d]), .out_hop (hop[d]), .out_idx (idx[d]),
      .rout (r[d])
    );

    hop_queue_register #(.W(W), .DEPTH(HOP_LIMIT)) u_hq (
      .clk, .clear, .push (v[d]), .din (r[d]), .q (q[d])
    );

    bitvector_scratchpad #(.W(W), .DEPTH(TW)) u_bv (
      .clk,
      .we (v[d]), .waddr (idx[d]), .wdata (r[d]),
      .raddr ((tb_pe_a == PW'(d)) ? tb_addr_a : tb_addr_b),
      .rdata (rd[d])
    );

    always_ff @(posedge clk) begin
      if (clear)                       found[d] <= 1'b0;
      else if (v[d] && idx[d] == '0)   found[d] <= !r[d][mbit];
    end
    assign pe_busy[d] = v[d];
  end

  always_ff @(posedge clk) begin
    pe_a_q <= tb_pe_a;
    pe_b_q <= tb_pe_b;
  end
  assign tb_data_a = rd[pe_a_q];
  assign tb_data_b = rd[pe_b_q];
endmodule
