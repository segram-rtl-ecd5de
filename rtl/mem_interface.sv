// mem_interface: MinSeed's port onto its HBM2E channel.
//
// Several requesters (the frequency filter, which reads the hash-table index,
// and the candidate region unit, which reads the graph tables) share the one
// channel that belongs to the accelerator. Requests are granted round-robin,
// one per cycle; the requester index of each granted read is pushed into a
// tag FIFO and, since the channel answers in order, the head of the FIFO
// names the requester that receives the next response. Up to TAGQ reads may
// be in flight. The paper only names this block ("the memory interface,
// which handles the lookups of minimizer frequency, seed location, and
// subgraph"); arbitration and tagging are this design's choice.
//
// Channel protocol: ch_req_valid/ch_req_ready handshake with a byte address;
// ch_resp_valid carries the 16 bytes starting at that address, in request
// order, any number of cycles later.
module mem_interface
  import segram_pkg::*;
#(
  parameter int unsigned NREQ = 2,
  parameter int unsigned TAGQ = 4,
  localparam int unsigned IW = (NREQ > 1) ? $clog2(NREQ) : 1,
  localparam int unsigned QW = $clog2(TAGQ)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NREQ-1:0]               req_valid,
  output logic [NREQ-1:0]               req_ready,
  input  logic [NREQ-1:0][MEM_AW-1:0]   req_addr,
  output logic [NREQ-1:0]               resp_valid,
  output logic [MEM_DW-1:0]             resp_data,
  output logic                          ch_req_valid,
  input  logic                          ch_req_ready,
  output logic [MEM_AW-1:0]             ch_req_addr,
  input  logic                          ch_resp_valid,
  input  logic [MEM_DW-1:0]             ch_resp_data
);
  logic [IW-1:0] tagq [TAGQ];
  logic [QW-1:0] wp, rp;
  logic [QW:0]   used;
  logic [IW-1:0] last, gnt;
  logic          gnt_ok, push, pop;

  // round-robin pick, starting after the last grant
  always_comb begin
    gnt    = '0;
    gnt_ok = 1'b0;
    for (int k = 1; k <= NREQ; k++) begin
      int r;
      r = (int'(last) + k) % NREQ;
      if (!gnt_ok && req_valid[r]) begin
        gnt    = IW'(r);
        gnt_ok = 1'b1;
      end
    end
  end

  assign ch_req_valid = gnt_ok && (used < (QW+1)'(TAGQ));
  assign ch_req_addr  = req_addr[gnt];
  assign push         = ch_req_valid && ch_req_ready;
  assign pop          = ch_resp_valid && (used != 0);

  always_comb begin
    req_ready = '0;
    if (push) req_ready[gnt] = 1'b1;
    resp_valid = '0;
    if (pop) resp_valid[tagq[rp]] = 1'b1;
  end
  assign resp_data = ch_resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      rp   <= '0;
      used <= '0;
      last <= IW'(NREQ - 1);
      for (int i = 0; i < TAGQ; i++) tagq[i] <= '0;
    end else begin
      if (push) begin
        tagq[wp] <= gnt;
        wp       <= wp + 1'b1;
        last     <= gnt;
      end
      if (pop) rp <= rp + 1'b1;
      used <= used + (QW+1)'(push) - (QW+1)'(pop);
    end
  end

  a_no_orphan_resp: assert property (@(posedge clk) disable iff (!rst_n) ch_resp_valid |-> used != 0);
endmodule
