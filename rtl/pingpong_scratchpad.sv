// pingpong_scratchpad: double-buffered on-chip scratchpad of MinSeed.
//
// Two banks of DEPTH words. A producer fills the bank it owns and commits it
// with an item count and a metadata word; the bank then belongs to the
// consumer, which reads it through NRD independent read ports and releases
// it when done. While the consumer works on one bank the producer fills the
// other, which is the double buffering the paper uses for the read, minimizer
// and seed scratchpads to hide transfer and lookup latency. The commit /
// release handshake and the one-cycle read latency are this design's choice.
//
// Timing: a write lands in the producer's bank at the clock edge; rd_data is
// the word at rd_addr one cycle later. wr_ready is high when the producer's
// bank is empty; rd_avail is high when the consumer's bank holds a commit.
module pingpong_scratchpad #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned DEPTH  = 625,
  parameter int unsigned META_W = 16,
  parameter int unsigned NRD    = 2,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // producer side
  output logic                        wr_ready,
  input  logic                        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  logic [WIDTH-1:0]            wr_data,
  input  logic                        wr_commit,
  input  logic [CW-1:0]               wr_count,
  input  logic [META_W-1:0]           wr_meta,
  // consumer side
  output logic                        rd_avail,
  output logic [CW-1:0]               rd_count,
  output logic [META_W-1:0]           rd_meta,
  input  logic [NRD-1:0][AW-1:0]      rd_addr,
  output logic [NRD-1:0][WIDTH-1:0]   rd_data,
  input  logic                        rd_release
);
  logic [WIDTH-1:0]  mem [2][DEPTH];
  logic [1:0]        full;
  logic              wbank, rbank;
  logic [CW-1:0]     cnt  [2];
  logic [META_W-1:0] meta [2];

  assign wr_ready = !full[wbank];
  assign rd_avail = full[rbank];
  assign rd_count = cnt[rbank];
  assign rd_meta  = meta[rbank];

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) mem[wbank][wr_addr] <= wr_data;
    for (int p = 0; p < NRD; p++) rd_data[p] <= mem[rbank][rd_addr[p]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= '0;
      wbank <= 1'b0;
      rbank <= 1'b0;
      cnt   <= '{default: '0};
      meta  <= '{default: '0};
    end else begin
      if (wr_commit && wr_ready) begin
        full[wbank] <= 1'b1;
        cnt[wbank]  <= wr_count;
        meta[wbank] <= wr_meta;
        wbank       <= ~wbank;
      end
      if (rd_release && rd_avail) begin
        full[rbank] <= 1'b0;
        rbank       <= ~rbank;
      end
    end
  end

  // The producer only writes or commits a bank it owns; the consumer only
  // releases a bank it holds.
  a_wr_owned:  assert property (@(posedge clk) disable iff (!rst_n) (wr_en || wr_commit) |-> wr_ready);
  a_rel_owned: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_avail);
endmodule
