// minseed: the MinSeed minimizer-based seeding accelerator.
//
// Data path, as in the paper's MinSeed figure: the host writes the query read
// into the read scratchpad; the minimizer finder writes the read's minimizers
// into the minimizer scratchpad; the frequency filter looks each one up in
// the hash-table index, drops the frequent ones and copies the seed locations
// of the others into the seed scratchpad; the candidate region unit turns each
// seed into a region [x, y] of the linearized graph, fetches that subgraph and
// hands it to BitAlign. All three scratchpads are double-buffered, so that
// the host can send the next read, and the finder and filter can work on the
// next read or minimizer, while the later stages are busy. The filter and the
// region unit share the accelerator's memory channel through mem_interface.
//
// A read-scratchpad bank is released once the finder has taken its
// minimizers and BitAlign has built its pattern bitmasks (pm_gen_done).
// Host side: write 32-bit words of 16 bases (base j in bits [2j+1:2j]) while
// host_ready, then pulse host_commit with the read length in bases.
module minseed
  import segram_pkg::*;
#(
  parameter int unsigned K          = 15,
  parameter int unsigned WIN        = 10,
  parameter int unsigned RD_DEPTH   = 625,
  parameter int unsigned MZ_DEPTH   = 2050,
  parameter int unsigned SEED_DEPTH = 242,
  parameter int unsigned TXT_DEPTH  = 11000,
  localparam int unsigned RAW = $clog2(RD_DEPTH),
  localparam int unsigned TAW = $clog2(TXT_DEPTH),
  localparam int unsigned TCW = $clog2(TXT_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // host
  output logic               host_ready,
  input  logic               host_wr_en,
  input  logic [RAW-1:0]     host_wr_addr,
  input  logic [31:0]        host_wr_data,
  input  logic               host_commit,
  input  logic [15:0]        host_len,
  // memory channel
  output logic               ch_req_valid,
  input  logic               ch_req_ready,
  output logic [MEM_AW-1:0]  ch_req_addr,
  input  logic               ch_resp_valid,
  input  logic [MEM_DW-1:0]  ch_resp_data,
  // read scratchpad port for BitAlign's bitmask generator
  output logic               rs_avail,
  output logic [15:0]        rs_len,
  input  logic [RAW-1:0]     rs_addr,
  output logic [31:0]        rs_data,
  input  logic               pm_gen_done,
  // BitAlign
  input  logic               read_ready,
  input  logic [15:0]        read_len,
  output logic               txt_wr_en,
  output logic [TAW-1:0]     txt_wr_addr,
  output txt_entry_t         txt_wr_data,
  output logic               ba_start,
  output logic [TCW-1:0]     ba_len,
  output logic [31:0]        region_x,
  input  logic               ba_busy,
  output logic               read_end,
  // events
  output logic               ev_mz_kept,
  output logic               ev_mz_dropped,
  output logic               ev_mz_batch,
  output logic               ev_hop_dropped
);
  localparam int unsigned MAW = $clog2(MZ_DEPTH);
  localparam int unsigned MCW = $clog2(MZ_DEPTH + 1);
  localparam int unsigned SAW = $clog2(SEED_DEPTH);
  localparam int unsigned SCW = $clog2(SEED_DEPTH + 1);
  localparam int unsigned RCW = $clog2(RD_DEPTH + 1);

  // ---------------- read scratchpad ----------------------------------------
  logic                   rsp_avail, rsp_release;
  logic [RCW-1:0]         rsp_count;
  logic [15:0]            rsp_meta;
  logic [1:0][RAW-1:0]    rsp_addr;
  logic [1:0][31:0]       rsp_data;
  logic [RAW-1:0]         fnd_addr;

  pingpong_scratchpad #(.WIDTH(32), .DEPTH(RD_DEPTH), .META_W(16), .NRD(2)) u_read_sp (
    .clk, .rst_n,
    .wr_ready (host_ready), .wr_en (host_wr_en), .wr_addr (host_wr_addr),
    .wr_data (host_wr_data), .wr_commit (host_commit),
    .wr_count (RCW'((32'(host_len) + 32'd15) >> 4)), .wr_meta (host_len),
    .rd_avail (rsp_avail), .rd_count (rsp_count), .rd_meta (rsp_meta),
    .rd_addr (rsp_addr), .rd_data (rsp_data), .rd_release (rsp_release)
  );
  assign rsp_addr[0] = fnd_addr;
  assign rsp_addr[1] = rs_addr;
  assign rs_data     = rsp_data[1];
  assign rs_avail    = rsp_avail;
  assign rs_len      = rsp_meta;

  // bank bookkeeping: finder and bitmask generator each once per bank
  logic fnd_started, fnd_done, fnd_busy, fnd_fin, pm_fin;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fnd_started <= 1'b0;
      fnd_fin     <= 1'b0;
      pm_fin      <= 1'b0;
    end else if (rsp_release) begin
      fnd_started <= 1'b0;
      fnd_fin     <= 1'b0;
      pm_fin      <= 1'b0;
    end else begin
      if (rsp_avail && !fnd_started && !fnd_busy) fnd_started <= 1'b1;
      if (fnd_done)    fnd_fin <= 1'b1;
      if (pm_gen_done) pm_fin  <= 1'b1;
    end
  end
  assign rsp_release = fnd_fin && pm_fin;

  // ---------------- minimizer finder + scratchpad --------------------------
  logic              mz_wr_ready, mz_wr_en, mz_wr_commit;
  logic [MAW-1:0]    mz_wr_addr;
  minimizer_t        mz_wr_data;
  logic [MCW-1:0]    mz_wr_count;
  logic [15:0]       mz_wr_meta;

  minimizer_finder #(.K(K), .W(WIN), .RD_DEPTH(RD_DEPTH), .MZ_DEPTH(MZ_DEPTH)) u_finder (
    .clk, .rst_n,
    .start (rsp_avail && !fnd_started && !fnd_busy), .read_len (rsp_meta),
    .busy (fnd_busy), .done (fnd_done),
    .rd_addr (fnd_addr), .rd_data (rsp_data[0]),
    .mz_wr_ready, .mz_wr_en, .mz_wr_addr, .mz_wr_data, .mz_wr_commit,
    .mz_wr_count, .mz_wr_meta
  );
  assign ev_mz_batch = mz_wr_commit && !mz_wr_meta[0];

  logic              mz_rd_avail, mz_rd_release;
  logic [MCW-1:0]    mz_rd_count;
  logic [15:0]       mz_rd_meta;
  logic [MAW-1:0]    mz_rd_addr;
  logic [79:0]       mz_rd_data;

  pingpong_scratchpad #(.WIDTH(80), .DEPTH(MZ_DEPTH), .META_W(16), .NRD(1)) u_mz_sp (
    .clk, .rst_n,
    .wr_ready (mz_wr_ready), .wr_en (mz_wr_en), .wr_addr (mz_wr_addr),
    .wr_data (mz_wr_data), .wr_commit (mz_wr_commit), .wr_count (mz_wr_count),
    .wr_meta (mz_wr_meta),
    .rd_avail (mz_rd_avail), .rd_count (mz_rd_count), .rd_meta (mz_rd_meta),
    .rd_addr (mz_rd_addr), .rd_data (mz_rd_data), .rd_release (mz_rd_release)
  );

  // ---------------- memory interface ----------------------------------------
  logic [1:0]              mreq_valid, mreq_ready, mresp_valid;
  logic [1:0][MEM_AW-1:0]  mreq_addr;
  logic [MEM_DW-1:0]       mresp_data;

  mem_interface #(.NREQ(2), .TAGQ(4)) u_mif (
    .clk, .rst_n,
    .req_valid (mreq_valid), .req_ready (mreq_ready), .req_addr (mreq_addr),
    .resp_valid (mresp_valid), .resp_data (mresp_data),
    .ch_req_valid, .ch_req_ready, .ch_req_addr, .ch_resp_valid, .ch_resp_data
  );

  // ---------------- frequency filter + seed scratchpad ----------------------
  logic              sd_wr_ready, sd_wr_en, sd_wr_commit;
  logic [SAW-1:0]    sd_wr_addr;
  seed_t             sd_wr_data;
  logic [SCW-1:0]    sd_wr_count;
  seed_meta_t        sd_wr_meta;

  minimizer_filter #(.BUCKET_BITS(24), .MZ_DEPTH(MZ_DEPTH), .SEED_DEPTH(SEED_DEPTH)) u_filter (
    .clk, .rst_n, .cfg,
    .mz_rd_avail, .mz_rd_count, .mz_rd_meta, .mz_rd_addr,
    .mz_rd_data (minimizer_t'(mz_rd_data)), .mz_rd_release,
    .mem_req_valid (mreq_valid[0]), .mem_req_ready (mreq_ready[0]),
    .mem_req_addr (mreq_addr[0]), .mem_resp_valid (mresp_valid[0]),
    .mem_resp_data (mresp_data),
    .sd_wr_ready, .sd_wr_en, .sd_wr_addr, .sd_wr_data, .sd_wr_commit,
    .sd_wr_count, .sd_wr_meta,
    .ev_kept (ev_mz_kept), .ev_dropped (ev_mz_dropped)
  );

  logic              sd_rd_avail, sd_rd_release;
  logic [SCW-1:0]    sd_rd_count;
  logic [32:0]       sd_rd_meta;
  logic [SAW-1:0]    sd_rd_addr;
  logic [63:0]       sd_rd_data;

  pingpong_scratchpad #(.WIDTH(64), .DEPTH(SEED_DEPTH), .META_W(33), .NRD(1)) u_seed_sp (
    .clk, .rst_n,
    .wr_ready (sd_wr_ready), .wr_en (sd_wr_en), .wr_addr (sd_wr_addr),
    .wr_data (sd_wr_data), .wr_commit (sd_wr_commit), .wr_count (sd_wr_count),
    .wr_meta (sd_wr_meta),
    .rd_avail (sd_rd_avail), .rd_count (sd_rd_count), .rd_meta (sd_rd_meta),
    .rd_addr (sd_rd_addr), .rd_data (sd_rd_data), .rd_release (sd_rd_release)
  );

  // ---------------- candidate region unit ----------------------------------
  candidate_region_unit #(.SEED_DEPTH(SEED_DEPTH), .TXT_DEPTH(TXT_DEPTH)) u_cru (
    .clk, .rst_n, .cfg,
    .sd_rd_avail, .sd_rd_count, .sd_rd_meta (seed_meta_t'(sd_rd_meta)),
    .sd_rd_addr, .sd_rd_data (seed_t'(sd_rd_data)), .sd_rd_release,
    .read_ready, .read_len,
    .mem_req_valid (mreq_valid[1]), .mem_req_ready (mreq_ready[1]),
    .mem_req_addr (mreq_addr[1]), .mem_resp_valid (mresp_valid[1]),
    .mem_resp_data (mresp_data),
    .txt_wr_en, .txt_wr_addr, .txt_wr_data,
    .ba_start, .ba_len, .region_x, .ba_busy, .read_end, .ev_hop_dropped
  );
endmodule
