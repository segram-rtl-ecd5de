// segram_accel: one SeGraM accelerator, a MinSeed and a BitAlign pair.
//
// MinSeed finds the candidate subgraphs of a read and writes each into
// BitAlign's input scratchpad; BitAlign aligns the read to it and streams the
// result back to the host: the edit operations (op_valid/op, from the start
// of the subgraph), then res_valid with the subgraph's first linear position,
// the edit distance and a fail flag (no alignment within the threshold). The
// accelerator owns one HBM2E channel. While BitAlign runs, MinSeed already
// works on the next minimizers and seeds (double-buffered scratchpads), as
// the paper describes.
module segram_accel
  import segram_pkg::*;
#(
  parameter int unsigned NPE        = 64,
  parameter int unsigned W          = 128,
  parameter int unsigned K          = 15,
  parameter int unsigned WIN        = 10,
  parameter int unsigned RD_DEPTH   = 625,
  parameter int unsigned MZ_DEPTH   = 2050,
  parameter int unsigned SEED_DEPTH = 242,
  parameter int unsigned TXT_DEPTH  = 11000,
  localparam int unsigned RAW = $clog2(RD_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  output logic               host_ready,
  input  logic               host_wr_en,
  input  logic [RAW-1:0]     host_wr_addr,
  input  logic [31:0]        host_wr_data,
  input  logic               host_commit,
  input  logic [15:0]        host_len,
  output logic               ch_req_valid,
  input  logic               ch_req_ready,
  output logic [MEM_AW-1:0]  ch_req_addr,
  input  logic               ch_resp_valid,
  input  logic [MEM_DW-1:0]  ch_resp_data,
  output logic               op_valid,
  output edit_op_e           op,
  output logic               res_valid,
  output logic [31:0]        res_x,
  output logic [15:0]        res_dist,
  output logic               res_fail,
  output logic [5:0]         events   // {window, batch, hop dropped, kept, dropped, read end}
);
  localparam int unsigned TAW = $clog2(TXT_DEPTH);
  localparam int unsigned TCW = $clog2(TXT_DEPTH + 1);

  logic            rs_avail, pm_gen_done, read_ready, read_end;
  logic [15:0]     rs_len, read_len;
  logic [RAW-1:0]  rs_addr;
  logic [31:0]     rs_data;
  logic            txt_wr_en, ba_start, ba_busy;
  logic [TAW-1:0]  txt_wr_addr;
  txt_entry_t      txt_wr_data;
  logic [TCW-1:0]  ba_len;
  logic [31:0]     region_x, cur_x;
  logic            ev_kept, ev_dropped, ev_batch, ev_hop, ev_win;

  minseed #(.K(K), .WIN(WIN), .RD_DEPTH(RD_DEPTH), .MZ_DEPTH(MZ_DEPTH),
            .SEED_DEPTH(SEED_DEPTH), .TXT_DEPTH(TXT_DEPTH)) u_ms (
    .clk, .rst_n, .cfg,
    .host_ready, .host_wr_en, .host_wr_addr, .host_wr_data, .host_commit, .host_len,
    .ch_req_valid, .ch_req_ready, .ch_req_addr, .ch_resp_valid, .ch_resp_data,
    .rs_avail, .rs_len, .rs_addr, .rs_data, .pm_gen_done,
    .read_ready, .read_len,
    .txt_wr_en, .txt_wr_addr, .txt_wr_data, .ba_start, .ba_len, .region_x,
    .ba_busy, .read_end,
    .ev_mz_kept (ev_kept), .ev_mz_dropped (ev_dropped), .ev_mz_batch (ev_batch),
    .ev_hop_dropped (ev_hop)
  );

  bitalign #(.NPE(NPE), .W(W), .TW(W), .O(48), .TXT_DEPTH(TXT_DEPTH), .PM_WORDS(RD_DEPTH)) u_ba (
    .clk, .rst_n,
    .txt_wr_en, .txt_wr_addr, .txt_wr_data,
    .rs_avail, .rs_len, .rs_addr, .rs_data, .pm_gen_done,
    .read_ready, .read_len, .read_end,
    .start (ba_start), .n_txt (ba_len), .edit_k (cfg.edit_k), .busy (ba_busy),
    .op_valid, .op, .aln_done (res_valid), .aln_fail (res_fail), .aln_dist (res_dist),
    .ev_window (ev_win)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cur_x <= '0;
    else if (ba_start) cur_x <= region_x;
  end
  assign res_x  = cur_x;
  assign events = {ev_win, ev_batch, ev_hop, ev_kept, ev_dropped, read_end};
endmodule
