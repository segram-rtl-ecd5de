// segram_module: one SeGraM module, NACC accelerators beside one HBM2E stack.
//
// Each accelerator has its own channel of the stack and its own host stream;
// the accelerators do not talk to each other. Eight accelerators per module
// follow the paper (one per HBM2E channel). All ports are per-accelerator
// arrays of the segram_accel ports.
module segram_module
  import segram_pkg::*;
#(
  parameter int unsigned NACC       = 8,
  parameter int unsigned NPE        = 64,
  parameter int unsigned W          = 128,
  parameter int unsigned RD_DEPTH   = 625,
  parameter int unsigned MZ_DEPTH   = 2050,
  parameter int unsigned SEED_DEPTH = 242,
  parameter int unsigned TXT_DEPTH  = 11000,
  localparam int unsigned RAW = $clog2(RD_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_t       [NACC-1:0]         cfg,
  output logic       [NACC-1:0]         host_ready,
  input  logic       [NACC-1:0]         host_wr_en,
  input  logic       [NACC-1:0][RAW-1:0] host_wr_addr,
  input  logic       [NACC-1:0][31:0]   host_wr_data,
  input  logic       [NACC-1:0]         host_commit,
  input  logic       [NACC-1:0][15:0]   host_len,
  output logic       [NACC-1:0]         ch_req_valid,
  input  logic       [NACC-1:0]         ch_req_ready,
  output logic       [NACC-1:0][MEM_AW-1:0] ch_req_addr,
  input  logic       [NACC-1:0]         ch_resp_valid,
  input  logic       [NACC-1:0][MEM_DW-1:0] ch_resp_data,
  output logic       [NACC-1:0]         op_valid,
  output logic       [NACC-1:0][1:0]    op,
  output logic       [NACC-1:0]         res_valid,
  output logic       [NACC-1:0][31:0]   res_x,
  output logic       [NACC-1:0][15:0]   res_dist,
  output logic       [NACC-1:0]         res_fail,
  output logic       [NACC-1:0][5:0]    events
);
  for (genvar a = 0; a < NACC; a++) begin : g_acc
    edit_op_e op_a;
    segram_accel #(.NPE(NPE), .W(W), .RD_DEPTH(RD_DEPTH), .MZ_DEPTH(MZ_DEPTH),
                   .SEED_DEPTH(SEED_DEPTH), .TXT_DEPTH(TXT_DEPTH)) u_acc (
      .clk, .rst_n, .cfg (cfg[a]),
      .host_ready (host_ready[a]), .host_wr_en (host_wr_en[a]),
      .host_wr_addr (host_wr_addr[a]), .host_wr_data (host_wr_data[a]),
      .host_commit (host_commit[a]), .host_len (host_len[a]),
      .ch_req_valid (ch_req_valid[a]), .ch_req_ready (ch_req_ready[a]),
      .ch_req_addr (ch_req_addr[a]), .ch_resp_valid (ch_resp_valid[a]),
      .ch_resp_data (ch_resp_data[a]),
      .op_valid (op_valid[a]), .op (op_a),
      .res_valid (res_valid[a]), .res_x (res_x[a]), .res_dist (res_dist[a]),
      .res_fail (res_fail[a]), .events (events[a])
    );
    assign op[a] = op_a;
  end
endmodule
