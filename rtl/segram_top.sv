// segram_top: the full SeGraM system, NSTACK modules of NACC accelerators.
//
// Four SeGraM modules, one beside each of four HBM2E stacks, with eight
// accelerators each: 32 independent accelerators, as in the paper. The
// graph and index are replicated in every stack, so every accelerator can
// map any read; the host distributes reads. Accelerator a = s*NACC + c uses
// channel c of stack s. The HBM2E stacks and the host are outside; their
// signals are the per-accelerator port arrays below.
module segram_top
  import segram_pkg::*;
#(
  parameter int unsigned NSTACK     = 4,
  parameter int unsigned NACC       = 8,
  parameter int unsigned NPE        = 64,
  parameter int unsigned W          = 128,
  parameter int unsigned RD_DEPTH   = 625,
  parameter int unsigned MZ_DEPTH   = 2050,
  parameter int unsigned SEED_DEPTH = 242,
  parameter int unsigned TXT_DEPTH  = 11000,
  localparam int unsigned N   = NSTACK * NACC,
  localparam int unsigned RAW = $clog2(RD_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_t       [N-1:0]            cfg,
  output logic       [N-1:0]            host_ready,
  input  logic       [N-1:0]            host_wr_en,
  input  logic       [N-1:0][RAW-1:0]   host_wr_addr,
  input  logic       [N-1:0][31:0]      host_wr_data,
  input  logic       [N-1:0]            host_commit,
  input  logic       [N-1:0][15:0]      host_len,
  output logic       [N-1:0]            ch_req_valid,
  input  logic       [N-1:0]            ch_req_ready,
  output logic       [N-1:0][MEM_AW-1:0] ch_req_addr,
  input  logic       [N-1:0]            ch_resp_valid,
  input  logic       [N-1:0][MEM_DW-1:0] ch_resp_data,
  output logic       [N-1:0]            op_valid,
  output logic       [N-1:0][1:0]       op,
  output logic       [N-1:0]            res_valid,
  output logic       [N-1:0][31:0]      res_x,
  output logic       [N-1:0][15:0]      res_dist,
  output logic       [N-1:0]            res_fail,
  output logic       [N-1:0][5:0]       events
);
  for (genvar s = 0; s < NSTACK; s++) begin : g_stack
    localparam int unsigned LO = s * NACC;
    segram_module #(.NACC(NACC), .NPE(NPE), .W(W), .RD_DEPTH(RD_DEPTH),
                    .MZ_DEPTH(MZ_DEPTH), .SEED_DEPTH(SEED_DEPTH),
                    .TXT_DEPTH(TXT_DEPTH)) u_mod (
      .clk, .rst_n,
      .cfg          (cfg[LO +: NACC]),
      .host_ready   (host_ready[LO +: NACC]),
      .host_wr_en   (host_wr_en[LO +: NACC]),
      .host_wr_addr (host_wr_addr[LO +: NACC]),
      .host_wr_data (host_wr_data[LO +: NACC]),
      .host_commit  (host_commit[LO +: NACC]),
      .host_len     (host_len[LO +: NACC]),
      .ch_req_valid (ch_req_valid[LO +: NACC]),
      .ch_req_ready (ch_req_ready[LO +: NACC]),
      .ch_req_addr  (ch_req_addr[LO +: NACC]),
      .ch_resp_valid(ch_resp_valid[LO +: NACC]),
      .ch_resp_data (ch_resp_data[LO +: NACC]),
      .op_valid     (op_valid[LO +: NACC]),
      .op           (op[LO +: NACC]),
      .res_valid    (res_valid[LO +: NACC]),
      .res_x        (res_x[LO +: NACC]),
      .res_dist     (res_dist[LO +: NACC]),
      .res_fail     (res_fail[LO +: NACC]),
      .events       (events[LO +: NACC])
    );
  end
endmodule
