// candidate_region_unit: candidate seed regions and subgraph fetch of MinSeed.
//
// For every seed location in a committed seed-scratchpad bank:
//  1. reads the seed's node entry to turn (node ID, offset) into the linear
//     position c of the seed; d = c + (b - a), the seed being as long as its
//     minimizer;
//  2. computes the region [x, y] with region_bounds (x = c - a(1+E),
//     y = d + (m-b-1)(1+E)), clipped to TXT_DEPTH characters;
//  3. walks back through the node table to the node holding x, then forward
//     node by node up to y, reading the characters (2-bit, 64 per 16-byte
//     word) and, for each node's last character, its outgoing edges and the
//     first character of each destination node;
//  4. writes one entry per character into BitAlign's input scratchpad: the
//     base and 12 HopBits, bit h-1 meaning "an edge to the character h
//     positions further on". Inside a node only bit 0 is set. Edges longer
//     than HOP_LIMIT or ending past y are dropped, as the paper's hop limit
//     does;
//     A seed whose diagonal c - a lies within DUP_DIAG of the previous
//     region's seed of the same read is skipped (own choice: consecutive
//     seeds of one alignment would otherwise align the same region again);
//  5. starts BitAlign on the subgraph and goes on with the next seed once
//     BitAlign is idle again (the input scratchpad has a single buffer).
// An empty bank with the last flag marks the end of a read: after BitAlign
// finishes, read_end pulses so that the read's pattern bitmasks can be
// replaced.
//
// Graph tables in main memory (node: 32 B {length, first char, edge count,
// first edge} in the first four 32-bit words; edge: 4 B destination node;
// character: 2 bits) follow the paper's sizes; field positions are this
// design's choice. One memory read is outstanding at a time.
module candidate_region_unit
  import segram_pkg::*;
#(
  parameter int unsigned SEED_DEPTH = 242,
  parameter int unsigned TXT_DEPTH  = 11000,
  parameter int unsigned DUP_DIAG   = 64,
  localparam int unsigned SAW = $clog2(SEED_DEPTH),
  localparam int unsigned SCW = $clog2(SEED_DEPTH + 1),
  localparam int unsigned TAW = $clog2(TXT_DEPTH),
  localparam int unsigned TCW = $clog2(TXT_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // seed scratchpad consumer side
  input  logic               sd_rd_avail,
  input  logic [SCW-1:0]     sd_rd_count,
  input  seed_meta_t         sd_rd_meta,
  output logic [SAW-1:0]     sd_rd_addr,
  input  seed_t              sd_rd_data,
  output logic               sd_rd_release,
  // read under alignment
  input  logic               read_ready,   // pattern bitmasks loaded
  input  logic [15:0]        read_len,
  // memory port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [MEM_AW-1:0]  mem_req_addr,
  input  logic               mem_resp_valid,
  input  logic [MEM_DW-1:0]  mem_resp_data,
  // BitAlign input scratchpad (text part) and control
  output logic               txt_wr_en,
  output logic [TAW-1:0]     txt_wr_addr,
  output txt_entry_t         txt_wr_data,
  output logic               ba_start,
  output logic [TCW-1:0]     ba_len,
  output logic [31:0]        region_x,
  input  logic               ba_busy,
  output logic               read_end,
  output logic               ev_hop_dropped
);
  typedef enum logic [4:0] {
    S_IDLE, S_SEED, S_SEED2, S_NODE, S_NODEW, S_CALC, S_CALCW, S_BACK, S_BACKW,
    S_WAITBA, S_CHARS, S_CHARW, S_EDGE, S_EDGEW, S_DNODE, S_DNODEW, S_PUT,
    S_NEXTN, S_NEXTNW, S_START, S_NEXTS, S_REL, S_ENDW
  } state_e;
  state_e state;

  logic [SCW-1:0]  si;
  seed_t           seed;
  seed_meta_t      meta;
  logic [31:0]     cur;                    // current node
  logic [31:0]     clen, cstart, ecnt, estart;
  logic [31:0]     c, d, x, y, q;
  logic [31:0]     e;
  logic [31:0]     dest;
  logic [127:0]    cword;
  logic [31:0]     cword_idx;
  logic            cword_ok;
  base_t           cbase;
  logic [HOP_LIMIT-1:0] hop;
  logic [31:0]     diag, last_diag;         // c - a: the seed's diagonal
  logic            last_ok;
  assign diag = c - 32'(meta.a);

  // region arithmetic
  logic        rb_valid;
  logic [31:0] rb_x, rb_y;
  region_bounds u_rb (
    .clk, .rst_n,
    .in_valid (state == S_CALC && read_ready),
    .a (meta.a), .b (meta.b), .c (c), .d (d), .m (read_len),
    .err (cfg.err_q8), .ref_len (cfg.ref_len),
    .out_valid (rb_valid), .x (rb_x), .y (rb_y)
  );

  logic [31:0] node_end, hopd;
  assign node_end = cstart + clen - 32'd1;
  assign hopd     = mem_resp_data[63:32] - q;   // destination first char - q

  assign sd_rd_addr = SAW'(si);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_addr  = '0;
    unique case (state)
      S_NODE, S_BACK, S_NEXTN: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.node_base + (MEM_AW'(cur) << 5);
      end
      S_CHARS: begin
        mem_req_valid = !(cword_ok && cword_idx == (q >> 6));
        mem_req_addr  = cfg.char_base + (MEM_AW'(q >> 6) << 4);
      end
      S_EDGE: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.edge_base + (MEM_AW'(estart + e) << 2);
      end
      S_DNODE: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.node_base + (MEM_AW'(dest) << 5);
      end
      default: ;
    endcase
  end

  assign cbase = base_t'(cword[{q[5:0], 1'b0} +: 2]);

  // character write
  always_comb begin
    txt_wr_en   = 1'b0;
    txt_wr_addr = TAW'(q - x);
    txt_wr_data = '{hop: hop, base: cbase};
    if (state == S_CHARS && cword_ok && cword_idx == (q >> 6) && q != node_end) begin
      txt_wr_en   = 1'b1;                       // inner character of a node
      txt_wr_data = '{hop: (q == y) ? '0 : HOP_LIMIT'(1), base: cbase};
    end else if (state == S_PUT) begin
      txt_wr_en   = 1'b1;                       // last character of a node
    end
  end

  assign ba_start      = (state == S_START);
  assign ba_len        = TCW'(y - x + 32'd1);
  assign region_x      = x;
  assign sd_rd_release = (state == S_REL);
  assign read_end      = (state == S_ENDW) && !ba_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      si        <= '0;
      seed      <= '0;
      meta      <= '0;
      cur       <= '0;
      clen      <= '0;
      cstart    <= '0;
      ecnt      <= '0;
      estart    <= '0;
      c         <= '0;
      d         <= '0;
      x         <= '0;
      y         <= '0;
      q         <= '0;
      e         <= '0;
      dest      <= '0;
      cword     <= '0;
      cword_idx <= '0;
      cword_ok  <= 1'b0;
      hop       <= '0;
      last_diag <= '0;
      last_ok   <= 1'b0;
      ev_hop_dropped <= 1'b0;
    end else begin
      ev_hop_dropped <= 1'b0;
      unique case (state)
        S_IDLE: if (sd_rd_avail) begin
          meta <= sd_rd_meta;
          si   <= '0;
          state <= (sd_rd_count == 0) ? S_REL : S_SEED;
        end
        S_SEED:  state <= S_SEED2;
        S_SEED2: begin
          seed  <= sd_rd_data;
          cur   <= sd_rd_data.node;
          state <= S_NODE;
        end
        S_NODE: if (mem_req_ready) state <= S_NODEW;
        S_NODEW: if (mem_resp_valid) begin
          clen   <= mem_resp_data[31:0];
          cstart <= mem_resp_data[63:32];
          ecnt   <= mem_resp_data[95:64];
          estart <= mem_resp_data[127:96];
          c      <= mem_resp_data[63:32] + seed.offset;
          d      <= mem_resp_data[63:32] + seed.offset + 32'(meta.b - meta.a);
          state  <= S_CALC;
        end
        S_CALC: if (read_ready) begin
          // a seed on (nearly) the diagonal of the previous region of this
          // read would align the same place again: skip it
          if (last_ok && (diag - last_diag <= 32'(DUP_DIAG) || last_diag - diag <= 32'(DUP_DIAG)))
            state <= S_NEXTS;
          else begin
            last_ok   <= 1'b1;
            last_diag <= diag;
            state     <= S_CALCW;
          end
        end
        S_CALCW: if (rb_valid) begin
          x <= rb_x;
          y <= (rb_y - rb_x >= 32'(TXT_DEPTH)) ? rb_x + 32'(TXT_DEPTH - 1) : rb_y;
          state <= S_BACK;
          if (cstart <= rb_x) state <= S_WAITBA;
          else                cur   <= cur - 32'd1;
        end
        S_BACK: if (mem_req_ready) state <= S_BACKW;
        S_BACKW: if (mem_resp_valid) begin
          clen   <= mem_resp_data[31:0];
          cstart <= mem_resp_data[63:32];
          ecnt   <= mem_resp_data[95:64];
          estart <= mem_resp_data[127:96];
          if (mem_resp_data[63:32] <= x) state <= S_WAITBA;
          else begin
            cur   <= cur - 32'd1;
            state <= S_BACK;
          end
        end
        S_WAITBA: if (!ba_busy) begin
          q        <= x;
          cword_ok <= 1'b0;
          state    <= S_CHARS;
        end
        S_CHARS: begin
          if (!(cword_ok && cword_idx == (q >> 6))) begin
            if (mem_req_ready) state <= S_CHARW;
          end else if (q == node_end) begin
            hop <= '0;
            e   <= '0;
            state <= (ecnt == 0 || q == y) ? S_PUT : S_EDGE;
          end else begin
            q <= q + 32'd1;
            if (q == y) state <= S_START;
          end
        end
        S_CHARW: if (mem_resp_valid) begin
          cword     <= mem_resp_data;
          cword_idx <= q >> 6;
          cword_ok  <= 1'b1;
          state     <= S_CHARS;
        end
        S_EDGE: if (mem_req_ready) state <= S_EDGEW;
        S_EDGEW: if (mem_resp_valid) begin
          dest  <= mem_resp_data[31:0];
          state <= S_DNODE;
        end
        S_DNODE: if (mem_req_ready) state <= S_DNODEW;
        S_DNODEW: if (mem_resp_valid) begin
          if (hopd >= 32'd1 && hopd <= 32'(HOP_LIMIT) && mem_resp_data[63:32] <= y)
            hop[hopd[3:0] - 4'd1] <= 1'b1;
          else
            ev_hop_dropped <= 1'b1;
          e     <= e + 32'd1;
          state <= (e + 32'd1 == ecnt) ? S_PUT : S_EDGE;
        end
        S_PUT: begin
          if (q == y) state <= S_START;
          else begin
            q     <= q + 32'd1;
            cur   <= cur + 32'd1;
            state <= S_NEXTN;
          end
        end
        S_NEXTN: if (mem_req_ready) state <= S_NEXTNW;
        S_NEXTNW: if (mem_resp_valid) begin
          clen   <= mem_resp_data[31:0];
          cstart <= mem_resp_data[63:32];
          ecnt   <= mem_resp_data[95:64];
          estart <= mem_resp_data[127:96];
          state  <= S_CHARS;
        end
        S_START: state <= S_NEXTS;
        S_NEXTS: begin
          if (si + 1'b1 >= sd_rd_count) state <= S_REL;
          else begin
            si    <= si + 1'b1;
            state <= S_SEED;
          end
        end
        S_REL: begin
          state <= meta.last ? S_ENDW : S_IDLE;
          if (meta.last) last_ok <= 1'b0;
        end
        S_ENDW: if (!ba_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
