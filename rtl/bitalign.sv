// bitalign: the BitAlign sequence-to-graph alignment accelerator.
//
// Aligns the query read to one linearized subgraph (written into the input
// scratchpad by MinSeed) and streams the edit operations of the optimal
// alignment, then the total edit distance.
//
// Pattern bitmasks. When a new read is committed in the read scratchpad
// and the previous read is finished (read_end), the bitmask generator reads
// it word by word (16 bases) and stores, per 16 read positions, a 0 for each
// position holding base c in mask c. read_ready then stays high until
// read_end.
//
// Windows (divide and conquer, after GenASM). Read and subgraph are cut into
// windows of W pattern and TW text characters that overlap by O characters.
// For each window the controller
//   1. gathers the W-bit bitmask of every base for pattern positions
//      [ppos, ppos+mw), bit b standing for position ppos+mw-1-b;
//   2. clears the array and streams the text characters tpos+nw-1 .. tpos
//      into bitalign_dc, one per cycle, waits until PE k has seen the first
//      character and takes the smallest d <= k with found[d];
//   3. runs bitalign_traceback from (0, d, mw-1); in all but the last window
//      it stops after W-O pattern or TW-O text characters;
//   4. advances ppos and tpos by what the traceback consumed.
// The alignment is anchored at the first subgraph character and free at
// its end. aln_fail is raised when a window has no alignment within k edits.
// W = TW = 128 and 64 PEs follow the paper; O = 48 follows from the paper's
// 125 windows for a 10 kbp read. Everything else is this design's choice.
module bitalign
  import segram_pkg::*;
#(
  parameter int unsigned NPE       = 64,
  parameter int unsigned W         = 128,
  parameter int unsigned TW        = 128,
  parameter int unsigned O         = 48,
  parameter int unsigned TXT_DEPTH = 11000,
  parameter int unsigned PM_WORDS  = 625,
  localparam int unsigned TAW = $clog2(TXT_DEPTH),
  localparam int unsigned TCW = $clog2(TXT_DEPTH + 1),
  localparam int unsigned PAW = $clog2(PM_WORDS),
  localparam int unsigned IW  = $clog2(TW),
  localparam int unsigned PW  = $clog2(NPE),
  localparam int unsigned BW  = $clog2(W),
  localparam int unsigned NPMW = W / 16 + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // subgraph text from MinSeed
  input  logic              txt_wr_en,
  input  logic [TAW-1:0]    txt_wr_addr,
  input  txt_entry_t        txt_wr_data,
  // query read from the read scratchpad
  input  logic              rs_avail,
  input  logic [15:0]       rs_len,
  output logic [PAW-1:0]    rs_addr,
  input  logic [31:0]       rs_data,
  output logic              pm_gen_done,
  output logic              read_ready,
  output logic [15:0]       read_len,
  input  logic              read_end,
  // alignment control
  input  logic              start,
  input  logic [TCW-1:0]    n_txt,
  input  logic [6:0]        edit_k,
  output logic              busy,
  // result stream
  output logic              op_valid,
  output edit_op_e          op,
  output logic              aln_done,
  output logic              aln_fail,
  output logic [15:0]       aln_dist,
  output logic              ev_window
);
  // ---------------- input scratchpad ----------------------------------------
  logic [TAW-1:0]  txt_raddr;
  txt_entry_t      txt_rdata;
  logic            pm_we;
  logic [PAW-1:0]  pm_waddr, pm_raddr;
  logic [63:0]     pm_wdata, pm_rdata;

  input_scratchpad #(.TXT_DEPTH(TXT_DEPTH), .PM_WORDS(PM_WORDS)) u_isp (
    .clk,
    .txt_we (txt_wr_en), .txt_waddr (txt_wr_addr), .txt_wdata (txt_wr_data),
    .txt_raddr, .txt_rdata,
    .pm_we, .pm_waddr, .pm_wdata, .pm_raddr, .pm_rdata
  );

  // ---------------- pattern bitmask generator -------------------------------
  typedef enum logic [1:0] {G_IDLE, G_RD, G_WR, G_HOLD} gstate_e;
  gstate_e         gst;
  logic [PAW:0]    gw, gwords;
  logic            gen_done_seen;

  assign rs_addr    = PAW'(gw);
  assign read_ready = (gst == G_HOLD);
  assign pm_we      = (gst == G_WR);
  assign pm_waddr   = PAW'(gw);

  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int k = 0; k < 16; k++) begin
        if ((32'(gw) << 4) + 32'(k) < 32'(read_len))
          pm_wdata[16*c + k] = (rs_data[2*k +: 2] != 2'(c));
        else
          pm_wdata[16*c + k] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gst           <= G_IDLE;
      gw            <= '0;
      gwords        <= '0;
      read_len      <= '0;
      pm_gen_done   <= 1'b0;
      gen_done_seen <= 1'b0;
    end else begin
      pm_gen_done <= 1'b0;
      unique case (gst)
        G_IDLE: if (rs_avail) begin
          read_len <= rs_len;
          gwords   <= (PAW+1)'((32'(rs_len) + 32'd15) >> 4);
          gw       <= '0;
          gst      <= (rs_len == 0) ? G_HOLD : G_RD;
          if (rs_len == 0) pm_gen_done <= 1'b1;
        end
        G_RD: gst <= G_WR;                          // read latency
        G_WR: begin
          if (gw + 1'b1 == gwords) begin
            gst         <= G_HOLD;
            pm_gen_done <= 1'b1;
          end else begin
            gw  <= gw + 1'b1;
            gst <= G_RD;
          end
        end
        G_HOLD: if (read_end) gst <= G_IDLE;
        default: gst <= G_IDLE;
      endcase
    end
  end

  // ---------------- systolic array and traceback ----------------------------
  logic                  dc_clear, dc_valid;
  logic [W-1:0]          dc_pm;
  logic [HOP_LIMIT-1:0]  dc_hop;
  logic [IW-1:0]         dc_idx;
  logic [BW-1:0]         mbit;
  logic [NPE-1:0]        found, pe_busy;
  logic [PW-1:0]         pe_a, pe_b;
  logic [IW-1:0]         addr_a, addr_b;
  logic [W-1:0]          data_a, data_b;

  bitalign_dc #(.NPE(NPE), .W(W), .HOP_LIMIT(HOP_LIMIT), .TW(TW)) u_dc (
    .clk, .clear (dc_clear),
    .in_valid (dc_valid), .in_pm (dc_pm), .in_hop (dc_hop), .in_idx (dc_idx),
    .mbit, .found, .pe_busy,
    .tb_pe_a (pe_a), .tb_addr_a (addr_a), .tb_data_a (data_a),
    .tb_pe_b (pe_b), .tb_addr_b (addr_b), .tb_data_b (data_b)
  );

  logic               tb_start, tb_done, tb_error, tb_busy;
  logic [PW-1:0]      tb_d0;
  logic [IW:0]        tb_nw, tb_stop_t, tcons;
  logic [BW:0]        tb_stop_p, pcons;
  logic [3:0][W-1:0]  win;
  logic [IW-1:0]      tb_txt_addr;

  bitalign_traceback #(.NPE(NPE), .W(W), .TW(TW)) u_tb (
    .clk, .rst_n,
    .start (tb_start), .d0 (tb_d0), .mbit, .nw (tb_nw),
    .stop_p (tb_stop_p), .stop_t (tb_stop_t), .pm (win),
    .txt_addr (tb_txt_addr), .txt_data (txt_rdata),
    .pe_a, .addr_a, .data_a, .pe_b, .addr_b, .data_b,
    .op_valid, .op, .done (tb_done), .error (tb_error),
    .pcons, .tcons, .busy (tb_busy)
  );

  // ---------------- window controller ---------------------------------------
  typedef enum logic [3:0] {A_IDLE, A_PMRD, A_PMWT, A_PMFIN, A_CLR, A_STREAM,
                            A_DRAIN, A_ED, A_TB, A_TBWT, A_NEXT, A_FIN} astate_e;
  astate_e            ast;
  logic [TCW-1:0]     n, tpos;
  logic [15:0]        ppos, edits;
  logic [6:0]         k;
  logic [IW:0]        nw;
  logic [BW:0]        mw;
  logic [3:0]         pmcnt;
  logic [3:0][16*NPMW-1:0] pbuf;
  logic [IW:0]        s;             // characters streamed
  logic               feed_v;
  logic [IW-1:0]      feed_idx;
  logic [7:0]         drain;
  logic               last_win;
  logic               fail_q;

  // window sizes
  logic [TCW-1:0] txt_left;
  logic [15:0]    pat_left;
  assign txt_left = n - tpos;
  assign pat_left = read_len - ppos;

  assign pm_raddr = PAW'((ppos >> 4) + 16'(pmcnt));
  assign mbit     = BW'(mw - 1'b1);

  // text read address: stream or traceback
  always_comb begin
    if (ast == A_STREAM) txt_raddr = TAW'(tpos + TCW'(nw) - TCW'(1) - TCW'(s));
    else                 txt_raddr = TAW'(tpos + TCW'(tb_txt_addr));
  end

  // the character read in the previous cycle enters PE 0
  assign dc_valid = feed_v;
  assign dc_idx   = feed_idx;
  assign dc_hop   = txt_rdata.hop;
  assign dc_pm    = win[txt_rdata.base];
  assign dc_clear = (ast == A_CLR);

  // smallest d <= k with a hit
  logic [PW-1:0] dmin;
  logic          dhit;
  always_comb begin
    dmin = '0;
    dhit = 1'b0;
    for (int dd = NPE - 1; dd >= 0; dd--)
      if (found[dd] && dd <= int'(k)) begin
        dmin = PW'(dd);
        dhit = 1'b1;
      end
  end

  assign tb_start   = (ast == A_TB);
  assign tb_d0      = dmin;
  assign tb_nw      = nw;
  assign tb_stop_p  = last_win ? (BW+1)'(W) : (BW+1)'(W - O);
  assign tb_stop_t  = last_win ? (IW+1)'(TW) : (IW+1)'(TW - O);
  assign busy       = (ast != A_IDLE);
  assign ev_window  = (ast == A_TB);

  // pattern window from the buffered bitmask words: bit-reversed so that the
  // last pattern character of the window sits in bit mw-1, bits >= mw set
  logic [3:0][W-1:0] win_next, pm_fwd, pm_rev;
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      pm_fwd[c] = W'(pbuf[c] >> ppos[3:0]);
      for (int t = 0; t < W; t++) pm_rev[c][W-1-t] = pm_fwd[c][t];
      if (int'(mw) == W) win_next[c] = pm_rev[c];
      else win_next[c] = (pm_rev[c] >> (W - int'(mw))) | ~((W'(1) << mw) - W'(1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ast      <= A_IDLE;
      n        <= '0;
      tpos     <= '0;
      ppos     <= '0;
      edits    <= '0;
      k        <= '0;
      nw       <= '0;
      mw       <= '0;
      pmcnt    <= '0;
      pbuf     <= '0;
      win      <= '1;
      s        <= '0;
      feed_v   <= 1'b0;
      feed_idx <= '0;
      drain    <= '0;
      last_win <= 1'b0;
      fail_q   <= 1'b0;
      aln_done <= 1'b0;
      aln_fail <= 1'b0;
      aln_dist <= '0;
    end else begin
      aln_done <= 1'b0;
      feed_v   <= 1'b0;
      if (op_valid && op != OP_MATCH) edits <= edits + 16'd1;
      unique case (ast)
        A_IDLE: if (start) begin
          n      <= n_txt;
          k      <= (edit_k > 7'(NPE - 1)) ? 7'(NPE - 1) : edit_k;
          tpos   <= '0;
          ppos   <= '0;
          edits  <= '0;
          fail_q <= 1'b0;
          ast    <= A_PMRD;
          pmcnt  <= '0;
        end
        A_PMRD: begin
          // window sizes for this window
          nw    <= (txt_left > TCW'(TW)) ? (IW+1)'(TW) : (IW+1)'(txt_left);
          mw    <= (pat_left > 16'(W))   ? (BW+1)'(W)  : (BW+1)'(pat_left);
          last_win <= (pat_left <= 16'(W));
          ast   <= A_PMWT;
        end
        A_PMWT: begin
          // pm_rdata holds word (ppos>>4)+pmcnt
          for (int c = 0; c < 4; c++)
            pbuf[c] <= {pm_rdata[16*c +: 16], pbuf[c][16*NPMW-1:16]};
          if (int'(pmcnt) == NPMW - 1) ast <= A_PMFIN;
          else begin
            pmcnt <= pmcnt + 1'b1;
            ast   <= A_PMRD;
          end
        end
        A_PMFIN: begin
          win <= win_next;
          ast <= A_CLR;
        end
        A_CLR: begin
          s   <= '0;
          ast <= (nw == 0) ? A_FIN : A_STREAM;
          if (nw == 0) fail_q <= 1'b1;
        end
        A_STREAM: begin
          feed_v   <= 1'b1;
          feed_idx <= IW'(nw - 1'b1 - s);
          s        <= s + 1'b1;
          if (s + 1'b1 == nw) begin
            ast   <= A_DRAIN;
            drain <= 8'(k) + 8'd3;
          end
        end
        A_DRAIN: begin
          drain <= drain - 8'd1;
          if (drain == 0) ast <= A_ED;
        end
        A_ED: begin
          if (dhit) ast <= A_TB;
          else begin
            fail_q <= 1'b1;
            ast    <= A_FIN;
          end
        end
        A_TB: ast <= A_TBWT;
        A_TBWT: if (tb_done) begin
          if (tb_error || (pcons == 0 && tcons == 0)) begin
            fail_q <= 1'b1;
            ast    <= A_FIN;
          end else begin
            ppos  <= ppos + 16'(pcons);
            tpos  <= tpos + TCW'(tcons);
            ast   <= A_NEXT;
          end
        end
        A_NEXT: begin
          pmcnt <= '0;
          ast   <= (ppos >= read_len) ? A_FIN : A_PMRD;
        end
        A_FIN: begin
          aln_done <= 1'b1;
          aln_fail <= fail_q;
          aln_dist <= edits;
          ast      <= A_IDLE;
        end
        default: ast <= A_IDLE;
      endcase
    end
  end
endmodule
