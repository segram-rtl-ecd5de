// minimizer_finder: finds the <W,K>-minimizers of a query read.
//
// The read is read from the read scratchpad as 32-bit words of 16 bases
// (base j of a word in bits [2j+1:2j]). The bases are shifted one per cycle
// into a 2K-bit k-mer register; from the K-th base on every cycle yields a
// k-mer, which is stored in a W-entry circular window buffer. The minimum of
// the window is cached (value and position), so a new k-mer is only compared
// with the cached minimum; only when the cached minimum drops out of the
// window is the buffer rescanned, here by a one-cycle comparator tree. This
// is the single-loop algorithm of the paper. Ordering is lexicographic on the
// 2-bit code (as in the paper's example); ties keep the leftmost k-mer. Each
// time the window minimum moves to a new k-mer, the minimizer (k-mer, start
// a, end b = a+K-1) is written to the minimizer scratchpad.
//
// When a scratchpad bank fills up (MZ_DEPTH entries) it is committed and the
// finder continues in the other bank: the batching the paper describes. The
// last batch of a read is committed with meta[0] = 1, possibly empty.
//
// Timing: start is taken when idle; each word costs 2 cycles of fetch plus
// 16 cycles of shifting, less if the read ends; done pulses after the last
// commit. K, W and the ordering are this design's choice (the paper names
// neither k nor w).
module minimizer_finder
  import segram_pkg::*;
#(
  parameter int unsigned K        = 15,
  parameter int unsigned W        = 10,
  parameter int unsigned RD_DEPTH = 625,
  parameter int unsigned MZ_DEPTH = 2050,
  localparam int unsigned RAW = $clog2(RD_DEPTH),
  localparam int unsigned MAW = $clog2(MZ_DEPTH),
  localparam int unsigned MCW = $clog2(MZ_DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      read_len,     // bases
  output logic             busy,
  output logic             done,
  // read scratchpad port
  output logic [RAW-1:0]   rd_addr,
  input  logic [31:0]      rd_data,
  // minimizer scratchpad producer side
  input  logic             mz_wr_ready,
  output logic             mz_wr_en,
  output logic [MAW-1:0]   mz_wr_addr,
  output minimizer_t       mz_wr_data,
  output logic             mz_wr_commit,
  output logic [MCW-1:0]   mz_wr_count,
  output logic [15:0]      mz_wr_meta
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WAIT, S_SHIFT, S_FLUSH} state_e;
  state_e state;

  logic [31:0]     word;
  logic [4:0]      sub;        // base index inside word
  logic [15:0]     pos;        // index of the base being consumed
  logic [15:0]     len;
  logic [2*K-1:0]  kmer;
  logic [2*K-1:0]  buf_val [W];
  logic [15:0]     buf_pos [W];
  logic [$clog2(W)-1:0] wr_slot;
  logic [2*K-1:0]  min_val;
  logic [15:0]     min_pos;
  logic            have_emit;
  logic [15:0]     last_pos;
  logic [MCW-1:0]  cnt;

  // ---- combinational step for the base at pos ------------------------------
  base_t           cur_base;
  logic [2*K-1:0]  nk;         // k-mer ending at pos
  logic            kvalid;     // a k-mer ends at pos
  logic [15:0]     kstart;     // its start
  logic            win_full;   // the window of W k-mers is complete
  logic [2*K-1:0]  nmin_val;
  logic [15:0]     nmin_pos;
  logic            emit;
  logic            stall;

  assign cur_base = base_t'(word[2*sub +: 2]);
  assign nk       = {kmer[2*K-3:0], cur_base};
  assign kvalid   = (pos >= 16'(K - 1));
  assign kstart   = pos - 16'(K - 1);
  assign win_full = (pos >= 16'(K + W - 2));

  always_comb begin
    nmin_val = min_val;
    nmin_pos = min_pos;
    if (pos == 16'(K - 1)) begin
      nmin_val = nk;                       // first k-mer of the read
      nmin_pos = kstart;
    end else if (pos >= 16'(K + W - 1) && min_pos < kstart - 16'(W - 1)) begin
      // cached minimum left the window: rescan, the new k-mer replaces the
      // oldest entry; leftmost smallest wins
      nmin_val = nk;
      nmin_pos = kstart;
      for (int e = 0; e < W; e++) begin
        if (e != int'(wr_slot)) begin
          if (buf_val[e] < nmin_val || (buf_val[e] == nmin_val && buf_pos[e] < nmin_pos)) begin
            nmin_val = buf_val[e];
            nmin_pos = buf_pos[e];
          end
        end
      end
    end else if (nk < min_val) begin
      nmin_val = nk;
      nmin_pos = kstart;
    end
  end

  assign emit  = (state == S_SHIFT) && kvalid && win_full && !(have_emit && nmin_pos == last_pos);
  assign stall = emit && !mz_wr_ready;

  assign mz_wr_en    = emit && mz_wr_ready;
  assign mz_wr_addr  = MAW'(cnt);
  assign mz_wr_data  = '{spare: '0, b: nmin_pos + 16'(K - 1), a: nmin_pos,
                         kmer: 32'(nmin_val)};

  always_comb begin
    mz_wr_commit = 1'b0;
    mz_wr_count  = cnt;
    mz_wr_meta   = '0;
    if (mz_wr_en && cnt == MCW'(MZ_DEPTH - 1)) begin
      mz_wr_commit = 1'b1;                   // bank full: close this batch
      mz_wr_count  = MCW'(MZ_DEPTH);
    end else if (state == S_FLUSH && mz_wr_ready) begin
      mz_wr_commit = 1'b1;
      mz_wr_meta   = 16'd1;                  // last batch of the read
    end
  end

  assign rd_addr = RAW'(pos >> 4);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      word      <= '0;
      sub       <= '0;
      pos       <= '0;
      len       <= '0;
      kmer      <= '0;
      wr_slot   <= '0;
      min_val   <= '0;
      min_pos   <= '0;
      have_emit <= 1'b0;
      last_pos  <= '0;
      cnt       <= '0;
      done      <= 1'b0;
      for (int e = 0; e < W; e++) begin
        buf_val[e] <= '0;
        buf_pos[e] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          len       <= read_len;
          pos       <= '0;
          have_emit <= 1'b0;
          cnt       <= '0;
          wr_slot   <= '0;
          state     <= (read_len == 0) ? S_FLUSH : S_FETCH;
        end
        S_FETCH: state <= S_WAIT;
        S_WAIT: begin
          word  <= rd_data;
          sub   <= 5'(pos[3:0]);
          state <= S_SHIFT;
        end
        S_SHIFT: if (!stall) begin
          kmer <= nk;
          if (kvalid) begin
            buf_val[wr_slot] <= nk;
            buf_pos[wr_slot] <= kstart;
            wr_slot <= (int'(wr_slot) == W - 1) ? '0 : wr_slot + 1'b1;
            min_val <= nmin_val;
            min_pos <= nmin_pos;
          end
          if (emit) begin
            have_emit <= 1'b1;
            last_pos  <= nmin_pos;
            cnt       <= (cnt == MCW'(MZ_DEPTH - 1)) ? '0 : cnt + 1'b1;
          end
          pos <= pos + 1'b1;
          sub <= sub + 1'b1;
          if (pos + 1'b1 == len)      state <= S_FLUSH;
          else if (sub == 5'd15)      state <= S_FETCH;
        end
        S_FLUSH: if (mz_wr_ready) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
