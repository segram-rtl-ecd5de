// minimizer_filter: frequency filter and seed fetch of MinSeed.
//
// Works through the minimizers of one minimizer-scratchpad bank. For each
// minimizer it walks the three-level hash-table index in main memory:
//   level 1, bucket table (4 B per bucket, 2^BUCKET_BITS buckets):
//            bits [31:6] index of the bucket's first minimizer entry,
//            bits [5:0]  number of minimizer entries in the bucket;
//   level 2, minimizer table (12 B per entry): bytes 0-3 hash value,
//            bytes 4-5 number of seed locations (the frequency),
//            bytes 8-11 index of the first seed location;
//   level 3, seed location table (8 B per entry): node ID, offset in node.
// The hash of a minimizer is its 2-bit packed k-mer and the bucket is the low
// BUCKET_BITS bits of it. A minimizer whose frequency is zero (not in the
// index) or above freq_thr is discarded; otherwise all its seed locations are
// copied into the seed scratchpad, and the bank is committed with the
// minimizer's start a and end b as metadata. A minimizer with more than
// SEED_DEPTH locations is committed in several banks. After the last batch
// of a read, an empty bank with the last flag marks the end of the read.
// Table sizes (4/12/8 B) and 2^24 buckets follow the paper; field positions
// and the hash are this design's choice.
//
// Memory: one read outstanding; a read returns the 16 bytes that start at
// mem_req_addr. The minimizer bank is released after its last minimizer.
module minimizer_filter
  import segram_pkg::*;
#(
  parameter int unsigned BUCKET_BITS = 24,
  parameter int unsigned MZ_DEPTH    = 2050,
  parameter int unsigned SEED_DEPTH  = 242,
  localparam int unsigned MAW = $clog2(MZ_DEPTH),
  localparam int unsigned MCW = $clog2(MZ_DEPTH + 1),
  localparam int unsigned SAW = $clog2(SEED_DEPTH),
  localparam int unsigned SCW = $clog2(SEED_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  // minimizer scratchpad consumer side
  input  logic               mz_rd_avail,
  input  logic [MCW-1:0]     mz_rd_count,
  input  logic [15:0]        mz_rd_meta,
  output logic [MAW-1:0]     mz_rd_addr,
  input  minimizer_t         mz_rd_data,
  output logic               mz_rd_release,
  // memory port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [MEM_AW-1:0]  mem_req_addr,
  input  logic               mem_resp_valid,
  input  logic [MEM_DW-1:0]  mem_resp_data,
  // seed scratchpad producer side
  input  logic               sd_wr_ready,
  output logic               sd_wr_en,
  output logic [SAW-1:0]     sd_wr_addr,
  output seed_t              sd_wr_data,
  output logic               sd_wr_commit,
  output logic [SCW-1:0]     sd_wr_count,
  output seed_meta_t         sd_wr_meta,
  // event counters for observation
  output logic               ev_kept,
  output logic               ev_dropped
);
  typedef enum logic [3:0] {S_IDLE, S_MZ, S_MZ2, S_L1, S_L1W, S_L2, S_L2W,
                            S_SEED, S_SEEDW, S_NEXT, S_END} state_e;
  state_e state;

  logic [MCW-1:0] idx;
  minimizer_t     mz;
  logic [25:0]    l2_ptr;
  logic [5:0]     l2_num, l2_e;
  logic [15:0]    nloc, l;
  logic [31:0]    lstart;
  logic [SCW-1:0] sc;
  logic           last_read;

  logic [31:0] resp_hash;
  logic [15:0] resp_cnt;
  logic [31:0] resp_lptr;
  assign resp_hash = mem_resp_data[31:0];
  assign resp_cnt  = mem_resp_data[47:32];
  assign resp_lptr = mem_resp_data[95:64];

  assign mz_rd_addr = MAW'(idx);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_addr  = '0;
    unique case (state)
      S_L1: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.l1_base + MEM_AW'({mz.kmer[BUCKET_BITS-1:0], 2'b00});
      end
      S_L2: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.l2_base + MEM_AW'(l2_ptr + 26'(l2_e)) * MEM_AW'(12);
      end
      S_SEED: begin
        mem_req_valid = sd_wr_ready;
        mem_req_addr  = cfg.l3_base + (MEM_AW'(lstart) + MEM_AW'(l)) * MEM_AW'(8);
      end
      default: ;
    endcase
  end

  logic seed_last;     // the location being returned is the minimizer's last
  logic seed_fullb;    // it fills the seed bank
  assign seed_last  = (l + 16'd1 == nloc);
  assign seed_fullb = (sc == SCW'(SEED_DEPTH - 1));

  always_comb begin
    sd_wr_en     = 1'b0;
    sd_wr_addr   = SAW'(sc);
    sd_wr_data   = mem_resp_data[63:0];
    sd_wr_commit = 1'b0;
    sd_wr_count  = sc + 1'b1;
    sd_wr_meta   = '{last: 1'b0, b: mz.b, a: mz.a};
    if (state == S_SEEDW && mem_resp_valid) begin
      sd_wr_en     = 1'b1;
      sd_wr_commit = seed_last || seed_fullb;
    end else if (state == S_END && sd_wr_ready) begin
      sd_wr_commit = 1'b1;
      sd_wr_count  = '0;
      sd_wr_meta   = '{last: 1'b1, b: '0, a: '0};
    end
  end

  assign mz_rd_release = (state == S_NEXT) && (idx + 1'b1 >= mz_rd_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      idx        <= '0;
      mz         <= '0;
      l2_ptr     <= '0;
      l2_num     <= '0;
      l2_e       <= '0;
      nloc       <= '0;
      l          <= '0;
      lstart     <= '0;
      sc         <= '0;
      last_read  <= 1'b0;
      ev_kept    <= 1'b0;
      ev_dropped <= 1'b0;
    end else begin
      ev_kept    <= 1'b0;
      ev_dropped <= 1'b0;
      unique case (state)
        S_IDLE: if (mz_rd_avail) begin
          idx       <= '0;
          last_read <= mz_rd_meta[0];
          if (mz_rd_count == 0) state <= S_NEXT;
          else                  state <= S_MZ;
        end
        S_MZ:  state <= S_MZ2;                 // scratchpad read latency
        S_MZ2: begin
          mz    <= mz_rd_data;
          state <= S_L1;
        end
        S_L1: if (mem_req_ready) state <= S_L1W;
        S_L1W: if (mem_resp_valid) begin
          l2_ptr <= mem_resp_data[31:6];
          l2_num <= mem_resp_data[5:0];
          l2_e   <= '0;
          if (mem_resp_data[5:0] == 0) begin
            ev_dropped <= 1'b1;
            state      <= S_NEXT;
          end else begin
            state <= S_L2;
          end
        end
        S_L2: if (mem_req_ready) state <= S_L2W;
        S_L2W: if (mem_resp_valid) begin
          if (resp_hash == mz.kmer) begin
            nloc   <= resp_cnt;
            lstart <= resp_lptr;
            l      <= '0;
            if (resp_cnt != 0 && resp_cnt <= cfg.freq_thr) begin
              ev_kept <= 1'b1;
              state   <= S_SEED;
            end else begin
              ev_dropped <= 1'b1;
              state      <= S_NEXT;
            end
          end else if (l2_e + 1'b1 == l2_num) begin
            ev_dropped <= 1'b1;                 // not in the index
            state      <= S_NEXT;
          end else begin
            l2_e  <= l2_e + 1'b1;
            state <= S_L2;
          end
        end
        S_SEED: if (sd_wr_ready && mem_req_ready) state <= S_SEEDW;
        S_SEEDW: if (mem_resp_valid) begin
          sc <= (seed_last || seed_fullb) ? '0 : sc + 1'b1;
          l  <= l + 1'b1;
          state <= seed_last ? S_NEXT : S_SEED;
        end
        S_NEXT: begin
          if (idx + 1'b1 >= mz_rd_count) state <= last_read ? S_END : S_IDLE;
          else begin
            idx   <= idx + 1'b1;
            state <= S_MZ;
          end
        end
        S_END: if (sd_wr_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
