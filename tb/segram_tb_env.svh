// segram_tb_env.svh: shared test environment for the accelerator-level
// testbenches (included inside a testbench module).
//
// Builds, in a byte-addressed model of HBM2E memory, a small genome graph
// and its minimizer index in the table formats the RTL expects:
//   * a random reference path of REF_NODES nodes (20..60 bases each), with
//     a one-base SNP branch after some nodes (node -> alt -> next node, plus
//     node -> next node), and one 14-base insertion branch whose bypass edge
//     is longer than the hop limit; a 40-base segment is repeated REPEATS
//     times so that its minimizers are frequent;
//   * node table (32 B), edge table (4 B), 2-bit character table;
//   * three-level index of the <w,k>-minimizers of the reference path (the
//     alternative branches are not indexed).
// The minimizer function is written here independently of the RTL from the
// definition: in every window of WIN consecutive k-mers the smallest k-mer
// (lexicographic, leftmost on ties) is a minimizer; a minimizer is reported
// once per position. Memory reads return the 16 bytes from the requested
// address; unknown bytes read as zero.

localparam int ENV_K = 15, ENV_WIN = 10;
localparam longint L1_BASE = 64'h0_0000_0000, L2_BASE = 64'h0_1000_0000,
                   L3_BASE = 64'h0_2000_0000, ND_BASE = 64'h0_3000_0000,
                   CH_BASE = 64'h0_4000_0000, ED_BASE = 64'h0_5000_0000;

byte unsigned mem [longint];

// graph
byte  gchar [$];          // linear characters
int   nd_len [$], nd_start [$];
int   nd_edges [$][$];    // destination node IDs
bit   nd_ref [$];
int   ref_pos [$];        // linear position of the i-th reference-path base
byte  ref_seq [$];        // reference path bases
int   ref_node [$], ref_off [$];
int   snp_nodes [$];      // alt node IDs (one base)
int   long_ins_node;
int   rep_ref_start;      // reference-path index of the first repeat copy

function automatic void mem_w32(longint a, int unsigned v);
  for (int i = 0; i < 4; i++) mem[a + i] = byte'(v >> (8 * i));
endfunction
function automatic void mem_w16(longint a, int unsigned v);
  for (int i = 0; i < 2; i++) mem[a + i] = byte'(v >> (8 * i));
endfunction
function automatic logic [127:0] mem_r128(longint a);
  logic [127:0] v;
  for (int i = 0; i < 16; i++) v[8*i +: 8] = mem.exists(a + i) ? mem[a + i] : 8'h00;
  return v;
endfunction

function automatic void add_node(ref byte seq[$], input bit is_ref);
  int none [$];
  nd_start.push_back(gchar.size());
  nd_len.push_back(seq.size());
  nd_ref.push_back(is_ref);
  nd_edges.push_back(none);
  foreach (seq[i]) gchar.push_back(seq[i]);
endfunction

function automatic void build_graph(int ref_nodes, int repeats);
  byte rep [$];
  byte seq [$];
  int  rep_at;
  for (int i = 0; i < 40; i++) rep.push_back(byte'($urandom_range(0, 3)));
  rep_at = ref_nodes / 4;
  for (int nidx = 0; nidx < ref_nodes; nidx++) begin
    int id, len;
    seq.delete();
    len = $urandom_range(20, 60);
    if (nidx >= rep_at && nidx < rep_at + repeats) begin
      if (nidx == rep_at) rep_ref_start = ref_seq.size();
      seq = rep;
    end else
      for (int i = 0; i < len; i++) seq.push_back(byte'($urandom_range(0, 3)));
    id = nd_len.size();
    if (id > 0) nd_edges[id - 1].push_back(id);         // from previous ref node or alt
    // previous reference node also links here when an alt node sits between
    if (id >= 2 && !nd_ref[id - 1]) nd_edges[id - 2].push_back(id);
    add_node(seq, 1);
    foreach (seq[i]) begin
      ref_pos.push_back(nd_start[id] + i);
      ref_seq.push_back(seq[i]);
      ref_node.push_back(id);
      ref_off.push_back(i);
    end
    if (nidx < ref_nodes - 1 && (nidx % 7 == 3)) begin
      seq.delete();
      seq.push_back(byte'((gchar[gchar.size() - 1] + 1) % 4));
      snp_nodes.push_back(nd_len.size());
      nd_edges[id].push_back(nd_len.size());
      add_node(seq, 0);
    end else if (nidx == ref_nodes / 2) begin
      seq.delete();
      for (int i = 0; i < 14; i++) seq.push_back(byte'($urandom_range(0, 3)));
      long_ins_node = nd_len.size();
      nd_edges[id].push_back(nd_len.size());
      add_node(seq, 0);
    end
  end
  // tables
  begin
    int eidx;
    eidx = 0;
    for (int id = 0; id < nd_len.size(); id++) begin
      mem_w32(ND_BASE + 32 * id + 0, nd_len[id]);
      mem_w32(ND_BASE + 32 * id + 4, nd_start[id]);
      mem_w32(ND_BASE + 32 * id + 8, nd_edges[id].size());
      mem_w32(ND_BASE + 32 * id + 12, eidx);
      foreach (nd_edges[id][e]) begin
        mem_w32(ED_BASE + 4 * eidx, nd_edges[id][e]);
        eidx++;
      end
    end
    for (int q = 0; q < gchar.size(); q++) begin
      longint a;
      a = CH_BASE + 16 * (q / 64) + (q % 64) / 4;
      if (!mem.exists(a)) mem[a] = 0;
      mem[a] = mem[a] | byte'(gchar[q] << (2 * (q % 4)));
    end
  end
endfunction

// reference minimizers of a sequence: positions (start of the k-mer)
function automatic void minimizers(ref byte s[$], ref int pos[$], ref int unsigned val[$]);
  int unsigned km [$];
  int last;
  pos.delete(); val.delete();
  for (int i = 0; i + ENV_K <= s.size(); i++) begin
    int unsigned v;
    v = 0;
    for (int j = 0; j < ENV_K; j++) v = (v << 2) | s[i + j];
    km.push_back(v);
  end
  last = -1;
  for (int w = 0; w + ENV_WIN <= km.size(); w++) begin
    int best;
    best = w;
    for (int j = w + 1; j < w + ENV_WIN; j++) if (km[j] < km[best]) best = j;
    if (best != last) begin
      pos.push_back(best); val.push_back(km[best]);
      last = best;
    end
  end
endfunction

// index of the reference path
int unsigned idx_val [$];
int idx_locs [$][$];
function automatic void build_index();
  int pos [$];
  int unsigned val [$];
  int bucket_first [int];
  int bucket_cnt [int];
  int l3;
  minimizers(ref_seq, pos, val);
  foreach (pos[i]) begin
    int f [$];
    int none [$];
    f = idx_val.find_first_index(x) with (x == val[i]);
    if (f.size() == 0) begin
      idx_val.push_back(val[i]);
      idx_locs.push_back(none);
      f.push_back(idx_val.size() - 1);
    end
    idx_locs[f[0]].push_back(pos[i]);
  end
  // sort minimizer entries by bucket so that a bucket's entries are adjacent
  begin
    int order [$];
    int l2;
    for (int i = 0; i < idx_val.size(); i++) order.push_back(i);
    order.sort(x) with (idx_val[x] & 32'hFFFFFF);
    l2 = 0; l3 = 0;
    foreach (order[oi]) begin
      int i, b;
      i = order[oi];
      b = int'(idx_val[i] & 32'hFFFFFF);
      if (!bucket_cnt.exists(b)) begin bucket_first[b] = l2; bucket_cnt[b] = 0; end
      bucket_cnt[b]++;
      mem_w32(L2_BASE + 12 * l2 + 0, idx_val[i]);
      mem_w16(L2_BASE + 12 * l2 + 4, idx_locs[i].size());
      mem_w32(L2_BASE + 12 * l2 + 8, l3);
      foreach (idx_locs[i][j]) begin
        mem_w32(L3_BASE + 8 * l3 + 0, ref_node[idx_locs[i][j]]);
        mem_w32(L3_BASE + 8 * l3 + 4, ref_off[idx_locs[i][j]]);
        l3++;
      end
      l2++;
    end
    foreach (bucket_cnt[b]) mem_w32(L1_BASE + 4 * b, (bucket_first[b] << 6) | bucket_cnt[b]);
  end
endfunction

function automatic cfg_t env_cfg(int thr, int k);
  cfg_t c;
  c = '0;
  c.l1_base = MEM_AW'(L1_BASE); c.l2_base = MEM_AW'(L2_BASE); c.l3_base = MEM_AW'(L3_BASE);
  c.node_base = MEM_AW'(ND_BASE); c.char_base = MEM_AW'(CH_BASE); c.edge_base = MEM_AW'(ED_BASE);
  c.ref_len = 32'(gchar.size());
  c.freq_thr = 16'(thr);
  c.err_q8 = 8'd26;     // 10 %
  c.edit_k = 7'(k);
  return c;
endfunction

// a read: reference path from start, with errors, optionally through a SNP
function automatic void make_read(ref byte r[$], input int start, input int len,
                                  input int nerr, output int made);
  r.delete(); made = 0;
  for (int i = start; i < start + len && i < ref_seq.size(); i++) begin
    if (nerr > made && $urandom_range(0, len - 1) < 2 * nerr && i > start + 20) begin
      r.push_back(byte'((ref_seq[i] + 1) % 4));
      made++;
    end else r.push_back(ref_seq[i]);
  end
endfunction
