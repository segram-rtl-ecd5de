// tb_segram_top: end-to-end testbench of the whole SeGraM system at its
// default size: four modules of eight accelerators, each accelerator with
// its own memory channel and host stream, every parameter at its default.
//
// All channels serve the same graph and index (segram_tb_env.svh), as the
// replicated stacks would; each channel model answers after a fixed latency
// and withholds ready at random. Every accelerator maps one reference read
// (short or long) sampled from the graph; accelerator 0 additionally maps
// a read through a one-base insertion branch, a read across the long
// insertion's bypass edge and a periodic read with more minimizers than one
// scratchpad bank; accelerator 1 maps a read from the repeated segment.
// Checks: each reference read aligns within its injected errors plus a
// slack and at or after the region start; the insertion-branch read aligns
// with distance 0; per accelerator, the minimizers filtered and dropped and
// the minimizer batches equal the environment's own counts; every read gets
// one read_end; in every result the number of non-match edit operations
// equals the reported distance. Mechanism counters (host backpressure, channel
// backpressure, minimizer drop, minimizer batching, hop-limit edge drop,
// alignment windows) must each be non-zero.
module tb_segram_top;
  import segram_pkg::*;
  localparam int NSTACK = 4, NACC = 8, N = NSTACK * NACC;
  localparam int RD_DEPTH = 625;
  localparam int RAW = $clog2(RD_DEPTH);
  localparam int LAT = 20;

  `include "segram_tb_env.svh"

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t       [N-1:0]            cfg;
  logic       [N-1:0]            host_ready;
  logic       [N-1:0]            host_wr_en = '0;
  logic       [N-1:0][RAW-1:0]   host_wr_addr = '0;
  logic       [N-1:0][31:0]      host_wr_data = '0;
  logic       [N-1:0]            host_commit = '0;
  logic       [N-1:0][15:0]      host_len = '0;
  logic       [N-1:0]            ch_req_valid;
  logic       [N-1:0]            ch_req_ready = '0;
  logic       [N-1:0][MEM_AW-1:0] ch_req_addr;
  logic       [N-1:0]            ch_resp_valid = '0;
  logic       [N-1:0][MEM_DW-1:0] ch_resp_data = '0;
  logic       [N-1:0]            op_valid;
  logic       [N-1:0][1:0]       op;
  logic       [N-1:0]            res_valid;
  logic       [N-1:0][31:0]      res_x;
  logic       [N-1:0][15:0]      res_dist;
  logic       [N-1:0]            res_fail;
  logic       [N-1:0][5:0]       events;

  segram_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #300000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- channel models and result collection -------------------
  int ch_stall [N];
  int ev_kept [N], ev_drop [N], ev_batch [N], ev_hop [N], ev_win [N];
  int read_done [N];
  int best_dist [N][int];
  int n_ops [N];
  int n_edit [N], n_res_checked [N], n_res_bad [N];

  for (genvar a = 0; a < N; a++) begin : g_ch
    longint q_addr [$];
    longint q_due [$];
    always @(posedge clk) begin
      if (ch_req_valid[a] && ch_req_ready[a]) begin
        q_addr.push_back(longint'(ch_req_addr[a]));
        q_due.push_back(cyc + LAT);
      end
      if (ch_req_valid[a] && !ch_req_ready[a]) ch_stall[a]++;
      if (rst_n) begin
        if (op_valid[a]) n_ops[a]++;
        if (op_valid[a] && op[a] != 2'(OP_MATCH)) n_edit[a]++;
        if (res_valid[a]) begin
          if (!res_fail[a]) begin
            n_res_checked[a]++;
            if (n_edit[a] != int'(res_dist[a])) n_res_bad[a]++;
          end
          n_edit[a] = 0;
        end
        if (res_valid[a] && !res_fail[a] &&
            (!best_dist[a].exists(read_done[a]) || int'(res_dist[a]) < best_dist[a][read_done[a]]))
          best_dist[a][read_done[a]] = int'(res_dist[a]);
        if (events[a][1]) ev_drop[a]++;
        if (events[a][2]) ev_kept[a]++;
        if (events[a][3]) ev_hop[a]++;
        if (events[a][4]) ev_batch[a]++;
        if (events[a][5]) ev_win[a]++;
        if (events[a][0]) read_done[a]++;
      end
    end
    always @(negedge clk) begin
      ch_req_ready[a] <= ($urandom_range(0, 9) < 8);
      ch_resp_valid[a] <= 1'b0;
      if (q_due.size() > 0 && q_due[0] <= cyc) begin
        ch_resp_valid[a] <= 1'b1;
        ch_resp_data[a]  <= mem_r128(q_addr[0]);
        void'(q_addr.pop_front());
        void'(q_due.pop_front());
      end
    end
  end

  // ---------------- host ----------------------------------------------------
  int thr = 2;
  int host_stall [N];
  int n_reads [N];
  int exp_mz [N], exp_drop [N], exp_batch [N], exp_freq [N];
  int r_kind [N][int], r_err [N][int];
  byte rq [N][$][$];        // reads queued per accelerator

  function automatic void account(int a, ref byte r[$]);
    int mp [$];
    int unsigned mv [$];
    minimizers(r, mp, mv);
    exp_mz[a] += mp.size();
    exp_batch[a] += mp.size() / 2050;
    foreach (mv[i]) begin
      int f [$];
      f = idx_val.find_first_index(x) with (x == mv[i]);
      if (f.size() == 0) exp_drop[a]++;
      else if (idx_locs[f[0]].size() > thr) begin exp_drop[a]++; exp_freq[a]++; end
    end
  endfunction

  function automatic void queue_read(int a, ref byte r[$], input int kind, input int err);
    account(a, r);
    r_kind[a][rq[a].size()] = kind;
    r_err[a][rq[a].size()] = err;
    rq[a].push_back(r);
  endfunction

  for (genvar a = 0; a < N; a++) begin : g_host
    initial begin
      @(posedge rst_n);
      repeat (4) @(negedge clk);
      for (int i = 0; i < rq[a].size(); i++) begin
        int words;
        words = (rq[a][i].size() + 15) / 16;
        while (!host_ready[a]) begin host_stall[a]++; @(negedge clk); end
        for (int w = 0; w < words; w++) begin
          logic [31:0] v;
          v = '0;
          for (int j = 0; j < 16; j++)
            if (w * 16 + j < rq[a][i].size()) v[2*j +: 2] = rq[a][i][w*16+j][1:0];
          host_wr_en[a] = 1'b1; host_wr_addr[a] = RAW'(w); host_wr_data[a] = v;
          @(negedge clk);
        end
        host_wr_en[a] = 1'b0;
        host_commit[a] = 1'b1; host_len[a] = 16'(rq[a][i].size());
        @(negedge clk);
        host_commit[a] = 1'b0;
        n_reads[a]++;
      end
    end
  end

  initial begin
    byte r [$];
    int made, s0, all_done;
    build_graph(120, 4);
    build_index();
    for (int a = 0; a < N; a++) cfg[a] = env_cfg(thr, 30);
    // one reference read per accelerator, short and long alternating
    for (int a = 0; a < N; a++) begin
      int len, e;
      len = (a % 4 == 3) ? 600 : 150;
      e = (len == 150) ? 1 : 15;
      do s0 = $urandom_range(0, ref_seq.size() - len - 1);
      while (ref_node[s0] < long_ins_node && ref_node[s0 + len - 1] > long_ins_node);
      make_read(r, s0, len, e, made);
      queue_read(a, r, 0, made);
    end
    // accelerator 0: insertion branch, long-edge crossing, periodic read
    begin
      int alt, sp;
      alt = snp_nodes[1];
      r.delete();
      for (int i = nd_start[alt] - 60; i < nd_start[alt] + 61; i++) r.push_back(gchar[i]);
      queue_read(0, r, 1, 0);
      sp = 0;
      for (int i = 0; i < ref_node.size(); i++) if (ref_node[i] == long_ins_node + 1) begin sp = i; break; end
      make_read(r, sp - 75, 150, 0, made);
      queue_read(0, r, 4, 0);
      r.delete();
      for (int i = 0; i < 9000; i++) r.push_back(byte'(i % 4));
      queue_read(0, r, 3, 0);
    end
    // accelerator 1: a read from the repeated segment
    begin
      int rp;
      rp = rep_ref_start + 10;
      r.delete();
      for (int i = 0; i < 100; i++) r.push_back(ref_seq[rp + i]);
      queue_read(1, r, 2, 0);
    end

    repeat (4) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all_done = 1;
      for (int a = 0; a < N; a++) if (read_done[a] < rq[a].size()) all_done = 0;
    end while (!all_done);
    repeat (50) @(negedge clk);

    begin
      int t_hs, t_cs, t_drop, t_batch, t_hop, t_win, t_kept;
      t_hs = 0; t_cs = 0; t_drop = 0; t_batch = 0; t_hop = 0; t_win = 0; t_kept = 0;
      for (int a = 0; a < N; a++) begin
        for (int i = 0; i < rq[a].size(); i++) begin
          int kind;
          kind = r_kind[a][i];
          if (kind == 0) begin
            check(best_dist[a].exists(i), $sformatf("acc %0d read %0d aligned", a, i));
            if (best_dist[a].exists(i))
              check(best_dist[a][i] <= r_err[a][i] + 3,
                    $sformatf("acc %0d read %0d dist %0d injected %0d", a, i, best_dist[a][i], r_err[a][i]));
          end else if (kind == 1)
            check(best_dist[a].exists(i) && best_dist[a][i] == 0, "insertion-branch read aligns exactly");
        end
        check(read_done[a] == rq[a].size(), $sformatf("acc %0d: one read_end per read", a));
        check(n_res_checked[a] > 0 && n_res_bad[a] == 0,
              $sformatf("acc %0d: edit ops agree with distance in %0d of %0d results", a,
                        n_res_checked[a] - n_res_bad[a], n_res_checked[a]));
        check(ev_kept[a] + ev_drop[a] == exp_mz[a],
              $sformatf("acc %0d minimizers %0d expected %0d", a, ev_kept[a] + ev_drop[a], exp_mz[a]));
        check(ev_drop[a] == exp_drop[a], $sformatf("acc %0d dropped %0d expected %0d", a, ev_drop[a], exp_drop[a]));
        check(ev_batch[a] == exp_batch[a], $sformatf("acc %0d batches %0d expected %0d", a, ev_batch[a], exp_batch[a]));
        t_hs += host_stall[a]; t_cs += ch_stall[a]; t_drop += ev_drop[a]; t_kept += ev_kept[a];
        t_batch += ev_batch[a]; t_hop += ev_hop[a]; t_win += ev_win[a];
      end
      $display("mechanisms: host_stall %0d channel_stall %0d kept %0d dropped %0d batches %0d hop_drops %0d windows %0d cycles %0d",
               t_hs, t_cs, t_kept, t_drop, t_batch, t_hop, t_win, cyc);
      check(t_hs > 0, "host backpressure happened");
      check(t_cs > 0, "channel backpressure happened");
      check(t_drop > 0, "minimizer drop happened");
      check(exp_freq[1] > 0, "frequent minimizers were looked up");
      check(t_batch > 0, "minimizer batching happened");
      check(t_hop > 0, "hop-limit edge drop happened");
      check(t_win > 0, "alignment windows happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
