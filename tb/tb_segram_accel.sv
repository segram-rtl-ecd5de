// tb_segram_accel: end-to-end testbench of one SeGraM accelerator
// (MinSeed + BitAlign) on a small genome graph held in a memory model.
//
// The environment (segram_tb_env.svh) builds the graph and its minimizer
// index; the host thread streams reads, the channel model answers memory
// reads after a fixed latency and randomly withholds ready. Checks:
//   * every read sampled from the reference yields at least one alignment
//     that does not fail, starts at or before the read's true position and
//     whose distance is at most the injected errors plus a small slack;
//   * a read that takes a one-base insertion branch of the graph aligns
//     with distance 0 (needs a hop);
//   * a read from the repeated segment has its minimizers dropped by the
//     frequency filter;
//   * a periodic read with more minimizers than one scratchpad bank makes
//     the minimizer finder batch;
//   * every read is closed by exactly one read_end; host backpressure and
//     channel backpressure both occur.
module tb_segram_accel;
  import segram_pkg::*;
  localparam int RD_DEPTH = 625;
  localparam int RAW = $clog2(RD_DEPTH);
  localparam int LAT = 20;

  `include "segram_tb_env.svh"

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t              cfg;
  logic              host_ready, host_wr_en = 0, host_commit = 0;
  logic [RAW-1:0]    host_wr_addr = '0;
  logic [31:0]       host_wr_data = '0;
  logic [15:0]       host_len = '0;
  logic              ch_req_valid, ch_req_ready = 0, ch_resp_valid = 0;
  logic [MEM_AW-1:0] ch_req_addr;
  logic [MEM_DW-1:0] ch_resp_data = '0;
  logic              op_valid, res_valid, res_fail;
  edit_op_e          op;
  logic [31:0]       res_x;
  logic [15:0]       res_dist;
  logic [5:0]        events;

  segram_accel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // channel model: fixed latency, in order, random ready
  longint      q_addr [$];
  longint      q_due [$];
  longint      cyc = 0;
  int          ch_stall = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ch_req_valid && ch_req_ready) begin
      q_addr.push_back(longint'(ch_req_addr));
      q_due.push_back(cyc + LAT);
    end
    if (ch_req_valid && !ch_req_ready) ch_stall++;
  end
  always @(negedge clk) begin
    ch_req_ready <= ($urandom_range(0, 9) < 8);
    ch_resp_valid <= 0;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      ch_resp_valid <= 1;
      ch_resp_data  <= mem_r128(q_addr[0]);
      void'(q_addr.pop_front());
      void'(q_due.pop_front());
    end
  end

  // results per read
  int n_reads = 0, read_done = 0;
  int best_dist [int];
  int best_x [int];
  int n_res [int];
  int n_ops = 0;
  int ev_kept = 0, ev_drop = 0, ev_batch = 0, ev_hop = 0, ev_win = 0;
  always @(posedge clk) if (rst_n) begin
    if (op_valid) n_ops++;
    if (res_valid) begin
      n_res[read_done] = n_res.exists(read_done) ? n_res[read_done] + 1 : 1;
      if (!res_fail && (!best_dist.exists(read_done) || int'(res_dist) < best_dist[read_done])) begin
        best_dist[read_done] = int'(res_dist);
        best_x[read_done] = int'(res_x);
      end
    end
    if (events[1]) ev_drop++;
    if (events[2]) ev_kept++;
    if (events[3]) ev_hop++;
    if (events[4]) ev_batch++;
    if (events[5]) ev_win++;
    if (events[0]) read_done++;
  end

  int host_stall = 0;
  int exp_mz = 0, exp_drop = 0, exp_batch = 0, exp_freq = 0;
  int thr = 2;
  task automatic send(ref byte r[$]);
    int words;
    int mp [$];
    int unsigned mv [$];
    minimizers(r, mp, mv);
    exp_mz += mp.size();
    exp_batch += mp.size() / 2050;
    foreach (mv[i]) begin
      int f [$];
      f = idx_val.find_first_index(x) with (x == mv[i]);
      if (f.size() == 0) exp_drop++;
      else if (idx_locs[f[0]].size() > thr) begin exp_drop++; exp_freq++; end
    end
    words = (r.size() + 15) / 16;
    while (!host_ready) begin host_stall++; @(negedge clk); end
    for (int w = 0; w < words; w++) begin
      logic [31:0] v;
      v = '0;
      for (int j = 0; j < 16; j++) if (w * 16 + j < r.size()) v[2*j +: 2] = r[w*16+j][1:0];
      host_wr_en = 1; host_wr_addr = RAW'(w); host_wr_data = v;
      @(negedge clk);
    end
    host_wr_en = 0;
    host_commit = 1; host_len = 16'(r.size());
    @(negedge clk);
    host_commit = 0;
    n_reads++;
  endtask

  int r_kind [int];     // 0 reference read, 1 insertion-branch read, 2 repeat, 3 periodic
  int r_start [int], r_err [int];

  initial begin
    byte r [$];
    int made, s0;
    build_graph(120, 4);
    build_index();
    cfg = env_cfg(thr, 30);
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // reference reads, short and long
    for (int t = 0; t < 6; t++) begin
      int len, e;
      len = (t % 2 == 0) ? 150 : 700;
      e = (t % 2 == 0) ? 1 : 20;
      do s0 = $urandom_range(0, ref_seq.size() - len - 1);
      while (ref_node[s0] < long_ins_node && ref_node[s0 + len - 1] > long_ins_node);
      make_read(r, s0, len, e, made);
      r_kind[n_reads] = 0; r_start[n_reads] = s0; r_err[n_reads] = made;
      send(r);
    end
    // read through a one-base insertion branch
    begin
      int alt, nb, p;
      alt = snp_nodes[2];
      r.delete();
      p = nd_start[alt - 1];
      for (int i = 0; i < 60 && p + i < nd_start[alt]; i++) ;
      // 60 bases before the branch, the branch base, 60 bases after
      for (int i = nd_start[alt] - 60; i < nd_start[alt]; i++) r.push_back(gchar[i]);
      r.push_back(gchar[nd_start[alt]]);
      nb = nd_start[alt] + 1;
      for (int i = 0; i < 60; i++) r.push_back(gchar[nb + i]);
      r_kind[n_reads] = 1; r_start[n_reads] = nd_start[alt] - 60; r_err[n_reads] = 0;
      send(r);
    end
    // read from the repeat
    begin
      int rp;
      rp = rep_ref_start + 10;
      r.delete();
      for (int i = 0; i < 100; i++) r.push_back(ref_seq[rp + i]);
      r_kind[n_reads] = 2; r_start[n_reads] = rp; r_err[n_reads] = 0;
      send(r);
    end
    // periodic read: more minimizers than one minimizer bank
    r.delete();
    for (int i = 0; i < 9000; i++) r.push_back(byte'(i % 4));
    r_kind[n_reads] = 3; r_start[n_reads] = 0; r_err[n_reads] = 0;
    send(r);
    // a read across the long insertion's bypass edge (distance not checked)
    begin
      int sp;
      sp = 0;
      for (int i = 0; i < ref_node.size(); i++) if (ref_node[i] == long_ins_node + 1) begin sp = i; break; end
      make_read(r, sp - 75, 150, 0, made);
      r_kind[n_reads] = 4; r_start[n_reads] = sp - 75; r_err[n_reads] = 0;
      send(r);
    end
    // one more reference read after it
    do s0 = $urandom_range(0, ref_seq.size() - 200);
    while (ref_node[s0] < long_ins_node && ref_node[s0 + 150] > long_ins_node);
    make_read(r, s0, 150, 1, made);
    r_kind[n_reads] = 0; r_start[n_reads] = s0; r_err[n_reads] = made;
    send(r);

    while (read_done < n_reads) @(negedge clk);
    repeat (50) @(negedge clk);

    for (int i = 0; i < n_reads; i++) begin
      int kind;
      kind = r_kind[i];
      case (kind)
        0: begin
          check(best_dist.exists(i), $sformatf("read %0d aligned", i));
          if (best_dist.exists(i)) begin
            check(best_dist[i] <= r_err[i] + 3,
                  $sformatf("read %0d dist %0d injected %0d", i, best_dist[i], r_err[i]));
            check(best_x[i] <= ref_pos[r_start[i]],
                  $sformatf("read %0d x %0d true %0d", i, best_x[i], ref_pos[r_start[i]]));
          end
        end
        1: check(best_dist.exists(i) && best_dist[i] == 0,
                 $sformatf("insertion-branch read dist %0d", best_dist.exists(i) ? best_dist[i] : -1));
        default: ;
      endcase
    end
    check(read_done == n_reads, "one read_end per read");
    check(host_stall > 0, "host backpressure seen");
    check(ch_stall > 0, "channel backpressure seen");
    check(ev_kept + ev_drop == exp_mz, $sformatf("minimizers %0d expected %0d", ev_kept + ev_drop, exp_mz));
    check(ev_drop == exp_drop, $sformatf("dropped %0d expected %0d", ev_drop, exp_drop));
    check(ev_batch == exp_batch && exp_batch > 0, $sformatf("batches %0d expected %0d", ev_batch, exp_batch));
    check(exp_freq > 0, "frequent minimizers were looked up");
    check(ev_hop > 0, "a long edge was dropped by the hop limit");
    check(ev_win > 0, "windows seen");
    $display("reads %0d kept %0d dropped %0d batches %0d hopdrops %0d windows %0d ops %0d host_stall %0d ch_stall %0d cycles %0d",
             n_reads, ev_kept, ev_drop, ev_batch, ev_hop, ev_win, n_ops, host_stall, ch_stall, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
