// tb_bitalign: self-checking testbench for the BitAlign accelerator.
//
// Plays MinSeed: serves the read scratchpad port (one-cycle read latency),
// writes the linearized subgraph (bases plus HopBits) into the input
// scratchpad, pulses start and collects the edit-operation stream.
// Checks, against an independent dynamic-programming edit distance
// (anchored at the text start, free at its end) and by replaying the ops:
//   * single-window reads: distance equals the DP optimum;
//   * every alignment: ops consume exactly the read, MATCH ops really match,
//     the number of non-MATCH ops equals the reported distance;
//   * multi-window reads (several hundred bases): distance is at least the
//     DP optimum and at most the number of injected edits plus slack;
//   * a bubble in the graph: the read follows the second branch through a
//     hop and aligns with distance 0 (the linear text would not);
//   * unrelated text with a small threshold raises aln_fail;
//   * cycles per window stay below a fixed budget.
module tb_bitalign;
  import segram_pkg::*;
  localparam int NPE = 64, W = 128, TXT_DEPTH = 11000, PM_WORDS = 625;
  localparam int TAW = $clog2(TXT_DEPTH), TCW = $clog2(TXT_DEPTH + 1), PAW = $clog2(PM_WORDS);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              txt_wr_en = 0;
  logic [TAW-1:0]    txt_wr_addr = '0;
  txt_entry_t        txt_wr_data = '0;
  logic              rs_avail = 0;
  logic [15:0]       rs_len = '0;
  logic [PAW-1:0]    rs_addr;
  logic [31:0]       rs_data = '0;
  logic              pm_gen_done, read_ready, read_end = 0, start = 0, busy;
  logic [15:0]       read_len;
  logic [TCW-1:0]    n_txt = '0;
  logic [6:0]        edit_k = '0;
  logic              op_valid, aln_done, aln_fail, ev_window;
  edit_op_e          op;
  logic [15:0]       aln_dist;

  bitalign #(.NPE(NPE), .W(W), .TW(W), .O(48), .TXT_DEPTH(TXT_DEPTH), .PM_WORDS(PM_WORDS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #4000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $display("watchdog timeout");
    $finish;
  end

  // read scratchpad model
  logic [31:0] rmem [PM_WORDS];
  always_ff @(posedge clk) rs_data <= rmem[rs_addr];

  byte pat [4096];
  byte txt [12000];
  logic [11:0] hops [12000];
  int m, n;

  // op capture
  edit_op_e ops [$];
  always @(posedge clk) if (op_valid) ops.push_back(op);
  int windows = 0;
  always @(posedge clk) if (ev_window) windows++;

  int dp [0:1100][0:1200];
  function automatic int ref_dist();
    int best;
    for (int j = 0; j <= n; j++) dp[0][j] = 0 + 0 * j; // text start anchored: dp[0][j] = j
    for (int j = 0; j <= n; j++) dp[0][j] = j;
    for (int i = 1; i <= m; i++) begin
      dp[i][0] = i;
      for (int j = 1; j <= n; j++) begin
        int v;
        v = dp[i-1][j-1] + ((pat[i-1] == txt[j-1]) ? 0 : 1);
        if (dp[i-1][j] + 1 < v) v = dp[i-1][j] + 1;
        if (dp[i][j-1] + 1 < v) v = dp[i][j-1] + 1;
        dp[i][j] = v;
      end
    end
    best = 1 << 30;
    for (int j = 0; j <= n; j++) if (dp[m][j] < best) best = dp[m][j];
    return best;
  endfunction

  // replay ops along the linear text (or a given path of text indices)
  int path [12000];
  int plen;
  function automatic bit replay(input int edist);
    int pi, ti, ed;
    pi = 0; ti = 0; ed = 0;
    foreach (ops[q]) begin
      case (ops[q])
        OP_MATCH: begin
          if (pi >= m || ti >= plen) return 0;
          if (pat[pi] != txt[path[ti]]) return 0;
          pi++; ti++;
        end
        OP_SUB: begin pi++; ti++; ed++; end
        OP_INS: begin pi++; ed++; end
        OP_DEL: begin ti++; ed++; end
      endcase
    end
    return (pi == m) && (ed == edist) && (ti <= plen);
  endfunction

  task automatic run(input int k, output int edist, output bit fail, output int cyc);
    int t0;
    ops.delete();
    windows = 0;
    for (int w = 0; w < (m + 15) / 16; w++) begin
      logic [31:0] v;
      v = '0;
      for (int j = 0; j < 16; j++) if (w * 16 + j < m) v[2*j +: 2] = pat[w*16+j][1:0];
      rmem[w] = v;
    end
    @(negedge clk);
    rs_len = 16'(m); rs_avail = 1;
    while (!pm_gen_done) @(negedge clk);
    rs_avail = 0;
    while (!read_ready) @(negedge clk);
    check(read_len == 16'(m), "read_len");
    for (int i = 0; i < n; i++) begin
      txt_wr_en = 1; txt_wr_addr = TAW'(i);
      txt_wr_data = '{hop: hops[i], base: base_t'(txt[i])};
      @(negedge clk);
    end
    txt_wr_en = 0;
    n_txt = TCW'(n); edit_k = 7'(k); start = 1;
    t0 = $time;
    @(negedge clk); start = 0;
    while (!aln_done) @(negedge clk);
    cyc = int'(($time - t0) / 2);
    edist = int'(aln_dist); fail = aln_fail;
    repeat (3) @(negedge clk);
    read_end = 1; @(negedge clk); read_end = 0;
    repeat (2) @(negedge clk);
  endtask

  function automatic byte rb(); return byte'($urandom_range(0, 3)); endfunction

  // build text from pattern with e random edits + tail, linear hops
  int injected;
  task automatic mutate(input int e, input int tail);
    int i;
    n = 0; injected = 0;
    i = 0;
    while (i < m) begin
      if (injected < e && $urandom_range(0, m - 1) < e * 2 && i > 0) begin
        case ($urandom_range(0, 2))
          0: begin txt[n++] = byte'((pat[i] + 1) % 4); i++; end
          1: begin i++; end
          default: begin txt[n++] = rb(); end
        endcase
        injected++;
      end else txt[n++] = pat[i++];
    end
    for (int t = 0; t < tail; t++) txt[n++] = rb();
    for (int t = 0; t < n; t++) hops[t] = (t == n - 1) ? 12'd0 : 12'd1;
    for (int t = 0; t < n; t++) path[t] = t;
    plen = n;
  endtask

  initial begin
    int edist, cyc, r, wtot, ctot;
    bit fail;
    for (int a = 0; a < PM_WORDS; a++) rmem[a] = '0;
    for (int a = 0; a < 12000; a++) begin txt[a] = 0; hops[a] = '0; end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    wtot = 0; ctot = 0;

    // 1. single window, exact distance
    for (int t = 0; t < 12; t++) begin
      m = $urandom_range(30, 120);
      for (int i = 0; i < m; i++) pat[i] = rb();
      mutate($urandom_range(0, 8), 40);
      r = ref_dist();
      run(30, edist, fail, cyc);
      check(!fail, $sformatf("t%0d unexpected fail", t));
      check(edist == r, $sformatf("t%0d edist %0d ref %0d (m=%0d n=%0d)", t, edist, r, m, n));
      check(replay(edist), $sformatf("t%0d op replay", t));
    end

    // 2. multi-window reads
    for (int t = 0; t < 4; t++) begin
      m = $urandom_range(400, 1000);
      for (int i = 0; i < m; i++) pat[i] = rb();
      mutate(m / 40, 60);
      r = ref_dist();
      run(40, edist, fail, cyc);
      check(!fail, $sformatf("long%0d unexpected fail", t));
      check(edist >= r && edist <= injected + 4,
            $sformatf("long%0d edist %0d ref %0d injected %0d", t, edist, r, injected));
      check(replay(edist), $sformatf("long%0d op replay", t));
      check(windows >= (m - 1) / (W - 48), $sformatf("long%0d windows %0d", t, windows));
      wtot += windows; ctot += cyc;
    end
    $display("multi-window: %0d windows in %0d cycles (%0d cycles/window)", wtot, ctot, ctot / wtot);
    check(ctot / wtot <= 700, "cycles per window within budget");

    // 3. bubble: X + alt1 + alt2 + Y, read = X + alt2 + Y
    begin
      int lx, l1, l2, ly;
      lx = 30; l1 = 5; l2 = 4; ly = 40;
      n = lx + l1 + l2 + ly;
      for (int i = 0; i < n; i++) txt[i] = rb();
      for (int i = 0; i < l2; i++) txt[lx + l1 + i] = byte'((txt[lx + i] + 2) % 4);
      for (int i = 0; i < n; i++) hops[i] = 12'd1;
      hops[n-1] = 12'd0;
      hops[lx-1] = 12'b1 | (12'b1 << l1);           // to alt1 and alt2
      hops[lx+l1-1] = 12'b1 << l2;                   // alt1 end jumps over alt2
      plen = 0;
      for (int i = 0; i < lx; i++) path[plen++] = i;
      for (int i = 0; i < l2; i++) path[plen++] = lx + l1 + i;
      for (int i = 0; i < ly; i++) path[plen++] = lx + l1 + l2 + i;
      m = lx + l2 + ly - 10;
      for (int i = 0; i < m; i++) pat[i] = txt[path[i]];
      r = ref_dist();
      check(r > 0, "bubble: linear text needs edits");
      run(20, edist, fail, cyc);
      $display("bubble: linear-text distance %0d, graph distance %0d", r, edist);
      check(!fail && edist == 0, $sformatf("bubble edist %0d fail %0d", edist, fail));
      check(replay(edist), "bubble op replay along the second branch");
    end

    // 4. unrelated text, small threshold -> fail
    m = 100;
    for (int i = 0; i < m; i++) pat[i] = rb();
    n = 120;
    for (int i = 0; i < n; i++) begin txt[i] = rb(); hops[i] = (i == n - 1) ? 12'd0 : 12'd1; end
    r = ref_dist();
    run(4, edist, fail, cyc);
    check(fail == (r > 4), $sformatf("threshold: fail %0d ref %0d", fail, r));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
