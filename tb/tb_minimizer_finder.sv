// tb_minimizer_finder: self-checking testbench for the minimizer finder.
//
// Serves the read scratchpad port (one-cycle latency) and plays the
// minimizer scratchpad: accepts writes while ready, collects each committed
// bank, and withholds ready at random (and for long stretches) to make the
// finder stall. The reference minimizers are computed in the testbench from
// the definition (every window of W consecutive k-mers, smallest k-mer in
// 2-bit lexicographic order, leftmost on ties, each position reported once)
// and compared entry by entry: k-mer, start a and end b = a + K - 1.
// Reads: random ones of various lengths, one shorter than K + W - 1 (no
// minimizer), and a periodic read with more minimizers than a bank holds,
// which must be split into a full bank plus a final bank (batching).
// Also checked: the last commit of a read carries meta[0] = 1 and done
// pulses once per read.
module tb_minimizer_finder;
  import segram_pkg::*;
  localparam int K = 15, W = 10, RD_DEPTH = 625, MZ_DEPTH = 2050;
  localparam int RAW = $clog2(RD_DEPTH), MAW = $clog2(MZ_DEPTH), MCW = $clog2(MZ_DEPTH + 1);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic            start = 0, busy, done;
  logic [15:0]     read_len = '0;
  logic [RAW-1:0]  rd_addr;
  logic [31:0]     rd_data = '0;
  logic            mz_wr_ready = 0, mz_wr_en, mz_wr_commit;
  logic [MAW-1:0]  mz_wr_addr;
  minimizer_t      mz_wr_data;
  logic [MCW-1:0]  mz_wr_count;
  logic [15:0]     mz_wr_meta;

  minimizer_finder #(.K(K), .W(W), .RD_DEPTH(RD_DEPTH), .MZ_DEPTH(MZ_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #4000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  logic [31:0] rmem [RD_DEPTH];
  always_ff @(posedge clk) rd_data <= rmem[rd_addr];

  // scratchpad model
  minimizer_t bank [MZ_DEPTH];
  minimizer_t got [$];
  int commits = 0, last_commits = 0, full_commits = 0, dones = 0, stall_cycles = 0;
  bit read_closed = 0;
  int hold = 0;
  always @(posedge clk) if (rst_n) begin
    if (mz_wr_en) begin
      check(mz_wr_ready, "write only when ready");
      bank[mz_wr_addr] = mz_wr_data;
    end
    if (mz_wr_commit) begin
      for (int i = 0; i < int'(mz_wr_count); i++) got.push_back(bank[i]);
      commits++;
      if (mz_wr_meta[0]) begin last_commits++; read_closed = 1; end
      else begin
        full_commits++;
        check(int'(mz_wr_count) == MZ_DEPTH, "batch commits a full bank");
      end
      hold = $urandom_range(0, 1) ? 200 : 0;    // consumer busy with the bank
    end
    if (done) dones++;
  end
  always @(negedge clk) begin
    if (hold > 0) begin hold--; mz_wr_ready <= 0; end
    else mz_wr_ready <= ($urandom_range(0, 7) != 0);
    if (!mz_wr_ready && busy) stall_cycles++;
  end

  byte seq [$];
  task automatic run_read(input int len);
    int pos [$];
    int unsigned val [$];
    int unsigned km [$];
    int last, c0;
    got.delete();
    read_closed = 0;
    for (int w = 0; w < (len + 15) / 16; w++) begin
      logic [31:0] v;
      v = '0;
      for (int j = 0; j < 16; j++) if (w * 16 + j < len) v[2*j +: 2] = seq[w*16+j][1:0];
      rmem[w] = v;
    end
    // reference
    for (int i = 0; i + K <= len; i++) begin
      int unsigned v;
      v = 0;
      for (int j = 0; j < K; j++) v = (v << 2) | seq[i + j];
      km.push_back(v);
    end
    last = -1;
    for (int s = 0; s + W <= km.size(); s++) begin
      int best;
      best = s;
      for (int j = s + 1; j < s + W; j++) if (km[j] < km[best]) best = j;
      if (best != last) begin pos.push_back(best); val.push_back(km[best]); last = best; end
    end
    c0 = dones;
    @(negedge clk);
    read_len = 16'(len); start = 1;
    @(negedge clk);
    start = 0;
    while (dones == c0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(read_closed, "final commit with last flag");
    check(dones == c0 + 1, "one done per read");
    check(got.size() == pos.size(), $sformatf("len %0d: %0d minimizers, expected %0d", len, got.size(), pos.size()));
    for (int i = 0; i < pos.size() && i < got.size(); i++) begin
      check(got[i].kmer == 32'(val[i]) && int'(got[i].a) == pos[i] && int'(got[i].b) == pos[i] + K - 1,
            $sformatf("len %0d minimizer %0d: got %0h@%0d want %0h@%0d", len, i, got[i].kmer, got[i].a, val[i], pos[i]));
    end
  endtask

  initial begin
    for (int i = 0; i < RD_DEPTH; i++) rmem[i] = '0;
    for (int i = 0; i < MZ_DEPTH; i++) bank[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 6; t++) begin
      int len;
      len = (t == 0) ? 20 : (t == 5) ? 10000 : $urandom_range(24, 2000);
      seq.delete();
      for (int i = 0; i < len; i++) seq.push_back(byte'($urandom_range(0, 3)));
      run_read(len);
    end
    seq.delete();
    for (int i = 0; i < 9000; i++) seq.push_back(byte'(i % 4));
    run_read(9000);
    check(full_commits >= 1, "batching happened");
    check(stall_cycles > 0, "finder stalled on a full scratchpad");
    $display("commits %0d full %0d stall cycles %0d", commits, full_commits, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
