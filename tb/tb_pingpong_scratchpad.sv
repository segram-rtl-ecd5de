// tb_pingpong_scratchpad: self-checking testbench for the double-buffered
// scratchpad (read-scratchpad configuration: 32-bit words, 625 deep, two
// read ports).
//
// A producer thread fills banks with random words and commits them with a
// count and metadata; a consumer thread waits for rd_avail, reads every
// word through both read ports (data one cycle after the address), checks
// it against the words the producer kept in a queue of banks, and releases.
// Checks the handshake too: wr_ready low while both banks are full, the
// producer filling one bank while the consumer reads the other, and the
// commits reaching the consumer in order.
module tb_pingpong_scratchpad;
  localparam int WIDTH = 32, DEPTH = 625, META_W = 16, NRD = 2;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic                      wr_ready, wr_en = 0, wr_commit = 0;
  logic [AW-1:0]             wr_addr = '0;
  logic [WIDTH-1:0]          wr_data = '0;
  logic [CW-1:0]             wr_count = '0;
  logic [META_W-1:0]         wr_meta = '0;
  logic                      rd_avail, rd_release = 0;
  logic [CW-1:0]             rd_count;
  logic [META_W-1:0]         rd_meta;
  logic [NRD-1:0][AW-1:0]    rd_addr = '0;
  logic [NRD-1:0][WIDTH-1:0] rd_data;

  pingpong_scratchpad #(.WIDTH(WIDTH), .DEPTH(DEPTH), .META_W(META_W), .NRD(NRD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  typedef logic [WIDTH-1:0] word_q_t [$];
  word_q_t banks [$];
  int metas [$];
  localparam int NBANKS = 8;
  int produced = 0, consumed = 0, both_full_seen = 0, overlap_seen = 0;

  // producer
  initial begin
    @(posedge rst_n);
    @(negedge clk);
    for (int bk = 0; bk < NBANKS; bk++) begin
      word_q_t w;
      int n;
      w.delete();
      n = (bk == 2) ? DEPTH : $urandom_range(1, 200);
      while (!wr_ready) begin
        if (rd_avail) both_full_seen++;
        @(negedge clk);
      end
      for (int i = 0; i < n; i++) begin
        w.push_back(WIDTH'($urandom));
        wr_en = 1; wr_addr = AW'(i); wr_data = w[i];
        if (rd_avail) overlap_seen++;
        @(negedge clk);
      end
      wr_en = 0;
      banks.push_back(w);
      metas.push_back(bk * 7 + 1);
      wr_commit = 1; wr_count = CW'(n); wr_meta = META_W'(bk * 7 + 1);
      @(negedge clk);
      wr_commit = 0;
      produced++;
    end
  end

  // consumer: slow, so that both banks fill up
  initial begin
    @(posedge rst_n);
    check(!rd_avail && wr_ready, "empty after reset");
    while (consumed < NBANKS) begin
      word_q_t w;
      @(negedge clk);
      if (!rd_avail) continue;
      check(banks.size() > 0, "commit seen by consumer");
      w = banks.pop_front();
      check(int'(rd_count) == w.size(), "rd_count");
      check(int'(rd_meta) == metas.pop_front(), "rd_meta");
      repeat (30) @(negedge clk);
      for (int i = 0; i < w.size(); i++) begin
        rd_addr[0] = AW'(i);
        rd_addr[1] = AW'(w.size() - 1 - i);
        @(negedge clk);
        check(rd_data[0] == w[i], $sformatf("bank %0d word %0d port 0", consumed, i));
        check(rd_data[1] == w[w.size() - 1 - i], $sformatf("bank %0d word %0d port 1", consumed, i));
      end
      rd_release = 1;
      @(negedge clk);
      rd_release = 0;
      consumed++;
    end
    check(produced == NBANKS, "all banks produced");
    check(both_full_seen > 0, "producer waited on two full banks");
    check(overlap_seen > 0, "producer filled one bank while the other was readable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
  end
endmodule
