// tb_mem_interface: self-checking testbench for MinSeed's memory interface.
//
// Two requesters issue reads at random; a channel model accepts them with a
// random ready, answers in order after a random latency with data that is a
// fixed function of the address. Each requester checks that it receives
// exactly its own responses, in its own request order, with the right data.
// Also checked: with both requesters always asking, grants alternate
// (round-robin), and never more than TAGQ reads are in flight.
module tb_mem_interface;
  import segram_pkg::*;
  localparam int NREQ = 2, TAGQ = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NREQ-1:0]             req_valid = '0, req_ready, resp_valid;
  logic [NREQ-1:0][MEM_AW-1:0] req_addr = '0;
  logic [MEM_DW-1:0]           resp_data;
  logic                        ch_req_valid, ch_req_ready = 0, ch_resp_valid = 0;
  logic [MEM_AW-1:0]           ch_req_addr;
  logic [MEM_DW-1:0]           ch_resp_data = '0;

  mem_interface #(.NREQ(NREQ), .TAGQ(TAGQ)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  function automatic logic [MEM_DW-1:0] f(logic [MEM_AW-1:0] a);
    return {a * 34'd3 + 34'd1, 30'h1234567, a ^ 34'h2AAAAAAAA, 26'(a) + 26'd5};
  endfunction

  // channel model
  logic [MEM_AW-1:0] cq [$];
  int                cdue [$];
  int cyc = 0, inflight = 0, max_inflight = 0;
  bit saturate = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ch_req_valid && ch_req_ready) begin
      cq.push_back(ch_req_addr);
      cdue.push_back(cyc + $urandom_range(2, 12));
    end
  end
  always @(negedge clk) begin
    ch_req_ready <= saturate ? 1'b1 : ($urandom_range(0, 3) != 0);
    ch_resp_valid <= 1'b0;
    if (cq.size() > 0 && cdue[0] <= cyc && $urandom_range(0, 3) != 0) begin
      ch_resp_valid <= 1'b1;
      ch_resp_data  <= f(cq.pop_front());
      void'(cdue.pop_front());
    end
  end
  always @(posedge clk) begin
    inflight = inflight + int'(ch_req_valid && ch_req_ready) - int'(ch_resp_valid);
    if (inflight > max_inflight) max_inflight = inflight;
  end

  // requesters
  logic [MEM_AW-1:0] pend [NREQ][$];
  int got [NREQ];
  int issued [NREQ];
  bit req_done [NREQ];
  int grants [$];
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < NREQ; r++) begin
      if (req_valid[r] && req_ready[r]) begin
        pend[r].push_back(req_addr[r]);
        issued[r]++;
        if (saturate) grants.push_back(r);
      end
      if (resp_valid[r]) begin
        check(pend[r].size() > 0, $sformatf("req %0d: response without request", r));
        if (pend[r].size() > 0) check(resp_data == f(pend[r].pop_front()), $sformatf("req %0d data", r));
        got[r]++;
      end
    end
    check(!(resp_valid[0] && resp_valid[1]), "one response at a time");
  end

  for (genvar r = 0; r < NREQ; r++) begin : g_req
    initial begin
      @(posedge rst_n);
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        req_valid[r] = ($urandom_range(0, 2) != 0) || saturate;
        req_addr[r]  = MEM_AW'({$urandom, $urandom});
        if (req_valid[r]) begin
          @(posedge clk);
          while (!req_ready[r]) @(posedge clk);
          @(negedge clk);
          req_valid[r] = 0;
        end
      end
      req_done[r] = 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(req_done[0] && req_done[1])) @(negedge clk);
    repeat (100) @(negedge clk);
    check(got[0] == issued[0] && got[1] == issued[1] && issued[0] > 100 && issued[1] > 100,
          $sformatf("all responses (%0d/%0d %0d/%0d)", got[0], issued[0], got[1], issued[1]));
    check(max_inflight <= TAGQ, $sformatf("in flight %0d", max_inflight));
    // saturated phase: both always asking, channel always ready
    saturate = 1;
    grants.delete();
    for (int r = 0; r < NREQ; r++) begin
      req_valid[r] = 1;
    end
    repeat (200) @(negedge clk);
    req_valid = '0;
    saturate = 0;
    repeat (100) @(negedge clk);
    begin
      int alt;
      alt = 0;
      for (int i = 1; i < grants.size(); i++) if (grants[i] != grants[i-1]) alt++;
      check(grants.size() > 20 && alt >= grants.size() - 3, $sformatf("round robin %0d/%0d", alt, grants.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
