// tb_event_merger: self-checking test of the time-window event merger.
//
// Fragment headers and hits are pushed into per-link FIFOs (the same
// sync_fifo the design uses) and the merger drains them. Scenarios, each
// with its expected fused events written out by hand:
//   1. all four links in one window -> one event, hits in link order,
//      first word one cycle after the headers become visible, no bubbles;
//   2. three links in the window, one outside -> a fused event of three,
//      then the lone fragment after the wait limit (timeout, partial);
//   3. a disabled link is left alone;
//   4. timestamps that wrap around 2^32 inside one window;
//   5. a random ready on the output (back-pressure) with many events.
module tb_event_merger;
  import nanet_pkg::*;
  import tb_pkt_pkg::*;

  localparam int N = 4;
  localparam int WAIT = 40;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  logic [N-1:0] enable = '1;
  logic [N-1:0] hdr_valid, hdr_pop, hit_valid, hit_pop, hdr_empty, hit_empty;
  logic [N-1:0] hdr_wr = '0, hit_wr = '0;
  frag_hdr_t    hdr_head [N];
  frag_hdr_t    hdr_w [N];
  logic [31:0]  hit_data [N];
  logic [31:0]  hit_w [N];
  word_beat_t   out;
  logic [15:0]  out_len;
  logic         out_ready = 1;
  logic [31:0]  event_cnt, timeout_cnt, partial_cnt;

  for (genvar i = 0; i < N; i++) begin : g_q
    sync_fifo #(.W($bits(frag_hdr_t)), .DEPTH(16)) u_h (
      .clk, .rst_n, .wr_en(hdr_wr[i]), .wr_data(hdr_w[i]), .rd_en(hdr_pop[i]),
      .rd_data(hdr_head[i]), .empty(hdr_empty[i]), .full(), .count());
    sync_fifo #(.W(32), .DEPTH(256)) u_d (
      .clk, .rst_n, .wr_en(hit_wr[i]), .wr_data(hit_w[i]), .rd_en(hit_pop[i]),
      .rd_data(hit_data[i]), .empty(hit_empty[i]), .full(), .count());
  end
  assign hdr_valid = ~hdr_empty;
  assign hit_valid = ~hit_empty;

  event_merger #(.N(N)) dut (
    .clk, .rst_n, .cfg_enable(enable), .cfg_window(32'd4), .cfg_wait(32'(WAIT)),
    .hdr_valid, .hdr_head, .hdr_pop, .hit_valid, .hit_data, .hit_pop,
    .out, .out_len, .out_ready, .event_cnt, .timeout_cnt, .partial_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected output words, with sop/eop
  logic [31:0] exp_w[$];
  bit          exp_sop[$], exp_eop[$];
  bit          rand_ready = 0;
  longint      sop_time[$];
  int          gaps = 0;   // cycles with valid low inside an event when ready

  // Queue one fragment of link b; fragments are written in the same cycle for
  // all links given in one call of push_set.
  task automatic push_set(input logic [N-1:0] m, input logic [31:0] ts [N], input int n [N]);
    int maxn = 0;
    for (int i = 0; i < N; i++) if (m[i] && n[i] > maxn) maxn = n[i];
    // hits first, then the headers, so that a visible header has its hits
    for (int k = 0; k < maxn; k++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        hit_wr[i] = m[i] && (k < n[i]);
        hit_w[i]  = hit_word(i, ts[i], k);
      end
    end
    @(negedge clk);
    hit_wr = '0;
    for (int i = 0; i < N; i++) begin
      hdr_wr[i] = m[i];
      hdr_w[i]  = '{ts: ts[i], nhits: 16'(n[i])};
    end
    @(negedge clk);
    hdr_wr = '0;
  endtask

  task automatic expect_event(input logic [31:0] t, input logic [N-1:0] m,
                              input logic [31:0] ts [N], input int n [N]);
    int total = 0;
    for (int i = 0; i < N; i++) if (m[i]) total += n[i];
    exp_w.push_back(t);              exp_sop.push_back(1); exp_eop.push_back(0);
    exp_w.push_back({8'(m), 8'h00, 16'(total)});
    exp_sop.push_back(0); exp_eop.push_back(total == 0);
    for (int i = 0; i < N; i++) if (m[i])
      for (int k = 0; k < n[i]; k++) begin
        total--;
        exp_w.push_back(hit_word(i, ts[i], k));
        exp_sop.push_back(0); exp_eop.push_back(total == 0);
      end
  endtask

  // output monitor: sample late in the cycle, after all drivers moved
  bit in_event = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (rand_ready) out_ready = ($urandom % 3) != 0;
      else            out_ready = 1;
      #4;
      if (rst_n && out.valid && out_ready) begin
        if (exp_w.size() == 0) check(1'b0, $sformatf("unexpected word %08x", out.data));
        else begin
          check(out.data == exp_w[0] && out.sop == exp_sop[0] && out.eop == exp_eop[0],
                $sformatf("word %08x sop %0d eop %0d, exp %08x %0d %0d",
                          out.data, out.sop, out.eop, exp_w[0], exp_sop[0], exp_eop[0]));
          if (out.sop) begin
            sop_time.push_back($time);
            check(out_len == 16'(exp_w.size() > 1 ? exp_w[1][15:0] + 2 : 0), "out_len with sop");
          end
          void'(exp_w.pop_front()); void'(exp_sop.pop_front()); void'(exp_eop.pop_front());
        end
        in_event = !out.eop;
      end else if (rst_n && in_event && out_ready && !out.valid) gaps++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ts [N];
    int          n [N];
    longint      t_hdr;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // 1. one window, all links
    ts = '{1000, 1001, 1002, 1003}; n = '{2, 0, 3, 1};
    expect_event(1000, 4'b1111, ts, n);
    push_set(4'b1111, ts, n);
    t_hdr = $time;   // headers were written at the edge 5 ns before
    repeat (30) @(negedge clk);
    check(exp_w.size() == 0, "scenario 1 complete");
    check(sop_time.size() == 1, "scenario 1: one event");
    // headers visible after the edge at t_hdr-5; decision at the next edge
    // (t_hdr+5); the first word is there in the cycle after it, sampled 4 ns
    // before the following edge
    if (sop_time.size() == 1)
      check(sop_time[0] - t_hdr == 14, $sformatf("first word %0d ns after the headers", sop_time[0] - t_hdr));
    check(gaps == 0, "no bubbles inside an event");

    // 2. three in the window, one outside
    // (link 3 sits exactly one window after links 0 and 1: excluded)
    ts = '{2000, 2000, 2010, 2004}; n = '{1, 2, 4, 1};
    expect_event(2000, 4'b0011, ts, n);
    expect_event(2004, 4'b1000, ts, n);
    expect_event(2010, 4'b0100, ts, n);
    push_set(4'b1111, ts, n);
    repeat (2 * WAIT + 60) @(negedge clk);
    check(exp_w.size() == 0, "scenario 2 complete");
    check(timeout_cnt == 2, $sformatf("timeout_cnt %0d exp 2", timeout_cnt));
    check(partial_cnt == 3, $sformatf("partial_cnt %0d exp 3", partial_cnt));

    // 3. link 3 disabled: its fragment waits
    enable = 4'b0111;
    ts = '{3000, 3001, 3002, 2990}; n = '{1, 1, 1, 2};
    expect_event(3000, 4'b0111, ts, n);
    push_set(4'b1111, ts, n);
    repeat (WAIT + 30) @(negedge clk);
    check(exp_w.size() == 0, "scenario 3 complete");
    check(hdr_valid[3], "disabled link untouched");
    enable = 4'b1000;
    expect_event(2990, 4'b1000, ts, n);
    repeat (20) @(negedge clk);
    check(exp_w.size() == 0, "disabled link drained after enabling");
    enable = 4'b1111;

    // 4. wrap-around inside one window
    ts = '{32'hFFFF_FFFF, 32'h0000_0001, 32'hFFFF_FFFE, 32'h0000_0000}; n = '{1, 1, 1, 1};
    expect_event(32'hFFFF_FFFE, 4'b1111, ts, n);
    push_set(4'b1111, ts, n);
    repeat (30) @(negedge clk);
    check(exp_w.size() == 0, "scenario 4 complete");

    // 5. back-pressure, many events
    rand_ready = 1;
    for (int e = 0; e < 40; e++) begin
      // keep the test's own FIFOs from overflowing
      while (exp_w.size() > 60) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        ts[i] = 32'(10000 + 100 * e + i);
        n[i]  = $urandom % 6;
      end
      expect_event(10000 + 100 * e, 4'b1111, ts, n);
      push_set(4'b1111, ts, n);
    end
    repeat (600) @(negedge clk);
    check(exp_w.size() == 0, "scenario 5 complete");
    check(event_cnt == 47, $sformatf("event_cnt %0d exp 47", event_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
