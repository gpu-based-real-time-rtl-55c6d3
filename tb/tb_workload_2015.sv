// tb_workload_2015: the 2015 trigger test setup run through nanet_top at its
// default parameters.
//
// Setup modelled: two readout boards behind an Ethernet switch share link 0
// of the NIC (links 1-3 idle), buffers of 8 KB, a gathering time of 400 us
// (50 000 cycles at 125 MHz), and between 130 and 350 events per buffer, as
// reported for that run. Boards 2 and 3 are masked off in the board enable
// register. For every event each board sends one datagram with one
// fragment of 0..3 hits (sizes of this test's choosing: the source gives no
// hit counts); the two datagrams follow each other on the shared link.
// Two event rates are run: one event every 300 cycles (about 167 events per
// gathering time) and one every 160 cycles (about 312).
//
// A host model captures the PCIe writes, walks each reported buffer, checks
// every fused event (timestamp, board mask 2'b11, hits of board 0 then board
// 1) and hands the buffer back. It checks that buffers closed while events
// are flowing are closed by the gathering time and hold 130 to 350 events,
// that no event is dropped or split, and that every event sent is found.
module tb_workload_2015;
  import nanet_pkg::*;
  import tb_pkt_pkg::*;

  localparam int L = 4;
  localparam int NB = 2;                 // boards in use
  localparam int N1 = 500, N2 = 800;     // events at the slow and the fast rate
  localparam int NEV = N1 + N2;
  localparam logic [63:0] BASE0 = 64'h0000_0020_0000_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  byte_beat_t  rx [L];
  logic        reg_wr = 0;
  logic [7:0]  reg_addr = '0;
  logic [31:0] reg_data = '0;
  tlp_beat_t   tlp;
  logic        tlp_ready = 1;
  logic        comp_valid, comp_timeout;
  logic [2:0]  comp_idx;
  logic [31:0] comp_bytes;
  logic [31:0] udp_drop_cnt [L], frag_drop_cnt [L];
  logic [31:0] event_cnt, merge_timeout_cnt, merge_partial_cnt, buf_drop_cnt;
  logic [31:0] close_full_cnt, close_time_cnt, req_cnt, route_collision_cnt;

  nanet_top dut (
    .clk, .rst_n, .rx, .reg_wr, .reg_addr, .reg_data, .tlp, .tlp_ready,
    .comp_valid, .comp_idx, .comp_bytes, .comp_timeout,
    .udp_drop_cnt, .frag_drop_cnt, .route_collision_cnt, .event_cnt, .merge_timeout_cnt,
    .merge_partial_cnt, .buf_drop_cnt, .close_full_cnt, .close_time_cnt, .req_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int cycle = 0;
  always @(posedge clk) cycle++;

  // ------------------------------------------------------------ event plan
  logic [31:0] ev_ts [NEV][NB];
  int          ev_n  [NEV][NB];
  bit          ev_found [NEV];

  initial
    for (int k = 0; k < NEV; k++)
      for (int i = 0; i < NB; i++) begin
        ev_ts[k][i] = 32'(1000 + 100 * k + ($urandom % 4));
        ev_n[k][i]  = $urandom % 4;
      end

  function automatic logic [31:0] ev_tmin(input int k);
    return (ev_ts[k][0] < ev_ts[k][1]) ? ev_ts[k][0] : ev_ts[k][1];
  endfunction

  // ------------------------------------------------------------ switch port
  task automatic send_frame(input bytes_t f);
    foreach (f[j]) begin
      @(negedge clk);
      rx[0] = '{valid: 1'b1, sop: (j == 0), eop: (j == f.size() - 1), data: f[j]};
    end
    @(negedge clk);
    rx[0] = '0;
    repeat (12) @(negedge clk);           // inter-frame gap
  endtask

  task automatic send_events(input int k0, input int k1, input int spacing);
    for (int k = k0; k < k1; k++) begin
      int t0;
      t0 = cycle;
      for (int i = 0; i < NB; i++)
        send_frame(eth_udp_frame(frag_bytes(i, ev_ts[k][i], ev_n[k][i]), UDP_PORT_RST,
                                 16'h0800, 8'd17, 8'h45, 8'(20 + i)));
      check(cycle - t0 <= spacing, "both datagrams fit in the event spacing");
      while (cycle - t0 < spacing) @(negedge clk);
    end
  endtask

  // ------------------------------------------------------------ host memory
  logic [31:0] mem [logic [63:0]];
  logic [63:0] wa;

  always @(negedge clk) tlp_ready = ($urandom % 8) != 0;

  always @(posedge clk)
    if (rst_n && tlp.valid && tlp_ready) begin
      if (tlp.sop) wa = tlp.addr;
      mem[wa] = tlp.data;
      wa = wa + 64'd4;
    end

  // ------------------------------------------------------------ host model
  int  comp_q_idx[$], comp_q_bytes[$];
  bit  comp_q_live[$], comp_q_time[$];
  bit  streaming = 0;
  int  found = 0, closes = 0, live_closes = 0, min_ev = 1 << 30, max_ev = 0;
  logic [31:0] last_ts = '0;

  always @(posedge clk) if (rst_n && comp_valid) begin
    comp_q_idx.push_back(int'(comp_idx));
    comp_q_bytes.push_back(int'(comp_bytes));
    comp_q_live.push_back(streaming);
    comp_q_time.push_back(comp_timeout);
  end

  task automatic reg_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_data = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic parse_buffer(input int idx, input int bytes, input bit live, input bit by_time);
    logic [63:0] a, lim;
    int nev;
    nev = 0;
    a   = BASE0 + 64'(idx) * 64'h1_0000;
    lim = a + 64'(bytes);
    while (a < lim) begin
      logic [31:0] t, w1;
      int k;
      t  = mem.exists(a) ? mem[a] : 32'hX0;
      w1 = mem.exists(a + 4) ? mem[a + 4] : 32'h0;
      k  = (int'(t) - 1000) / 100;
      if (k < 0 || k >= NEV || ev_tmin(k) != t) begin
        check(1'b0, $sformatf("buffer %0d: unknown event timestamp %0d", idx, t));
        return;
      end
      check(!ev_found[k], "event seen once");
      check(t > last_ts || found == 0, "events in time order");
      last_ts = t;
      ev_found[k] = 1;
      found++;
      nev++;
      check(w1[31:24] == 8'b0000_0011, $sformatf("event %0d mask %b", k, w1[31:24]));
      check(int'(w1[15:0]) == ev_n[k][0] + ev_n[k][1], $sformatf("event %0d hit count", k));
      a += 8;
      for (int i = 0; i < NB; i++)
        for (int h = 0; h < ev_n[k][i]; h++) begin
          check(mem.exists(a) && mem[a] == hit_word(i, ev_ts[k][i], h),
                $sformatf("event %0d board %0d hit %0d", k, i, h));
          a += 4;
        end
    end
    check(a == lim, $sformatf("buffer %0d walk ends at the reported size", idx));
    closes++;
    if (live) begin
      live_closes++;
      check(by_time, $sformatf("buffer %0d closed by the gathering time", idx));
      check(nev >= 130 && nev <= 350, $sformatf("buffer %0d holds %0d events", idx, nev));
      if (nev < min_ev) min_ev = nev;
      if (nev > max_ev) max_ev = nev;
    end
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (comp_q_idx.size() > 0) begin
        int idx, bytes;
        bit live, by_time;
        idx = comp_q_idx.pop_front();
        bytes = comp_q_bytes.pop_front();
        live = comp_q_live.pop_front();
        by_time = comp_q_time.pop_front();
        repeat (50) @(negedge clk);       // host reaction time
        parse_buffer(idx, bytes, live, by_time);
        reg_write(REG_RELEASE, 32'(idx));
      end
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ sequence
  initial begin
    for (int i = 0; i < L; i++) rx[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    reg_write(REG_BOARD_EN, 32'b0011);
    reg_write(REG_MRG_WINDOW, 32'd8);
    for (int i = 0; i < 8; i++) begin
      logic [63:0] b;
      b = BASE0 + 64'(i) * 64'h1_0000;
      reg_write(REG_BASE_LO + 8'(2 * i), b[31:0]);
      reg_write(REG_BASE_HI + 8'(2 * i), b[63:32]);
    end
    for (int i = 0; i < 8; i++) reg_write(REG_RELEASE, 32'(i));

    streaming = 1;
    send_events(0, N1, 300);
    send_events(N1, NEV, 160);
    streaming = 0;
    repeat (52000) @(negedge clk);        // the last buffer closes by time
    repeat (500) @(negedge clk);

    check(found == NEV, $sformatf("found %0d of %0d events", found, NEV));
    check(int'(event_cnt) == NEV, $sformatf("merger made %0d events", event_cnt));
    check(merge_partial_cnt == 0, "no event split between the two boards");
    check(buf_drop_cnt == 0, "no overflow");
    check(close_full_cnt == 0, "no buffer filled up at this event size");
    check(route_collision_cnt == 0 && udp_drop_cnt[0] == 0, "no collisions, no rejects");
    check(live_closes >= 4, $sformatf("%0d buffers closed while events flowed", live_closes));
    $display("events %0d, buffers %0d (%0d while streaming, %0d..%0d events each), requests %0d",
             found, closes, live_closes, min_ev, max_ev, req_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
