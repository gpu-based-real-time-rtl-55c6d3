// tb_nanet_top: end-to-end test of the NaNet receive path at its default
// size (4 links, 4 boards, 8 buffer slots of 8 KB, default time frame).
//
// Four boards send UDP datagrams carrying timestamped fragments of the
// same physics events, each board with its own timestamp jitter (0..3), its
// own sender address (20 + board) and its own packing of fragments into
// datagrams. Normally board i sends on link i. A host model captures the
// PCIe write requests into a sparse memory, and on each buffer-closed report
// walks the buffer, checks every fused event against the fragments that
// were sent for it (timestamp, source mask, hits in link order), checks that
// the walk ends exactly at the reported byte count, and hands the buffer
// back. The run has four phases:
//   A  150 full events, some at the 64-hit maximum (request split);
//   B  50 events with boards missing, truncated fragments, frames for a
//      wrong UDP port and pauses (merger wait limit);
//   C  250 events while the host holds its buffers (buffer overflow);
//   S  50 events with all four boards on link 0, as behind a switch, one
//      datagram per fragment, boards taking turns (steering by sender);
//   D  20 events, then silence until the gathering time closes the buffer.
// Every event must end up either in a buffer or in the overflow count. Each
// mechanism of the design is counted and must occur at least once.
module tb_nanet_top;
  import nanet_pkg::*;
  import tb_pkt_pkg::*;

  localparam int L = 4;
  localparam int NEV = 520;
  localparam int WINDOW = 8;
  localparam int NBUF_USED = 3;
  localparam logic [63:0] BASE0 = 64'h0000_0010_0000_0000;

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
    .udp_drop_cnt, .frag_drop_cnt, .event_cnt, .merge_timeout_cnt, .merge_partial_cnt,
    .buf_drop_cnt, .close_full_cnt, .close_time_cnt, .req_cnt, .route_collision_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ event plan
  logic [31:0] ev_ts   [NEV][L];
  int          ev_n    [NEV][L];
  logic [L-1:0] ev_send [NEV];     // boards that send a fragment
  int          ev_trunc [NEV];     // board whose fragment is cut, or -1
  bit          ev_found [NEV];
  int          ev_of_ts [logic [31:0]];
  int          wrong_port_frames = 0, truncs = 0, switch_frames = 0;

  function automatic logic [7:0] src_of(input int b);
    return 8'(20 + b);
  endfunction

  function automatic logic [L-1:0] contrib(input int k);
    logic [L-1:0] m;
    m = ev_send[k];
    if (ev_trunc[k] >= 0) m[ev_trunc[k]] = 1'b0;
    return m;
  endfunction

  function automatic logic [31:0] ev_tmin(input int k);
    logic [31:0] t;
    t = '1;
    for (int i = 0; i < L; i++) if (contrib(k)[i] && ev_ts[k][i] < t) t = ev_ts[k][i];
    return t;
  endfunction

  initial begin
    for (int k = 0; k < NEV; k++) begin
      ev_send[k]  = '1;
      ev_trunc[k] = -1;
      for (int i = 0; i < L; i++) begin
        ev_ts[k][i] = 32'(1000 + 100 * k + ($urandom % 4));
        ev_n[k][i]  = (k % 20 == 7) ? 16 : ($urandom % 17);
      end
      if (k >= 150 && k < 200) begin
        if ($urandom % 3 == 0 || k % 10 == 9) ev_send[k][$urandom % L] = 1'b0;
        if (k % 10 == 5) begin
          int b;
          b = $urandom % L;
          if (ev_send[k][b] && $countones(ev_send[k]) > 1) begin
            ev_trunc[k] = b;
            if (ev_n[k][b] == 0) ev_n[k][b] = 3;
            truncs++;
          end
        end
      end
      ev_of_ts[ev_tmin(k)] = k;
    end
  end

  // ------------------------------------------------------------ link drivers
  task automatic send_frame(input int li, input bytes_t f);
    foreach (f[j]) begin
      @(negedge clk);
      rx[li] = '{valid: 1'b1, sop: (j == 0), eop: (j == f.size() - 1), data: f[j]};
    end
    @(negedge clk);
    rx[li] = '0;
    repeat (12) @(negedge clk);           // inter-frame gap
  endtask

  task automatic send_link(input int li, input int k0, input int k1, input bit pauses);
    int k = k0;
    while (k < k1) begin
      bytes_t pay;
      int nf;
      nf = 1 + ($urandom % 3);
      pay = {};
      for (int f = 0; f < nf && k < k1; f++, k++) begin
        if (ev_send[k][li]) begin
          bytes_t fr;
          fr = frag_bytes(li, ev_ts[k][li], ev_n[k][li]);
          if (ev_trunc[k] == li) begin
            // cut inside the hits: last fragment of its datagram
            for (int j = 0; j < 10; j++) pay.push_back(fr[j]);
            k++;
            break;
          end
          foreach (fr[j]) pay.push_back(fr[j]);
        end
      end
      if (pay.size() > 0)
        send_frame(li, eth_udp_frame(pay, UDP_PORT_RST, 16'h0800, 8'd17, 8'h45, src_of(li)));
      else if (pauses) repeat (100) @(negedge clk);   // stand-in for the missing frame
      if (pauses && li == 0 && ($urandom % 8) == 0) begin
        bytes_t junk;
        junk = frag_bytes(li, 32'hDEAD, 2);
        send_frame(li, eth_udp_frame(junk, UDP_PORT_RST + 16'd1, 16'h0800, 8'd17, 8'h45,
                                     src_of(li)));
        wrong_port_frames++;
      end
      // all boards pause after each slot, so a board missing the last
      // event of a slot leaves the merger waiting
      if (pauses && k == k1) repeat (600) @(negedge clk);
    end
  endtask

  // Boards send time slots of 10 events together, as readout boards driven
  // by a common clock do; within a slot each board packs freely.
  task automatic run_phase(input int k0, input int k1, input bit pauses);
    for (int s = k0; s < k1; s += 10) begin
      for (int i = 0; i < L; i++) begin
        fork
          automatic int li = i;
          automatic int a = s;
          automatic int b = (s + 10 < k1) ? s + 10 : k1;
          send_link(li, a, b, pauses);
        join_none
      end
      wait fork;
    end
  endtask

  // All boards behind one switch port on link 0: per event, each board in
  // turn sends its fragment as a datagram of its own.
  task automatic send_switch(input int k0, input int k1);
    for (int k = k0; k < k1; k++)
      for (int i = 0; i < L; i++) begin
        send_frame(0, eth_udp_frame(frag_bytes(i, ev_ts[k][i], ev_n[k][i]), UDP_PORT_RST,
                                    16'h0800, 8'd17, 8'h45, src_of(i)));
        switch_frames++;
      end
  endtask

  // ------------------------------------------------------------ host memory
  logic [31:0] mem [logic [63:0]];
  logic [63:0] wa;
  int          beat_in_req = 0, req_len = 0;
  int          stalls = 0, splits_4k = 0, splits_max = 0;

  always @(negedge clk) tlp_ready = ($urandom % 8) != 0;

  always @(posedge clk) begin
    if (rst_n && tlp.valid && !tlp_ready) stalls++;
    if (rst_n && tlp.valid && tlp_ready) begin
      if (tlp.sop) begin
        wa = tlp.addr;
        req_len = int'(tlp.len_dw);
        beat_in_req = 0;
        if (int'(tlp.addr[11:0]) + 4 * req_len == 4096) splits_4k++;
        if (req_len == 64) splits_max++;
      end
      mem[wa] = tlp.data;
      wa = wa + 64'd4;
      beat_in_req++;
      check(tlp.eop == (beat_in_req == req_len), "request length matches its beats");
    end
  end

  // ------------------------------------------------------------ host model
  int  comp_q_idx[$], comp_q_bytes[$];
  bit  hold = 0;
  int  held[$];
  int  found = 0, closes_seen = 0, close_time_seen = 0;
  logic [31:0] last_ts = '0;

  always @(posedge clk) if (rst_n && comp_valid) begin
    comp_q_idx.push_back(int'(comp_idx));
    comp_q_bytes.push_back(int'(comp_bytes));
    if (comp_timeout) close_time_seen++;
  end

  task automatic reg_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_data = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic parse_buffer(input int idx, input int bytes);
    logic [63:0] a, lim;
    a   = BASE0 + 64'(idx) * 64'h1_0000;
    lim = a + 64'(bytes);
    while (a < lim) begin
      logic [31:0] t, w1;
      int k, total;
      logic [L-1:0] m;
      t  = mem.exists(a) ? mem[a] : 32'hX0;
      w1 = mem.exists(a + 4) ? mem[a + 4] : 32'h0;
      total = int'(w1[15:0]);
      m = w1[24 +: L];
      if (!ev_of_ts.exists(t)) begin
        check(1'b0, $sformatf("buffer %0d: unknown event timestamp %0d", idx, t));
        return;
      end
      k = ev_of_ts[t];
      check(!ev_found[k], "event seen once");
      check(t > last_ts || found == 0, "events in time order");
      last_ts = t;
      ev_found[k] = 1;
      found++;
      check(m == contrib(k), $sformatf("event %0d mask %b exp %b", k, m, contrib(k)));
      a += 8;
      begin
        int tot_exp = 0;
        for (int i = 0; i < L; i++) if (contrib(k)[i]) tot_exp += ev_n[k][i];
        check(total == tot_exp, $sformatf("event %0d hits %0d exp %0d", k, total, tot_exp));
        for (int i = 0; i < L; i++) if (contrib(k)[i])
          for (int h = 0; h < ev_n[k][i]; h++) begin
            check(mem.exists(a) && mem[a] == hit_word(i, ev_ts[k][i], h),
                  $sformatf("event %0d link %0d hit %0d at %h: %h exp %h", k, i, h, a, mem.exists(a) ? mem[a] : 32'hEEEE_EEEE, hit_word(i, ev_ts[k][i], h)));
            a += 4;
          end
      end
    end
    check(a == lim, $sformatf("buffer %0d walk ends at the reported size", idx));
    closes_seen++;
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (comp_q_idx.size() > 0) begin
        int idx, bytes;
        idx = comp_q_idx.pop_front();
        bytes = comp_q_bytes.pop_front();
        repeat (50) @(negedge clk);       // host reaction time
        parse_buffer(idx, bytes);
        held.push_back(idx);
      end
      if (!hold && held.size() > 0) reg_write(REG_RELEASE, 32'(held.pop_front()));
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ sequence
  initial begin
    int unsigned frag_drops;
    for (int i = 0; i < L; i++) rx[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    hold = 1;
    reg_write(REG_MRG_WINDOW, 32'(WINDOW));
    reg_write(REG_NBUF, 32'(NBUF_USED));
    for (int i = 0; i < 8; i++) begin
      logic [63:0] b;
      b = BASE0 + 64'(i) * 64'h1_0000;
      reg_write(REG_BASE_LO + 8'(2 * i), b[31:0]);
      reg_write(REG_BASE_HI + 8'(2 * i), b[63:32]);
    end
    for (int i = 0; i < NBUF_USED; i++) reg_write(REG_RELEASE, 32'(i));
    hold = 0;

    run_phase(0, 150, 0);
    run_phase(150, 200, 1);
    repeat (2000) @(negedge clk);
    hold = 1;
    run_phase(200, 450, 0);
    repeat (3000) @(negedge clk);
    hold = 0;
    repeat (3000) @(negedge clk);
    // behind a switch the boards take turns on one link, so the host allows
    // the merger a longer wait for the last board
    reg_write(REG_MRG_WAIT, 32'd2000);
    send_switch(450, 500);
    run_phase(500, NEV, 0);
    repeat (52000) @(negedge clk);        // gathering time (400 us) elapses
    repeat (500) @(negedge clk);

    // every event is in a buffer or was dropped for lack of one
    check(found + int'(buf_drop_cnt) == NEV,
          $sformatf("found %0d + dropped %0d != %0d events", found, buf_drop_cnt, NEV));
    check(int'(event_cnt) == NEV, $sformatf("merger made %0d events, exp %0d", event_cnt, NEV));
    frag_drops = 0;
    for (int i = 0; i < L; i++) frag_drops += frag_drop_cnt[i];
    check(frag_drops == truncs, $sformatf("fragment drops %0d exp %0d", frag_drops, truncs));
    check(udp_drop_cnt[0] == 32'(wrong_port_frames), "UDP drops = wrong-port frames");
    check(route_collision_cnt == 0, "no two links carry the same board");
    begin
      int sw_full;
      sw_full = 0;
      for (int k = 450; k < 500; k++) if (ev_found[k]) sw_full++;
      check(sw_full == 50, "mechanism: boards sharing a link steered by sender");
      $display("            switch frames=%0d, switch events fused=%0d", switch_frames, sw_full);
    end
    check(comp_q_idx.size() == 0, "all reports handled");
    check(closes_seen == int'(close_full_cnt + close_time_cnt), "one report per close");
    check(close_time_seen == int'(close_time_cnt), "time-frame reports flagged");

    // each mechanism happened
    $display("mechanisms: udp_drop=%0d frag_drop=%0d merge_full=%0d merge_partial=%0d merge_wait=%0d",
             wrong_port_frames, frag_drops, event_cnt - merge_partial_cnt, merge_partial_cnt,
             merge_timeout_cnt);
    $display("            close_full=%0d close_time=%0d overflow=%0d tlp_stall=%0d split_4k=%0d split_max=%0d",
             close_full_cnt, close_time_cnt, buf_drop_cnt, stalls, splits_4k, splits_max);
    check(wrong_port_frames > 0, "mechanism: UDP port filter");
    check(frag_drops > 0, "mechanism: truncated fragment dropped");
    check(event_cnt > merge_partial_cnt, "mechanism: all boards fused");
    check(merge_partial_cnt > 0, "mechanism: partial event");
    check(merge_timeout_cnt > 0, "mechanism: merger wait limit");
    check(close_full_cnt > 0, "mechanism: buffer closed full");
    check(close_time_cnt > 0, "mechanism: buffer closed by time frame");
    check(buf_drop_cnt > 0, "mechanism: buffer overflow");
    check(stalls > 0, "mechanism: PCIe back-pressure");
    check(splits_4k > 0, "mechanism: request cut at a 4 KB boundary");
    check(splits_max > 0, "mechanism: request cut at the maximum payload");
    $display("events found %0d, closes %0d, requests %0d", found, closes_seen, req_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
