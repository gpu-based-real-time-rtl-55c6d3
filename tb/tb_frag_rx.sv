// tb_frag_rx: self-checking test of the fragment parser and store.
//
// Phase 1 sends datagrams holding several fragments, fragments with no hits,
// one declaring more hits than allowed (rest of its datagram must be
// skipped) and one cut short by the end of its datagram, while a consumer
// drains the store. Phase 2 stops the consumer and overfills the small hit
// and header stores to force the overflow drop. Every stored fragment is
// compared with the fragments a reference list says must survive, hit by
// hit; drop and fragment counters are checked, and the header must become
// visible one cycle after the fragment's last byte.
module tb_frag_rx;
  import nanet_pkg::*;
  import tb_pkt_pkg::*;

  localparam int HIT_DEPTH = 32, HDR_DEPTH = 4, MAX_HITS = 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  byte_beat_t  in;
  logic        hdr_valid, hdr_pop = 0, hit_valid, hit_pop = 0;
  frag_hdr_t   hdr_head;
  logic [31:0] hit_data, frag_cnt, drop_cnt;

  frag_rx #(.HIT_DEPTH(HIT_DEPTH), .HDR_DEPTH(HDR_DEPTH), .MAX_HITS(MAX_HITS)) dut (
    .clk, .rst_n, .in, .hdr_valid, .hdr_head, .hdr_pop,
    .hit_valid, .hit_data, .hit_pop, .frag_cnt, .drop_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: fragments that must come out, in order
  logic [31:0] exp_ts[$];
  int          exp_n[$];
  int          exp_drops = 0;
  bit          consume = 1;

  task automatic send(input bytes_t d);
    foreach (d[i]) begin
      @(negedge clk);
      in = '{valid: 1'b1, sop: (i == 0), eop: (i == d.size() - 1), data: d[i]};
    end
    @(negedge clk);
    in = '0;
    repeat (3) @(negedge clk);
  endtask

  // consumer
  initial begin
    forever begin
      @(negedge clk);
      hit_pop = 0; hdr_pop = 0;
      if (consume && hdr_valid) begin
        frag_hdr_t h;
        h = hdr_head;
        if (exp_ts.size() == 0) check(1'b0, "unexpected fragment");
        else begin
          check(h.ts == exp_ts[0] && int'(h.nhits) == exp_n[0],
                $sformatf("header ts=%0d n=%0d exp ts=%0d n=%0d", h.ts, h.nhits, exp_ts[0], exp_n[0]));
          for (int k = 0; k < int'(h.nhits); k++) begin
            check(hit_valid && hit_data == hit_word(0, h.ts, k),
                  $sformatf("hit %0d of ts %0d: %08x", k, h.ts, hit_data));
            hit_pop = 1;
            @(negedge clk);
            hit_pop = 0;
          end
          void'(exp_ts.pop_front()); void'(exp_n.pop_front());
          hdr_pop = 1;
          @(negedge clk);
          hdr_pop = 0;
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t d;
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // --- timing: header visible one cycle after the last byte
    consume = 0;
    d = frag_bytes(0, 32'd100, 2);
    foreach (d[i]) begin
      @(negedge clk);
      in = '{valid: 1'b1, sop: (i == 0), eop: (i == d.size() - 1), data: d[i]};
    end
    @(posedge clk); #1;
    check(hdr_valid, "header visible one cycle after the last byte");
    @(negedge clk); in = '0;
    exp_ts.push_back(100); exp_n.push_back(2);
    consume = 1;
    // --- phase 1: several fragments per datagram
    d = {};
    for (int f = 0; f < 4; f++) begin
      bytes_t x;
      x = frag_bytes(0, 32'(200 + f), f * 3);
      foreach (x[i]) d.push_back(x[i]);
      exp_ts.push_back(200 + f); exp_n.push_back(f * 3);
    end
    send(d);
    // fragment declaring too many hits: it and the rest of the datagram go
    d = frag_bytes(0, 32'd300, 1);
    exp_ts.push_back(300); exp_n.push_back(1);
    send(d);
    d = {};
    push_word(d, 32'd301); push_word(d, 32'(MAX_HITS + 1));
    begin bytes_t x; x = frag_bytes(0, 32'd302, 1); foreach (x[i]) d.push_back(x[i]); end
    exp_drops++;
    send(d);
    // truncated fragment after a good one in the same datagram
    d = frag_bytes(0, 32'd400, 3);
    exp_ts.push_back(400); exp_n.push_back(3);
    begin bytes_t x; x = frag_bytes(0, 32'd401, 5); for (int i = 0; i < 14; i++) d.push_back(x[i]); end
    exp_drops++;
    send(d);
    d = frag_bytes(0, 32'd500, MAX_HITS);
    exp_ts.push_back(500); exp_n.push_back(MAX_HITS);
    // MAX_HITS hits do not fit a 32-word store: dropped
    exp_ts.pop_back(); exp_n.pop_back(); exp_drops++;
    send(d);
    d = frag_bytes(0, 32'd501, 7);
    exp_ts.push_back(501); exp_n.push_back(7);
    send(d);
    repeat (200) @(negedge clk);
    check(exp_ts.size() == 0, "phase 1 drained");
    // --- phase 2: consumer stopped, stores overflow
    consume = 0;
    for (int f = 0; f < 4; f++) begin
      d = frag_bytes(0, 32'(600 + f), 10);
      if (f < 3) begin exp_ts.push_back(600 + f); exp_n.push_back(10); end
      else exp_drops++;                                 // 40 hits > 32
      send(d);
    end
    d = frag_bytes(0, 32'd700, 0);
    exp_ts.push_back(700); exp_n.push_back(0);         // fourth header slot
    send(d);
    d = frag_bytes(0, 32'd701, 0);
    exp_drops++;                                        // header store full
    send(d);
    d = frag_bytes(0, 32'd702, 1);
    exp_drops++;                                        // header store full
    send(d);
    consume = 1;
    repeat (200) @(negedge clk);
    check(exp_ts.size() == 0, "phase 2 drained");
    check(drop_cnt == 32'(exp_drops), $sformatf("drop_cnt %0d exp %0d", drop_cnt, exp_drops));
    check(frag_cnt == 32'd12, $sformatf("frag_cnt %0d exp 12", frag_cnt));
    check(!hit_valid && !hdr_valid, "store empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
