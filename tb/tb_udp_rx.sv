// tb_udp_rx: self-checking test of the UDP receive offload.
//
// Sends good datagrams of several sizes (including ones short enough to be
// padded by Ethernet), and frames that must be rejected: wrong UDP port,
// wrong EtherType, wrong IP protocol, IP options, a runt frame, an empty UDP
// payload. Checks the forwarded bytes, their sop/eop marks, the drop and
// frame counters, and that each payload byte leaves exactly one cycle after
// it entered.
module tb_udp_rx;
  import nanet_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  byte_beat_t  in, out;
  logic [7:0]  out_src;
  logic [31:0] drop_cnt, frame_cnt;
  localparam logic [15:0] PORT = 16'd58913;

  udp_rx dut (.clk, .rst_n, .in, .cfg_udp_port(PORT), .out, .out_src, .drop_cnt, .frame_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected output: bytes with the cycle they must appear in
  bytes_t exp_q;
  logic   exp_sop[$], exp_eop[$];
  longint exp_t[$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic send(input bytes_t f, input bytes_t pay, input bit good);
    foreach (f[i]) begin
      @(negedge clk);
      in = '{valid: 1'b1, sop: (i == 0), eop: (i == f.size() - 1), data: f[i]};
      if (good && i >= 42 && i < 42 + pay.size()) begin
        exp_q.push_back(f[i]);
        exp_sop.push_back(i == 42);
        exp_eop.push_back(i == 42 + pay.size() - 1);
        exp_t.push_back(cyc + 1);
      end
    end
    @(negedge clk);
    in = '0;
    repeat (12) @(negedge clk);   // inter-frame gap
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out.valid) begin
      if (exp_q.size() == 0) check(1'b0, "unexpected output byte");
      else begin
        check(out.data == exp_q[0], $sformatf("payload byte %02x exp %02x", out.data, exp_q[0]));
        check(out.sop == exp_sop[0] && out.eop == exp_eop[0], "sop/eop marks");
        check(out_src == 8'd10, "sender address byte");
        check(cyc == exp_t[0], $sformatf("latency: byte at cycle %0d, expected %0d", cyc, exp_t[0]));
        void'(exp_q.pop_front()); void'(exp_sop.pop_front());
        void'(exp_eop.pop_front()); void'(exp_t.pop_front());
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t pay;
    int good = 0, bad = 0;
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // good datagrams of several lengths
    for (int n = 1; n <= 1000; n = n * 3 + 1) begin
      pay = {};
      for (int k = 0; k < n; k++) pay.push_back(8'($urandom));
      send(eth_udp_frame(pay, PORT), pay, 1); good++;
    end
    // rejected frames
    pay = {8'h11, 8'h22, 8'h33, 8'h44};
    send(eth_udp_frame(pay, PORT + 1), pay, 0);              bad++;
    send(eth_udp_frame(pay, PORT, 16'h86DD), pay, 0);        bad++;
    send(eth_udp_frame(pay, PORT, 16'h0800, 8'd6), pay, 0);  bad++;
    send(eth_udp_frame(pay, PORT, 16'h0800, 8'd17, 8'h46), pay, 0); bad++;
    begin
      bytes_t runt;
      runt = eth_udp_frame(pay, PORT);
      runt = runt[0:29];
      send(runt, pay, 0); bad++;
    end
    pay = {};
    send(eth_udp_frame(pay, PORT), pay, 0);                  bad++;
    // one more good one after the bad ones
    pay = {8'hDE, 8'hAD, 8'hBE, 8'hEF, 8'h01};
    send(eth_udp_frame(pay, PORT), pay, 1); good++;
    check(out_src == 8'd10, "sender address byte held after the frame");
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all expected bytes seen");
    check(drop_cnt == 32'(bad), $sformatf("drop_cnt %0d exp %0d", drop_cnt, bad));
    check(frame_cnt == 32'(good + bad), $sformatf("frame_cnt %0d exp %0d", frame_cnt, good + bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
