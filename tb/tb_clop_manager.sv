// tb_clop_manager: self-checking test of the receive-buffer ring manager.
//
// Small buffers (16 words) and a ring of three of the four slots are used.
// The test sends events and hands buffers back as a host would, and checks
// every DMA descriptor (address, length), every data word, and every
// buffer-closed report (index, byte count, reason) against a list worked out
// by hand:
//   - an event before any buffer is registered is dropped;
//   - events fill buffer 0; one that does not fit closes it (full);
//   - an event that does not fit buffer 1 closes it, then fills buffer 2
//     exactly, which closes it at once;
//   - the ring wraps to buffer 0, still owned by the host: overflow drop;
//   - after hand-back an event opens buffer 0 and the gathering time closes
//     it, cfg_frame cycles after the event;
//   - an event longer than a buffer is dropped.
// The DMA side is a sink with random ready that reports idle when it holds
// no words.
module tb_clop_manager;
  import nanet_pkg::*;

  localparam int N_BUF = 4, BUF_BYTES = 64, FRAME = 100;
  localparam logic [63:0] BASE0 = 64'h0000_0008_1000_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  logic [63:0] base [N_BUF];
  logic        rel_valid = 0;
  logic [1:0]  rel_idx = '0;
  word_beat_t  in = '0;
  logic [15:0] in_len = '0;
  logic        in_ready;
  logic        desc_valid, desc_ready, dat_valid, dat_ready = 1, dma_idle;
  logic [63:0] desc_addr;
  logic [15:0] desc_words;
  logic [31:0] dat_data, comp_bytes, drop_cnt, close_full_cnt, close_time_cnt;
  logic        comp_valid, comp_timeout;
  logic [1:0]  comp_idx;
  logic [N_BUF-1:0] nic_owned;

  for (genvar i = 0; i < N_BUF; i++) begin : g_b
    assign base[i] = BASE0 + 64'(i * 32'h1000);
  end

  clop_manager #(.N_BUF(N_BUF), .BUF_BYTES(BUF_BYTES)) dut (
    .clk, .rst_n, .cfg_nbuf(3'd3), .cfg_buf_words(16'(BUF_BYTES / 4)), .cfg_frame(32'(FRAME)),
    .cfg_base(base), .rel_valid, .rel_idx,
    .in, .in_len, .in_ready,
    .desc_valid, .desc_ready, .desc_addr, .desc_words,
    .dat_valid, .dat_ready, .dat_data, .dma_idle,
    .comp_valid, .comp_idx, .comp_bytes, .comp_timeout, .nic_owned,
    .drop_cnt, .close_full_cnt, .close_time_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DMA sink
  int pending = 0;
  assign desc_ready = (pending == 0);
  assign dma_idle   = (pending == 0);
  logic [63:0] exp_desc_addr[$];
  int          exp_desc_len[$];
  logic [31:0] exp_data[$];
  int          exp_cidx[$], exp_cbytes[$];
  bit          exp_ctime[$];
  longint      comp_time[$];
  longint      cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && desc_valid && desc_ready) begin
      if (exp_desc_addr.size() == 0) check(1'b0, "unexpected descriptor");
      else begin
        check(desc_addr == exp_desc_addr[0] && int'(desc_words) == exp_desc_len[0],
              $sformatf("descriptor %h/%0d, exp %h/%0d", desc_addr, desc_words,
                        exp_desc_addr[0], exp_desc_len[0]));
        void'(exp_desc_addr.pop_front()); void'(exp_desc_len.pop_front());
      end
      pending <= int'(desc_words);
    end
    if (rst_n && dat_valid && dat_ready) begin
      check(exp_data.size() > 0 && dat_data == exp_data[0], $sformatf("data word %08x", dat_data));
      if (exp_data.size() > 0) void'(exp_data.pop_front());
      pending <= pending - 1;
    end
    if (rst_n && comp_valid) begin
      comp_time.push_back(cyc);
      if (exp_cidx.size() == 0) check(1'b0, "unexpected close report");
      else begin
        check(int'(comp_idx) == exp_cidx[0] && int'(comp_bytes) == exp_cbytes[0]
              && comp_timeout == exp_ctime[0],
              $sformatf("close buf %0d bytes %0d time %0d, exp %0d %0d %0d", comp_idx,
                        comp_bytes, comp_timeout, exp_cidx[0], exp_cbytes[0], exp_ctime[0]));
        void'(exp_cidx.pop_front()); void'(exp_cbytes.pop_front()); void'(exp_ctime.pop_front());
      end
    end
  end
  always @(negedge clk) dat_ready = ($urandom % 4) != 0;

  logic in_acc = 0;
  always @(posedge clk) in_acc <= in.valid && in_ready;

  task automatic send_event(input int len, input logic [31:0] tag);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      in = '{valid: 1'b1, sop: (k == 0), eop: (k == len - 1), data: tag + 32'(k)};
      in_len = 16'(len);
      do @(negedge clk); while (!in_acc);
      in = '0;
    end
  endtask

  task automatic expect_write(input int buf_i, input int offs_words, input int len, input logic [31:0] tag);
    exp_desc_addr.push_back(BASE0 + 64'(buf_i * 32'h1000) + 64'(4 * offs_words));
    exp_desc_len.push_back(len);
    for (int k = 0; k < len; k++) exp_data.push_back(tag + 32'(k));
  endtask

  task automatic expect_close(input int buf_i, input int bytes, input bit by_time);
    exp_cidx.push_back(buf_i); exp_cbytes.push_back(bytes); exp_ctime.push_back(by_time);
  endtask

  task automatic release_buf(input int i);
    @(negedge clk);
    rel_valid = 1; rel_idx = 2'(i);
    @(negedge clk);
    rel_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_ev;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // no buffer registered yet: dropped
    send_event(4, 32'h0100);
    check(drop_cnt == 1, "drop before registration");
    release_buf(0); release_buf(1); release_buf(2);
    check(nic_owned == 4'b0111, "three buffers handed to the NIC");
    // buffer 0: 5 + 6 words, the next 6 do not fit -> close 0 (44 bytes)
    expect_write(0, 0, 5, 32'h0200);  send_event(5, 32'h0200);
    expect_write(0, 5, 6, 32'h0300);  send_event(6, 32'h0300);
    expect_close(0, 44, 0);
    expect_write(1, 0, 6, 32'h0400);  send_event(6, 32'h0400);
    // 16 words do not fit buffer 1 -> close 1 (24 bytes); buffer 2 filled exactly
    expect_close(1, 24, 0);
    expect_write(2, 0, 16, 32'h0500); expect_close(2, 64, 0);
    send_event(16, 32'h0500);
    repeat (10) @(negedge clk);
    check(nic_owned == 4'b0000, "all closed buffers belong to the host");
    // ring wraps to buffer 0, still the host's: overflow
    send_event(3, 32'h0600);
    check(drop_cnt == 2, "overflow drop");
    // hand back buffer 0; an event opens it and the time frame closes it
    release_buf(0);
    expect_write(0, 0, 3, 32'h0700); expect_close(0, 12, 1);
    t_ev = cyc;
    send_event(3, 32'h0700);
    repeat (FRAME + 20) @(negedge clk);
    check(comp_time.size() == 4, $sformatf("%0d close reports, exp 4", comp_time.size()));
    if (comp_time.size() == 4)
      check(comp_time[3] - t_ev >= FRAME && comp_time[3] - t_ev <= FRAME + 8,
            $sformatf("time-frame close %0d cycles after the event, exp about %0d",
                      comp_time[3] - t_ev, FRAME));
    // too long for any buffer: dropped (buffer 1 is the host's anyway; hand it back)
    release_buf(1);
    send_event(17, 32'h0800);
    check(drop_cnt == 3, "oversize drop");
    repeat (10) @(negedge clk);
    check(exp_desc_addr.size() == 0 && exp_data.size() == 0 && exp_cidx.size() == 0,
          "all expected writes and reports seen");
    check(close_full_cnt == 3 && close_time_cnt == 1,
          $sformatf("close counters %0d/%0d exp 3/1", close_full_cnt, close_time_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
