// tb_rdma_write_engine: self-checking test of the RDMA write engine.
//
// Issues writes of several lengths and alignments (short, crossing a 4 KB
// boundary, longer than several maximum payloads), first with data and
// ready always present, checking that N words leave in N consecutive cycles,
// then with random gaps on both sides. The expected request list (address
// and length of each request) is built independently by walking the bytes
// of each write; every data word and the idle flag are checked.
module tb_rdma_write_engine;
  import nanet_pkg::*;

  localparam int MAXP = 256;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  logic        desc_valid = 0, desc_ready, dat_valid = 0, dat_ready, tlp_ready = 1, idle;
  logic [63:0] desc_addr = '0;
  logic [15:0] desc_words = '0;
  logic [31:0] dat_data = '0, req_cnt;
  tlp_beat_t   tlp;

  rdma_write_engine #(.MAX_PAYLOAD(MAXP)) dut (
    .clk, .rst_n, .desc_valid, .desc_ready, .desc_addr, .desc_words,
    .dat_valid, .dat_ready, .dat_data, .tlp, .tlp_ready, .idle, .req_cnt);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected requests and data
  logic [63:0] exp_addr[$];
  int          exp_len[$];
  logic [31:0] exp_data[$];
  int          reqs = 0;
  bit          rnd = 0;
  int          cur_left = 0;   // words left of the request being received
  longint      beats = 0;

  // Reference split: a new request starts at the first byte of the write,
  // at every 4 KB boundary, and after every MAXP bytes.
  task automatic expect_write(input logic [63:0] a, input int words, input logic [31:0] seed);
    int run = 0;
    for (int k = 0; k < words; k++) begin
      logic [63:0] wa = a + 64'(4 * k);
      if (k == 0 || wa[11:0] == 12'h000 || run == MAXP / 4) begin
        exp_addr.push_back(wa); exp_len.push_back(0); run = 0;
      end
      exp_len[exp_len.size() - 1]++;
      run++;
      exp_data.push_back(seed + 32'(k));
    end
  endtask

  // monitor
  initial begin
    forever begin
      @(negedge clk);
      tlp_ready = rnd ? (($urandom % 4) != 0) : 1'b1;
      #4;
      if (rst_n && tlp.valid && tlp_ready) begin
        beats++;
        if (cur_left == 0) begin
          check(tlp.sop, "sop on the first beat of a request");
          if (exp_addr.size() == 0) check(1'b0, "unexpected request");
          else begin
            check(tlp.addr == exp_addr[0] && int'(tlp.len_dw) == exp_len[0],
                  $sformatf("request %0d at %h len %0d, exp %h len %0d",
                            reqs, tlp.addr, tlp.len_dw, exp_addr[0], exp_len[0]));
            cur_left = exp_len[0];
            void'(exp_addr.pop_front()); void'(exp_len.pop_front());
            reqs++;
          end
        end else check(!tlp.sop, "no sop inside a request");
        check(tlp.eop == (cur_left == 1), "eop on the last beat");
        check(exp_data.size() > 0 && tlp.data == exp_data[0], $sformatf("data %08x", tlp.data));
        if (exp_data.size() > 0) void'(exp_data.pop_front());
        cur_left--;
      end
    end
  end

  // record whether the descriptor / data word offered in a cycle was taken
  logic dat_acc = 0, desc_acc = 0;
  always @(posedge clk) begin
    dat_acc  <= dat_valid && dat_ready;
    desc_acc <= desc_valid && desc_ready;
  end

  task automatic write(input logic [63:0] a, input int words, input logic [31:0] seed);
    expect_write(a, words, seed);
    @(negedge clk);
    desc_valid = 1; desc_addr = a; desc_words = 16'(words);
    do @(negedge clk); while (!desc_acc);
    desc_valid = 0;
    for (int k = 0; k < words; k++) begin
      if (rnd) while (($urandom % 3) == 0) @(negedge clk);
      dat_valid = 1; dat_data = seed + 32'(k);
      do @(negedge clk); while (!dat_acc);
      dat_valid = 0;
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle, "idle after reset");
    // full rate: a 100-word write with data and ready always present
    expect_write(64'h0000_0040_0000_0100, 100, 32'hA000_0000);
    desc_valid = 1; desc_addr = 64'h0000_0040_0000_0100; desc_words = 16'd100;
    @(negedge clk);
    desc_valid = 0;
    t0 = beats;
    for (int k = 0; k < 100; k++) begin
      dat_valid = 1; dat_data = 32'hA000_0000 + 32'(k);
      @(negedge clk);
      check(dat_acc, "word taken every cycle at full rate");
    end
    dat_valid = 0;
    @(negedge clk);
    check(beats - t0 == 100, "100 beats");
    check(idle, "idle after the write");
    // random gaps
    rnd = 1;
    write(64'h0000_0000_1000_0FF0, 20, 32'h1000);      // crosses 4 KB after 4 words
    write(64'h0000_0000_2000_0000, 200, 32'h2000);     // 64 + 64 + 64 + 8
    write(64'h0000_0001_0000_0FFC, 1, 32'h3000);
    write(64'h0000_0001_0000_0FFC, 2, 32'h4000);
    write(64'h0000_0000_3000_0800, 700, 32'h5000);     // many, one boundary
    repeat (20) @(negedge clk);
    check(exp_data.size() == 0 && exp_addr.size() == 0, "all requests seen");
    check(req_cnt == 32'(reqs), $sformatf("req_cnt %0d exp %0d", req_cnt, reqs));
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
