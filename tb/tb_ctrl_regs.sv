// tb_ctrl_regs: self-checking test of the configuration registers.
//
// Checks the reset values, writes every register and reads the outputs back,
// checks that out-of-range buffer counts fall back to the maximum, that
// buffer addresses land in the right slot and half, and that the hand-back
// command gives a single-cycle pulse with the written index.
module tb_ctrl_regs;
  import nanet_pkg::*;

  localparam int N_BOARDS = 4, N_BUF = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  logic        wr_en = 0;
  logic [7:0]  wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [15:0] udp_port, buf_words;
  logic [N_BOARDS-1:0] board_en;
  logic [31:0] mrg_window, mrg_wait, frame_time;
  logic [3:0]  nbuf;
  logic [63:0] base [N_BUF];
  logic        rel_valid;
  logic [2:0]  rel_idx;

  ctrl_regs #(.N_BOARDS(N_BOARDS), .N_BUF(N_BUF), .BUF_BYTES(8192), .TIMEOUT_RST(50000)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .udp_port, .board_en, .mrg_window,
    .mrg_wait, .frame_time, .buf_words, .nbuf, .base, .rel_valid, .rel_idx);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pulses = 0;
  always @(posedge clk) if (rst_n && rel_valid) pulses++;

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(udp_port == 16'd58913 && board_en == 4'hF && mrg_window == 1 && mrg_wait == 256,
          "reset values of port, boards, window, wait");
    check(frame_time == 50000 && buf_words == 2048 && nbuf == 8, "reset values of frame, size, count");
    check(!rel_valid, "no hand-back after reset");
    wr(8'h00, 32'h0000_1234); check(udp_port == 16'h1234, "udp port");
    wr(8'h01, 32'h0000_0005); check(board_en == 4'b0101, "board enable");
    wr(8'h02, 32'd7);         check(mrg_window == 7, "merge window");
    wr(8'h03, 32'd99);        check(mrg_wait == 99, "merge wait");
    wr(8'h04, 32'd12345);     check(frame_time == 12345, "frame time");
    wr(8'h05, 32'd100);       check(buf_words == 100, "buffer size");
    wr(8'h06, 32'd3);         check(nbuf == 3, "buffer count");
    wr(8'h06, 32'd0);         check(nbuf == 8, "buffer count 0 -> max");
    wr(8'h06, 32'd9);         check(nbuf == 8, "buffer count 9 -> max");
    for (int i = 0; i < N_BUF; i++) begin
      wr(8'h10 + 8'(2 * i), 32'hC000_0000 + 32'(i));
      wr(8'h11 + 8'(2 * i), 32'h0000_0100 + 32'(i));
    end
    for (int i = 0; i < N_BUF; i++)
      check(base[i] == {32'h0000_0100 + 32'(i), 32'hC000_0000 + 32'(i)},
            $sformatf("base %0d = %h", i, base[i]));
    @(negedge clk);
    wr_en = 1; wr_addr = 8'h07; wr_data = 32'd5;
    @(negedge clk);
    wr_en = 0;
    check(rel_valid && rel_idx == 3'd5, "hand-back pulse with index");
    @(negedge clk);
    check(!rel_valid, "hand-back pulse lasts one cycle");
    check(pulses == 1, "one pulse");
    wr(8'h3F, 32'hFFFF_FFFF);   // unmapped: nothing changes
    check(udp_port == 16'h1234 && mrg_window == 7 && base[7][31:0] == 32'hC000_0007, "unmapped write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
