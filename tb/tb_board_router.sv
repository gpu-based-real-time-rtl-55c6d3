// tb_board_router: self-checking test of board_router.
//
// Two instances: the default size (4 links, 4 boards) and 3 links / 3 boards,
// where sender addresses ending in board number 3 belong to no board. Each
// cycle every link gets a random beat and a random sender address; most
// cycles give the links different boards, some give two links the same
// board. A cycle-level model picks, for each board, the byte of the
// lowest-numbered link that carries that board, and the outputs one cycle
// later must match it exactly; the collision and unknown counters must match
// the model's counts. A short datagram-level part then sends two boards
// over one link in turn, as through a switch, and checks that each board
// output carries exactly its own datagrams.
module tb_board_router;
  import nanet_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ instances
  byte_beat_t  a_in [4], a_out [4];
  logic [7:0]  a_src [4];
  logic [31:0] a_coll, a_unk;
  byte_beat_t  b_in [3], b_out [3];
  logic [7:0]  b_src [3];
  logic [31:0] b_coll, b_unk;

  board_router dut_a (
    .clk, .rst_n, .in(a_in), .in_src(a_src), .out(a_out),
    .collision_cnt(a_coll), .unknown_cnt(a_unk));
  board_router #(.N_LINKS(3), .N_BOARDS(3)) dut_b (
    .clk, .rst_n, .in(b_in), .in_src(b_src), .out(b_out),
    .collision_cnt(b_coll), .unknown_cnt(b_unk));

  // ------------------------------------------------------------ model
  byte_beat_t  a_exp [4], b_exp [3];
  int          a_coll_exp = 0, a_unk_exp = 0, b_coll_exp = 0, b_unk_exp = 0;
  int          off_link = 0;       // bytes delivered to a board other than their link

  function automatic byte_beat_t rnd_beat();
    byte_beat_t x;
    x.valid = ($urandom % 4) != 0;
    x.sop   = 1'($urandom % 2);
    x.eop   = 1'($urandom % 2);
    x.data  = 8'($urandom);
    return x;
  endfunction

  task automatic drive_random(input bit collide);
    @(negedge clk);
    for (int l = 0; l < 4; l++) begin
      a_in[l]  = rnd_beat();
      a_src[l] = {6'($urandom), 2'(l + $urandom % 4)};
    end
    for (int l = 0; l < 3; l++) begin
      b_in[l]  = rnd_beat();
      b_src[l] = {6'($urandom), 2'($urandom)};
    end
    if (!collide) begin
      // distinct boards: a random rotation of the link numbers
      int r;
      r = $urandom % 4;
      for (int l = 0; l < 4; l++) a_src[l][1:0] = 2'((l + r) % 4);
    end
    // model, computed from the inputs of this cycle
    for (int b = 0; b < 4; b++) begin
      a_exp[b] = '0;
      for (int l = 3; l >= 0; l--)
        if (a_in[l].valid && int'(a_src[l][1:0]) == b) a_exp[b] = a_in[l];
    end
    for (int l = 0; l < 4; l++) if (a_in[l].valid) begin
      bit lower = 0;
      for (int m = 0; m < l; m++) if (a_in[m].valid && a_src[m][1:0] == a_src[l][1:0]) lower = 1;
      if (lower) a_coll_exp++;
      else if (int'(a_src[l][1:0]) != l) off_link++;
    end
    for (int b = 0; b < 3; b++) begin
      b_exp[b] = '0;
      for (int l = 2; l >= 0; l--)
        if (b_in[l].valid && int'(b_src[l][1:0]) == b) b_exp[b] = b_in[l];
    end
    for (int l = 0; l < 3; l++) if (b_in[l].valid) begin
      bit lower = 0;
      if (b_src[l][1:0] == 2'd3) b_unk_exp++;
      else begin
        for (int m = 0; m < l; m++) if (b_in[m].valid && b_src[m][1:0] == b_src[l][1:0]) lower = 1;
        if (lower) b_coll_exp++;
      end
    end
    @(posedge clk);
    #1;
    for (int b = 0; b < 4; b++)
      check(a_out[b] == a_exp[b], $sformatf("4x4 board %0d: %p exp %p", b, a_out[b], a_exp[b]));
    for (int b = 0; b < 3; b++)
      check(b_out[b] == b_exp[b], $sformatf("3x3 board %0d: %p exp %p", b, b_out[b], b_exp[b]));
  endtask

  // ------------------------------------------------------------ datagram part
  // boards 1 and 2 share link 0; board 3 sends on link 3
  byte_beat_t got [4][$];
  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 4; b++) if (a_out[b].valid) got[b].push_back(a_out[b]);

  task automatic send_dgram(input int l, input int board, input int len, input int tag);
    for (int j = 0; j < len; j++) begin
      @(negedge clk);
      a_in[l]  = '{valid: 1'b1, sop: (j == 0), eop: (j == len - 1), data: 8'(tag * 16 + j)};
      a_src[l] = 8'(20 + board);
    end
    @(negedge clk);
    a_in[l] = '0;
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 4; l++) begin a_in[l] = '0; a_src[l] = '0; end
    for (int l = 0; l < 3; l++) begin b_in[l] = '0; b_src[l] = '0; end
    repeat (3) @(negedge clk);
    #1;
    for (int b = 0; b < 4; b++) check(a_out[b] == '0, "reset: outputs idle");
    check(a_coll == 0 && a_unk == 0 && b_coll == 0 && b_unk == 0, "reset: counters zero");
    rst_n = 1;

    for (int n = 0; n < 4000; n++) drive_random(($urandom % 4) == 0);
    @(negedge clk);
    for (int l = 0; l < 4; l++) a_in[l] = '0;
    for (int l = 0; l < 3; l++) b_in[l] = '0;
    @(posedge clk);
    #1;
    check(int'(a_coll) == a_coll_exp, $sformatf("4x4 collisions %0d exp %0d", a_coll, a_coll_exp));
    check(int'(a_unk) == 0, "4x4: every address is a board");
    check(int'(b_coll) == b_coll_exp, $sformatf("3x3 collisions %0d exp %0d", b_coll, b_coll_exp));
    check(int'(b_unk) == b_unk_exp, $sformatf("3x3 unknown %0d exp %0d", b_unk, b_unk_exp));

    // datagram part
    repeat (3) @(negedge clk);
    for (int b = 0; b < 4; b++) got[b] = {};
    fork
      for (int d = 0; d < 6; d++) send_dgram(0, 1 + d % 2, 5 + d, d);
      for (int d = 0; d < 3; d++) send_dgram(3, 3, 9, 8 + d);
    join
    repeat (3) @(negedge clk);
    check(got[0].size() == 0, "switch: board 0 silent");
    check(got[1].size() == 5 + 7 + 9, $sformatf("switch: board 1 got %0d bytes", got[1].size()));
    check(got[2].size() == 6 + 8 + 10, $sformatf("switch: board 2 got %0d bytes", got[2].size()));
    check(got[3].size() == 27, $sformatf("switch: board 3 got %0d bytes", got[3].size()));
    foreach (got[1][j]) check(got[1][j].data[7:4] % 2 == 0, "switch: board 1 only its own datagrams");
    foreach (got[2][j]) check(got[2][j].data[7:4] % 2 == 1, "switch: board 2 only its own datagrams");
    check(got[1].size() > 0 && got[1][0].sop && got[1][$].eop, "switch: board 1 whole datagrams");

    $display("mechanisms: collisions=%0d unknown=%0d off-link=%0d", a_coll_exp + b_coll_exp,
             b_unk_exp, off_link);
    check(a_coll_exp > 0 && b_coll_exp > 0, "mechanism: collision");
    check(b_unk_exp > 0, "mechanism: unknown sender");
    check(off_link > 0, "mechanism: board reached over another link");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
