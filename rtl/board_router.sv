// board_router: sorts UDP payloads from the links into one stream per
// readout board.
//
// The readout boards may reach the NIC on links of their own, or several of
// them may share one link through an Ethernet switch. Fusing by time window
// needs one time-ordered fragment stream per board, so the payload of each
// datagram is steered by its sender, not by the link it came in on.
//
// How it works: udp_rx gives, with every payload byte, the last byte of the
// sender's IPv4 address. Its low log2(N_BOARDS) bits are the board number
// (boards are given consecutive addresses). Each board output takes the byte
// of the lowest-numbered link that carries a byte for that board in this
// cycle. A board normally sends on one link only; if two links carry bytes for
// the same board in the same cycle, the higher link's byte is lost and
// collision_cnt counts it (a wiring or address error). An address whose board
// number is N_BOARDS or more is discarded and counted in unknown_cnt.
// Because each link delivers whole datagrams one after another, every board
// stream still consists of whole datagrams.
//
// Interface: in[] / in_src[] from udp_rx; out[] byte streams to frag_rx.
// Timing: registered, one cycle from input to output.
// Steering by source address is this design's choice; the source shows the
// boards reaching the NIC both directly and through a switch.
module board_router
  import nanet_pkg::*;
#(
  parameter int unsigned N_LINKS  = 4,
  parameter int unsigned N_BOARDS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  byte_beat_t  in [N_LINKS],
  input  logic [7:0]  in_src [N_LINKS],
  output byte_beat_t  out [N_BOARDS],
  output logic [31:0] collision_cnt,
  output logic [31:0] unknown_cnt
);
  localparam int unsigned BW = (N_BOARDS > 1) ? $clog2(N_BOARDS) : 1;

  byte_beat_t  sel [N_BOARDS];
  logic [N_LINKS-1:0] taken;        // link byte delivered to some board
  logic [N_LINKS-1:0] unknown;      // link byte for no board

  // board number: low bits of the sender's address byte (upper bits unused)
  function automatic logic [BW-1:0] board_of(input logic [7:0] src);
    return src[BW-1:0];
  endfunction

  always_comb begin
    for (int l = 0; l < N_LINKS; l++) begin
      unknown[l] = in[l].valid && (32'(board_of(in_src[l])) >= N_BOARDS);
      // a link wins its board unless a lower link has a byte for it too
      taken[l] = in[l].valid && !unknown[l];
      for (int m = 0; m < l; m++)
        if (in[m].valid && board_of(in_src[m]) == board_of(in_src[l])) taken[l] = 1'b0;
    end
    for (int b = 0; b < N_BOARDS; b++) begin
      sel[b] = '0;
      for (int l = 0; l < N_LINKS; l++)
        if (taken[l] && 32'(board_of(in_src[l])) == b) sel[b] = in[l];
    end
  end

  // number of link bytes lost this cycle
  logic [$clog2(N_LINKS+1)-1:0] lost, nunk;
  always_comb begin
    lost = '0;
    nunk = '0;
    for (int l = 0; l < N_LINKS; l++) begin
      if (in[l].valid && !taken[l] && !unknown[l]) lost = lost + 1'b1;
      if (unknown[l]) nunk = nunk + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BOARDS; b++) out[b] <= '0;
      collision_cnt <= '0;
      unknown_cnt   <= '0;
    end else begin
      for (int b = 0; b < N_BOARDS; b++) out[b] <= sel[b];
      collision_cnt <= collision_cnt + 32'(lost);
      unknown_cnt   <= unknown_cnt + 32'(nunk);
    end
  end
endmodule
