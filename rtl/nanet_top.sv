// nanet_top: receive path of a NaNet-style GPU-direct NIC for a low-level
// trigger.
//
// Readout boards send timestamped event fragments over N_LINKS Ethernet links
// as UDP datagrams. The NIC strips the network protocol in hardware, fuses
// fragments of the same time window from different boards into one event,
// and writes the events straight into a ring of receive buffers in GPU (or
// host) memory, telling the host each time a buffer is ready for the ring
// reconstruction kernel. Chain:
//
//   rx[0] -> udp_rx --+                +-> frag_rx (board 0) --+
//    ...              +-> board_router +-> ...                 +-> event_merger
//   rx[L] -> udp_rx --+                +-> frag_rx (board B) --+        |
//                                                                       v
//   tlp <- rdma_write_engine <- clop_manager <----------------------------+
//                                   ^    +--> comp_* (buffer ready)
//            ctrl_regs (host writes)+
//
// Boards may have a link each (the default: N_BOARDS = N_LINKS = 4) or share
// links through a switch; board_router steers each datagram by its sender.
//
// Interface: rx[] are the receive byte streams of the Ethernet MACs (not part
// of this design); tlp/tlp_ready goes to the PCIe core (not part of this
// design); reg_* are host register writes (see ctrl_regs); comp_* report a
// closed buffer. Everything runs on one clock; a board would need
// clock-domain crossings at the MACs and the PCIe core.
// Latency: a fragment is stored two cycles after its last byte (one in the
// router, one in the store); the merger then needs every enabled board (or
// the wait limit), one decision cycle and
// two header cycles before the first hit leaves; the buffer manager adds two
// cycles per event; the RDMA engine adds none.
// Board and link count, buffer size and the gathering time follow the source; the
// structure inside each block is this design's own.
module nanet_top
  import nanet_pkg::*;
#(
  parameter int unsigned N_LINKS     = 4,
  parameter int unsigned N_BOARDS    = 4,
  parameter int unsigned N_BUF       = 8,
  parameter int unsigned BUF_BYTES   = 8192,
  parameter int unsigned TIMEOUT_RST = 50000,
  parameter int unsigned HIT_DEPTH   = 256,
  parameter int unsigned HDR_DEPTH   = 16,
  parameter int unsigned MAX_HITS    = 64,
  parameter int unsigned MAX_PAYLOAD = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  byte_beat_t                rx [N_LINKS],
  input  logic                      reg_wr,
  input  logic [7:0]                reg_addr,
  input  logic [31:0]               reg_data,
  output tlp_beat_t                 tlp,
  input  logic                      tlp_ready,
  output logic                      comp_valid,
  output logic [$clog2(N_BUF)-1:0]  comp_idx,
  output logic [31:0]               comp_bytes,
  output logic                      comp_timeout,
  // statistics
  output logic [31:0]               udp_drop_cnt [N_LINKS],
  output logic [31:0]               frag_drop_cnt [N_BOARDS],
  output logic [31:0]               route_collision_cnt,
  output logic [31:0]               event_cnt,
  output logic [31:0]               merge_timeout_cnt,
  output logic [31:0]               merge_partial_cnt,
  output logic [31:0]               buf_drop_cnt,
  output logic [31:0]               close_full_cnt,
  output logic [31:0]               close_time_cnt,
  output logic [31:0]               req_cnt
);
  // ------------------------------------------------------------ registers
  logic [15:0]              udp_port;
  logic [N_BOARDS-1:0]      board_en;
  logic [31:0]              mrg_window, mrg_wait, frame_time;
  logic [15:0]              buf_words;
  logic [$clog2(N_BUF):0]   nbuf;
  logic [63:0]              base [N_BUF];
  logic                     rel_valid;
  logic [$clog2(N_BUF)-1:0] rel_idx;

  ctrl_regs #(.N_BOARDS(N_BOARDS), .N_BUF(N_BUF), .BUF_BYTES(BUF_BYTES),
              .TIMEOUT_RST(TIMEOUT_RST)) u_regs (
    .clk, .rst_n,
    .wr_en(reg_wr), .wr_addr(reg_addr), .wr_data(reg_data),
    .udp_port, .board_en, .mrg_window, .mrg_wait, .frame_time,
    .buf_words, .nbuf, .base, .rel_valid, .rel_idx
  );

  // ---------------------------------------------------------------- links
  byte_beat_t          pay [N_LINKS];
  logic [7:0]          pay_src [N_LINKS];

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    udp_rx u_udp (
      .clk, .rst_n,
      .in(rx[i]), .cfg_udp_port(udp_port),
      .out(pay[i]), .out_src(pay_src[i]), .drop_cnt(udp_drop_cnt[i]), .frame_cnt()
    );
  end

  // --------------------------------------------------------------- boards
  byte_beat_t           bpay [N_BOARDS];
  logic [N_BOARDS-1:0]  hdr_valid, hdr_pop, hit_valid, hit_pop;
  frag_hdr_t            hdr_head [N_BOARDS];
  logic [31:0]          hit_data [N_BOARDS];

  board_router #(.N_LINKS(N_LINKS), .N_BOARDS(N_BOARDS)) u_route (
    .clk, .rst_n, .in(pay), .in_src(pay_src), .out(bpay),
    .collision_cnt(route_collision_cnt), .unknown_cnt()
  );

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_board
    frag_rx #(.HIT_DEPTH(HIT_DEPTH), .HDR_DEPTH(HDR_DEPTH), .MAX_HITS(MAX_HITS)) u_frag (
      .clk, .rst_n,
      .in(bpay[b]),
      .hdr_valid(hdr_valid[b]), .hdr_head(hdr_head[b]), .hdr_pop(hdr_pop[b]),
      .hit_valid(hit_valid[b]), .hit_data(hit_data[b]), .hit_pop(hit_pop[b]),
      .frag_cnt(), .drop_cnt(frag_drop_cnt[b])
    );
  end

  // --------------------------------------------------------------- merger
  word_beat_t  ev;
  logic [15:0] ev_len;
  logic        ev_ready;

  event_merger #(.N(N_BOARDS)) u_merge (
    .clk, .rst_n,
    .cfg_enable(board_en), .cfg_window(mrg_window), .cfg_wait(mrg_wait),
    .hdr_valid, .hdr_head, .hdr_pop,
    .hit_valid, .hit_data, .hit_pop,
    .out(ev), .out_len(ev_len), .out_ready(ev_ready),
    .event_cnt, .timeout_cnt(merge_timeout_cnt), .partial_cnt(merge_partial_cnt)
  );

  // ------------------------------------------------------ buffer manager
  logic        desc_valid, desc_ready, dat_valid, dat_ready, dma_idle;
  logic [63:0] desc_addr;
  logic [15:0] desc_words;
  logic [31:0] dat_data;

  clop_manager #(.N_BUF(N_BUF), .BUF_BYTES(BUF_BYTES)) u_clop (
    .clk, .rst_n,
    .cfg_nbuf(nbuf), .cfg_buf_words(buf_words), .cfg_frame(frame_time),
    .cfg_base(base), .rel_valid, .rel_idx,
    .in(ev), .in_len(ev_len), .in_ready(ev_ready),
    .desc_valid, .desc_ready, .desc_addr, .desc_words,
    .dat_valid, .dat_ready, .dat_data, .dma_idle,
    .comp_valid, .comp_idx, .comp_bytes, .comp_timeout, .nic_owned(),
    .drop_cnt(buf_drop_cnt), .close_full_cnt, .close_time_cnt
  );

  // ----------------------------------------------------------------- RDMA
  rdma_write_engine #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_rdma (
    .clk, .rst_n,
    .desc_valid, .desc_ready, .desc_addr, .desc_words,
    .dat_valid, .dat_ready, .dat_data,
    .tlp, .tlp_ready, .idle(dma_idle), .req_cnt
  );
endmodule
