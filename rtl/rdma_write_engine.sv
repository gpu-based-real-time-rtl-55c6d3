// rdma_write_engine: the NIC's memory-copy engine towards GPU or host memory.
//
// Received data is written directly into application buffers in GPU or host
// memory, with no bounce buffer: with peer-to-peer (RDMA) support the GPU's
// memory appears as an ordinary range of PCIe bus addresses, so one kind of
// write request serves both. This block turns a write of any length into
// PCIe memory-write requests.
//
// How it works: a descriptor gives the 4-byte aligned bus address and the
// number of 32-bit words; the words follow on the data port. The engine cuts
// them into requests of at most MAX_PAYLOAD bytes, never crossing a 4 KB
// address boundary (a PCIe rule). The length of each request,
//   min(words left, MAX_PAYLOAD/4, words to the next 4 KB boundary),
// is computed when its first word goes out, and the first beat carries the
// request's address and length beside the data word.
//
// Interface: desc_* and dat_* are valid/ready inputs, tlp/tlp_ready the
// output to the PCIe core (not part of this design). The data path is not
// registered: a word is passed in the cycle tlp_ready accepts it, so the
// engine adds no latency and moves one word per cycle. idle is high when no
// descriptor is being worked on.
// Request splitting rules are PCIe conventions; MAX_PAYLOAD is an assumed
// value, the source only names a hardware RDMA copy engine.
module rdma_write_engine
  import nanet_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        desc_valid,
  output logic        desc_ready,
  input  logic [63:0] desc_addr,
  input  logic [15:0] desc_words,
  input  logic        dat_valid,
  output logic        dat_ready,
  input  logic [31:0] dat_data,
  output tlp_beat_t   tlp,
  input  logic        tlp_ready,
  output logic        idle,
  output logic [31:0] req_cnt
);
  localparam int unsigned MAX_DW = MAX_PAYLOAD / 4;

  logic        busy;
  logic [63:0] addr;       // bus address of the next word
  logic [15:0] left;       // words left in the descriptor
  logic [9:0]  bcnt;       // words already sent of the current request
  logic [9:0]  blen_r;     // length of the current request

  logic [10:0] to_4k;
  logic [15:0] blen_calc;
  logic [9:0]  blen;

  always_comb begin
    to_4k     = 11'((13'd4096 - {1'b0, addr[11:0]}) >> 2);
    blen_calc = left;
    if (blen_calc > 16'(MAX_DW)) blen_calc = 16'(MAX_DW);
    if (blen_calc > {5'd0, to_4k}) blen_calc = {5'd0, to_4k};
    blen = (bcnt == 10'd0) ? blen_calc[9:0] : blen_r;
  end

  assign idle       = !busy;
  assign desc_ready = !busy;
  assign dat_ready  = busy && tlp_ready;

  always_comb begin
    tlp        = '0;
    tlp.valid  = busy && dat_valid;
    tlp.sop    = (bcnt == 10'd0);
    tlp.eop    = (bcnt + 10'd1 == blen);
    tlp.addr   = addr;
    tlp.len_dw = blen;
    tlp.data   = dat_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      addr    <= '0;
      left    <= '0;
      bcnt    <= '0;
      blen_r  <= '0;
      req_cnt <= '0;
    end else if (!busy) begin
      if (desc_valid && desc_words != 16'd0) begin
        busy <= 1'b1;
        addr <= desc_addr;
        left <= desc_words;
        bcnt <= '0;
      end
    end else if (tlp.valid && tlp_ready) begin
      addr <= addr + 64'd4;
      left <= left - 16'd1;
      if (bcnt == 10'd0) begin
        blen_r  <= blen;
        req_cnt <= req_cnt + 1;
      end
      if (tlp.eop) bcnt <= '0;
      else         bcnt <= bcnt + 10'd1;
      if (left == 16'd1) busy <= 1'b0;
    end
  end

  // Each request is at most MAX_PAYLOAD bytes and stays inside one 4 KB page.
  assert property (@(posedge clk) disable iff (!rst_n)
                   tlp.valid && tlp.sop |-> tlp.len_dw != 0 && tlp.len_dw <= 10'(MAX_DW)
                   && ({1'b0, tlp.addr[11:0]} + {1'b0, tlp.len_dw, 2'b00}) <= 13'd4096);
endmodule
