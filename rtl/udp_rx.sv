// udp_rx: hardware UDP/IPv4 receive offload for one Ethernet link.
//
// NaNet handles the network protocols in hardware so that no operating system
// sits in the latency path; its links carry UDP. This block does that for one
// link: it watches the byte stream delivered by the MAC, checks the Ethernet,
// IPv4 and UDP headers, and forwards only the UDP payload bytes.
//
// How it works: a byte counter walks the 42 header bytes (14 Ethernet, 20
// IPv4 without options, 8 UDP). On the way it checks EtherType 0x0800,
// version/IHL 0x45, protocol 17 and the UDP destination port against
// cfg_udp_port, and latches the UDP length. If every check holds, the next
// (UDP length - 8) bytes are forwarded with sop on the first and eop on the
// last; bytes after that (Ethernet padding) are discarded. A frame that fails
// a check, or whose UDP payload is empty, is counted in drop_cnt and dropped.
//
// Interface: `in` is one byte per cycle with sop/eop framing, as from a GbE
// MAC. `out` is registered: a payload byte appears one cycle after it
// entered. out_src holds the last byte of the sender's IPv4 address for the
// whole payload; it tells which readout board sent the datagram when several
// boards share one link through a switch. There is no back-pressure; a link cannot be stalled.
// The header checks and the rule of cutting at the UDP length are this
// design's choices; the MAC is assumed to pass only frames with a good FCS.
module udp_rx
  import nanet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  byte_beat_t  in,
  input  logic [15:0] cfg_udp_port,
  output byte_beat_t  out,
  output logic [7:0]  out_src,
  output logic [31:0] drop_cnt,
  output logic [31:0] frame_cnt
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY, S_SKIP} state_t;

  state_t      state;
  logic [5:0]  idx;          // header byte index of the current byte
  logic        hdr_ok;       // all checks so far passed
  logic [7:0]  hi_byte;      // previous byte, for 16-bit fields
  logic [15:0] pay_left;     // payload bytes still to forward
  logic [15:0] udp_len_at_start;

  // Checks applied to the byte at header index i (prev = byte at i-1).
  function automatic logic byte_ok(input logic [5:0] i, input logic [7:0] b,
                                   input logic [7:0] prev, input logic [15:0] port);
    case (i)
      6'd13:   return {prev, b} == 16'h0800;   // EtherType IPv4
      6'd14:   return b == 8'h45;              // version 4, IHL 5
      6'd23:   return b == 8'd17;              // protocol UDP
      6'd37:   return {prev, b} == port;       // UDP destination port
      default: return 1'b1;
    endcase
  endfunction

  logic        cur_ok;
  logic [15:0] udp_len;
  always_comb begin
    cur_ok  = byte_ok(in.sop ? 6'd0 : idx, in.data, hi_byte, cfg_udp_port);
    udp_len = {hi_byte, in.data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      hdr_ok    <= 1'b0;
      hi_byte   <= '0;
      pay_left  <= '0;
      out       <= '0;
      out_src   <= '0;
      drop_cnt  <= '0;
      frame_cnt <= '0;
    end else begin
      out.valid <= 1'b0;
      out.sop   <= 1'b0;
      out.eop   <= 1'b0;
      if (in.valid) begin
        hi_byte <= in.data;
        if (in.sop) begin
          frame_cnt <= frame_cnt + 1;
          state     <= in.eop ? S_IDLE : S_HDR;
          idx       <= 6'd1;
          hdr_ok    <= 1'b1;
          if (in.eop) drop_cnt <= drop_cnt + 1;
        end else begin
          unique case (state)
            S_IDLE: ;  // stray byte outside a frame: ignore
            S_HDR: begin
              idx <= idx + 6'd1;
              if (idx == 6'd39) begin
                // second byte of the UDP length field
                pay_left <= udp_len - 16'd8;
                if (!(hdr_ok && cur_ok) || udp_len <= 16'd8) begin
                  drop_cnt <= drop_cnt + 1;
                  state    <= in.eop ? S_IDLE : S_SKIP;
                end
              end else if (idx == 6'd41) begin
                state <= in.eop ? S_IDLE : S_PAY;
                if (in.eop) drop_cnt <= drop_cnt + 1;   // no payload arrived
              end else begin
                hdr_ok <= hdr_ok && cur_ok;
                if (idx == 6'd29) out_src <= in.data;  // last byte of source IP
                if (in.eop) begin
                  drop_cnt <= drop_cnt + 1;            // runt frame
                  state    <= S_IDLE;
                end
              end
            end
            S_PAY: begin
              out.valid <= 1'b1;
              out.data  <= in.data;
              out.sop   <= (pay_left == udp_len_at_start);
              out.eop   <= (pay_left == 16'd1) || in.eop;
              pay_left  <= pay_left - 16'd1;
              if (pay_left == 16'd1) state <= in.eop ? S_IDLE : S_SKIP;
              else if (in.eop)       state <= S_IDLE;
            end
            S_SKIP: if (in.eop) state <= S_IDLE;
            default: state <= S_IDLE;
          endcase
        end
      end
    end
  end

  // Payload length latched at the end of the header, to mark the first byte.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       udp_len_at_start <= '0;
    else if (in.valid && !in.sop && state == S_HDR && idx == 6'd39) udp_len_at_start <= udp_len - 16'd8;
  end

endmodule
