// clop_manager: places events into a circular list of persistent receive
// buffers (CLOP) in GPU or host memory and tells the host when one is ready.
//
// The host registers a ring of receive buffers once; the NIC then writes
// incoming events straight into them (zero copy), one buffer after another.
// A buffer is handed to the host ("closed") when it is full or when a
// configurable gathering time has passed since its first event, so the GPU
// receives data in batches of bounded age. A closed buffer belongs to the
// host until the host hands it back; the NIC never overwrites it.
//
// How it works: `cur` is the buffer being filled and `fill` its fill level in
// 32-bit words. For each event (its length arrives with the first word on
// in_len) the manager
//   - drops it if it is longer than a whole buffer, or if the current buffer
//     is still owned by the host (overflow: the consumer is too slow);
//   - closes the current buffer first if the event does not fit in what is
//     left, then retries the event in the next buffer;
//   - otherwise sends one descriptor (bus address base[cur] + 4*fill, length)
//     to the RDMA engine, streams the event words after it and advances fill;
//     a buffer filled exactly is closed at once.
// The gathering timer starts with the first event of a buffer; when it
// reaches cfg_frame cycles the buffer is closed between events. A close waits
// until the RDMA engine is idle, so the report never overtakes the data; it
// then pulses comp_valid with the buffer index and byte count, clears the
// buffer's ownership bit and moves to the next buffer of the ring
// (cfg_nbuf buffers in use, of cfg_buf_words words each).
// rel_valid/rel_idx hands a buffer to the NIC (registration and return).
//
// Interface: in/in_ready valid/ready; desc_* and dat_* valid/ready towards the
// RDMA engine. Timing: one cycle to decide, one for the descriptor, then one
// word per cycle as the RDMA engine accepts them.
// Ring, full and timeout closing follow the source; the exact closing rules,
// dropping and the ownership handshake are this design's choices.
module clop_manager
  import nanet_pkg::*;
#(
  parameter int unsigned N_BUF       = 8,
  parameter int unsigned BUF_BYTES   = 8192
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  logic [$clog2(N_BUF):0]     cfg_nbuf,
  input  logic [15:0]                cfg_buf_words,
  input  logic [31:0]                cfg_frame,
  input  logic [63:0]                cfg_base [N_BUF],
  input  logic                       rel_valid,
  input  logic [$clog2(N_BUF)-1:0]   rel_idx,
  // merged events
  input  word_beat_t                 in,
  input  logic [15:0]                in_len,
  output logic                       in_ready,
  // to the RDMA engine
  output logic                       desc_valid,
  input  logic                       desc_ready,
  output logic [63:0]                desc_addr,
  output logic [15:0]                desc_words,
  output logic                       dat_valid,
  input  logic                       dat_ready,
  output logic [31:0]                dat_data,
  input  logic                       dma_idle,
  // to the host
  output logic                       comp_valid,
  output logic [$clog2(N_BUF)-1:0]   comp_idx,
  output logic [31:0]                comp_bytes,
  output logic                       comp_timeout,
  output logic [N_BUF-1:0]           nic_owned,
  output logic [31:0]                drop_cnt,
  output logic [31:0]                close_full_cnt,
  output logic [31:0]                close_time_cnt
);
  localparam int unsigned IW = $clog2(N_BUF);
  localparam int unsigned MAX_WORDS = BUF_BYTES / 4;

  typedef enum logic [2:0] {C_IDLE, C_DESC, C_DATA, C_DROP, C_CLOSE} cstate_t;

  cstate_t     state;
  logic [IW-1:0] cur;
  logic [15:0] fill;
  logic [15:0] len;
  logic [31:0] timer;
  logic        close_by_time;
  logic [15:0] buf_words;

  // A buffer size above the built maximum, or zero, is taken as the maximum.
  assign buf_words = (cfg_buf_words == 16'd0 || cfg_buf_words > 16'(MAX_WORDS))
                     ? 16'(MAX_WORDS) : cfg_buf_words;

  logic [IW-1:0] cur_next;
  always_comb begin
    if ({1'b0, cur} + 1'b1 >= cfg_nbuf) cur_next = '0;
    else                                cur_next = cur + 1'b1;
  end

  logic time_up;
  assign time_up = (fill != 16'd0) && (timer >= cfg_frame);

  // ------------------------------------------------------------- outputs
  always_comb begin
    in_ready   = 1'b0;
    desc_valid = (state == C_DESC);
    desc_addr  = cfg_base[cur] + {46'd0, fill, 2'b00};
    desc_words = len;
    dat_valid  = 1'b0;
    dat_data   = in.data;
    unique case (state)
      C_DATA: begin
        dat_valid = in.valid;
        in_ready  = dat_ready;
      end
      C_DROP:  in_ready = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= C_IDLE;
      cur            <= '0;
      fill           <= '0;
      len            <= '0;
      timer          <= '0;
      close_by_time  <= 1'b0;
      nic_owned      <= '0;
      comp_valid     <= 1'b0;
      comp_idx       <= '0;
      comp_bytes     <= '0;
      comp_timeout   <= 1'b0;
      drop_cnt       <= '0;
      close_full_cnt <= '0;
      close_time_cnt <= '0;
    end else begin
      comp_valid <= 1'b0;
      if (fill != 16'd0 && timer != 32'hFFFF_FFFF) timer <= timer + 1;

      unique case (state)
        C_IDLE: begin
          if (time_up) begin
            state         <= C_CLOSE;
            close_by_time <= 1'b1;
          end else if (in.valid && in.sop) begin
            len <= in_len;
            if (in_len > buf_words || in_len == 16'd0 || !nic_owned[cur]) begin
              state    <= C_DROP;
              drop_cnt <= drop_cnt + 1;
            end else if (fill + in_len > buf_words) begin
              state         <= C_CLOSE;
              close_by_time <= 1'b0;
            end else begin
              state <= C_DESC;
            end
          end
        end
        C_DESC: if (desc_ready) begin
          state <= C_DATA;
          fill  <= fill + len;
        end
        C_DATA: if (in.valid && dat_ready && in.eop) begin
          if (fill == buf_words) begin
            state         <= C_CLOSE;
            close_by_time <= 1'b0;
          end else begin
            state <= C_IDLE;
          end
        end
        C_DROP: if (in.valid && in.eop) state <= C_IDLE;
        C_CLOSE: if (dma_idle) begin
          comp_valid     <= 1'b1;
          comp_idx       <= cur;
          comp_bytes     <= {14'd0, fill, 2'b00};
          comp_timeout   <= close_by_time;
          nic_owned[cur] <= 1'b0;
          cur            <= cur_next;
          fill           <= '0;
          timer          <= '0;
          state          <= C_IDLE;
          if (close_by_time) close_time_cnt <= close_time_cnt + 1;
          else               close_full_cnt <= close_full_cnt + 1;
        end
        default: state <= C_IDLE;
      endcase

      // hand-back from the host wins over a close in the same cycle
      if (rel_valid) nic_owned[rel_idx] <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) desc_valid && !desc_ready |=> desc_valid);
endmodule
