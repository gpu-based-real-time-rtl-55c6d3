// event_merger: fuses fragments of the same time window from N readout boards.
//
// Every readout board timestamps its event fragments. Fragments from
// different boards whose timestamps fall in the same time window belong to
// one physics event and are fused into a single event that describes the
// whole detector. Doing this on the GPU needs serialisation and is slow, so
// here it is done in hardware, between the links and the receive buffers.
//
// How it works: each board's frag_rx presents its oldest complete fragment
// header (timestamp, hit count). The merger waits until every enabled board
// has a header ready, or until cfg_wait cycles have passed since the first
// header appeared (a board may send nothing for a window). It then takes the
// smallest timestamp T among the ready headers and selects every ready board
// whose timestamp t has (t - T) < cfg_window (32-bit modular difference).
// The fused event is written out as
//   word 0   T
//   word 1   {selected board mask [7:0], 8'h00, total hit count [15:0]}
//   then the hits of the selected boards, lowest board first,
// and each selected board's header and hits are popped. Fragments outside the
// window stay for a later event. The event length (2 + total hits) is given
// on out_len with the first word, so the buffer manager can place the event
// before it arrives.
//
// Interface: out/out_ready is a valid/ready word stream; the word stays
// stable while out_ready is low. Timing: one decision cycle per event, then
// one word per cycle while out_ready is high.
// The waiting rule, the header layout and the window test are this design's
// choices; fusing by time window is the function the source describes.
module event_merger
  import nanet_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        cfg_enable,
  input  logic [31:0]         cfg_window,
  input  logic [31:0]         cfg_wait,
  input  logic [N-1:0]        hdr_valid,
  input  frag_hdr_t           hdr_head [N],
  output logic [N-1:0]        hdr_pop,
  input  logic [N-1:0]        hit_valid,
  input  logic [31:0]         hit_data [N],
  output logic [N-1:0]        hit_pop,
  output word_beat_t          out,
  output logic [15:0]         out_len,
  input  logic                out_ready,
  output logic [31:0]         event_cnt,
  output logic [31:0]         timeout_cnt,
  output logic [31:0]         partial_cnt
);
  localparam int unsigned LW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [2:0] {M_IDLE, M_H0, M_H1, M_HITS, M_POP} mstate_t;

  mstate_t     state;
  logic [31:0] wait_cnt;
  logic [31:0] t_sel;
  logic [N-1:0] sel;
  logic [15:0] total;
  logic [15:0] left;        // hits left of the current link
  logic [LW-1:0] cur;       // link being copied

  // ------------------------------------------------ decision (combinational)
  logic [N-1:0] ready_m;
  logic         all_ready, any_ready;
  logic [31:0]  t_min;
  logic [N-1:0] sel_n;
  logic [15:0]  total_n;
  logic [N-1:0] with_hits_n;   // selected links that carry at least one hit

  always_comb begin
    ready_m   = hdr_valid & cfg_enable;
    any_ready = |ready_m;
    all_ready = (ready_m == cfg_enable) && any_ready;
    // smallest timestamp, measured from the first ready link so that a
    // counter wrap between boards is tolerated
    t_min = '0;
    begin : find_min
      logic found;
      found = 1'b0;
      for (int i = 0; i < N; i++) begin
        if (ready_m[i]) begin
          if (!found) begin
            t_min = hdr_head[i].ts;
            found = 1'b1;
          end else if ($signed(hdr_head[i].ts - t_min) < 0) begin
            t_min = hdr_head[i].ts;
          end
        end
      end
    end
    sel_n       = '0;
    with_hits_n = '0;
    total_n     = '0;
    for (int i = 0; i < N; i++) begin
      if (ready_m[i] && ((hdr_head[i].ts - t_min) < cfg_window)) begin
        sel_n[i]       = 1'b1;
        with_hits_n[i] = (hdr_head[i].nhits != 16'd0);
        total_n        = total_n + hdr_head[i].nhits;
      end
    end
  end

  logic go;
  assign go = (state == M_IDLE) && any_ready && (all_ready || wait_cnt >= cfg_wait);

  // Next selected link at or after index `from`, and the last selected one.
  function automatic logic [LW-1:0] next_sel(input logic [N-1:0] m, input int from);
    logic [LW-1:0] r;
    r = '0;
    for (int i = N - 1; i >= 0; i--) if (m[i] && i >= from) r = LW'(i);
    return r;
  endfunction

  logic [N-1:0] sel_rest;   // selected links not yet copied
  logic         beat;
  assign beat = out.valid && out_ready;

  // -------------------------------------------------------------- outputs
  always_comb begin
    out       = '0;
    out_len   = total + 16'd2;
    hit_pop   = '0;
    hdr_pop   = '0;
    unique case (state)
      M_H0: begin
        out.valid = 1'b1;
        out.sop   = 1'b1;
        out.data  = t_sel;
      end
      M_H1: begin
        out.valid = 1'b1;
        out.data  = {8'(sel), 8'h00, total};
        out.eop   = (total == 16'd0);
      end
      M_HITS: begin
        out.valid = hit_valid[cur];
        out.data  = hit_data[cur];
        out.eop   = (left == 16'd1) && ((sel_rest & ~(N'(1) << cur)) == '0);
        hit_pop[cur] = beat;
      end
      M_POP: hdr_pop = sel;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= M_IDLE;
      wait_cnt    <= '0;
      t_sel       <= '0;
      sel         <= '0;
      sel_rest    <= '0;
      total       <= '0;
      left        <= '0;
      cur         <= '0;
      event_cnt   <= '0;
      timeout_cnt <= '0;
      partial_cnt <= '0;
    end else begin
      unique case (state)
        M_IDLE: begin
          if (any_ready && !all_ready) wait_cnt <= wait_cnt + 1;
          else                         wait_cnt <= '0;
          if (go) begin
            state    <= M_H0;
            wait_cnt <= '0;
            t_sel    <= t_min;
            sel      <= sel_n;
            sel_rest <= with_hits_n;
            total    <= total_n;
            if (!all_ready) timeout_cnt <= timeout_cnt + 1;
            if (sel_n != cfg_enable) partial_cnt <= partial_cnt + 1;
          end
        end
        M_H0: if (out_ready) state <= M_H1;
        M_H1: if (out_ready) begin
          if (total == 16'd0) state <= M_POP;
          else begin
            state <= M_HITS;
            cur   <= next_sel(sel_rest, 0);
            left  <= hdr_head[next_sel(sel_rest, 0)].nhits;
          end
        end
        M_HITS: if (beat) begin
          if (left == 16'd1) begin
            // this link is done; move to the next one with hits left
            logic [N-1:0] rest;
            rest = sel_rest & ~(N'(1) << cur);
            sel_rest <= rest;
            if (rest == '0) state <= M_POP;
            else begin
              cur  <= next_sel(rest, 0);
              left <= hdr_head[next_sel(rest, 0)].nhits;
            end
          end else begin
            left <= left - 16'd1;
          end
        end
        M_POP: begin
          state     <= M_IDLE;
          event_cnt <= event_cnt + 1;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // Handshake rule: a word offered is held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out.valid && !out_ready |=> out.valid && $stable(out.data));
endmodule
