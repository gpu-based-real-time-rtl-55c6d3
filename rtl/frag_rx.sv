// frag_rx: event-fragment parser and store for one readout-board link.
//
// Each readout board sends timestamped event fragments inside UDP datagrams.
// This block cuts the payload byte stream into fragments and keeps complete
// ones for the event merger, in two FIFOs: one holding a header per fragment
// (timestamp, hit count), one holding the hit words of all stored fragments.
//
// Fragment format (this design's choice; the format is not published with the
// trigger description): big-endian 32-bit words
//   word 0        timestamp
//   word 1        hit count in bits 15:0 (bits 31:16 ignored)
//   words 2..n+1  one hit word each
// and a datagram may carry several fragments back to back.
//
// How it works: bytes are shifted into a 32-bit word; each completed word
// steps a small parser (timestamp, count, hits). Hits are written at a
// speculative write pointer; the pointer seen by the reader only moves, and
// the header is only pushed, when the fragment's last hit has been stored.
// A fragment is dropped whole (speculative pointer rolled back, drop_cnt
// incremented) when the datagram ends inside it, when it declares more than
// MAX_HITS hits, or when either FIFO has no room for it. After a count above
// MAX_HITS the rest of that datagram is skipped, since its framing can no
// longer be trusted. A new datagram always starts a new fragment.
//
// Interface: `in` is the payload byte stream of udp_rx (no back-pressure).
// hdr_valid/hdr_head/hdr_pop and hit_valid/hit_data/hit_pop are show-ahead
// FIFO heads. A fragment's header becomes visible on the cycle after its last
// byte arrives, together with all of its hits.
module frag_rx
  import nanet_pkg::*;
#(
  parameter int unsigned HIT_DEPTH = 256,
  parameter int unsigned HDR_DEPTH = 16,
  parameter int unsigned MAX_HITS  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  byte_beat_t  in,
  output logic        hdr_valid,
  output frag_hdr_t   hdr_head,
  input  logic        hdr_pop,
  output logic        hit_valid,
  output logic [31:0] hit_data,
  input  logic        hit_pop,
  output logic [31:0] frag_cnt,
  output logic [31:0] drop_cnt
);
  localparam int unsigned AW = $clog2(HIT_DEPTH);

  typedef enum logic [1:0] {P_TS, P_CNT, P_HIT, P_BAD} pstate_t;

  // ---------------------------------------------------------------- hit store
  logic [31:0] hit_mem [HIT_DEPTH];
  logic [AW:0] wp_spec, wp_com, rp;
  logic        hit_full;

  assign hit_full  = ((wp_spec - rp) == (AW+1)'(HIT_DEPTH));
  assign hit_valid = (rp != wp_com);
  assign hit_data  = hit_mem[rp[AW-1:0]];

  // ------------------------------------------------------------- header store
  logic      hdr_wr, hdr_full, hdr_empty;
  frag_hdr_t hdr_wdata;

  sync_fifo #(.W($bits(frag_hdr_t)), .DEPTH(HDR_DEPTH)) u_hdr (
    .clk, .rst_n,
    .wr_en(hdr_wr), .wr_data(hdr_wdata),
    .rd_en(hdr_pop), .rd_data(hdr_head),
    .empty(hdr_empty), .full(hdr_full), .count()
  );
  assign hdr_valid = !hdr_empty;

  // ------------------------------------------------------------------- parser
  pstate_t     state, state_n;
  logic [1:0]  bpos;            // bytes of the current word already held
  logic [23:0] sh;              // bytes of the current word so far
  logic [31:0] ts;
  logic [15:0] nhits, left;
  logic        ovf;             // a hit of this fragment found the store full

  logic        word_done;
  logic [31:0] word;
  logic        hit_wr, commit, rollback, drop;
  logic [AW:0] wp_spec_n;

  always_comb begin
    word_done = in.valid && !in.sop && (bpos == 2'd3);
    word      = {sh, in.data};
    state_n   = state;
    hit_wr    = 1'b0;
    commit    = 1'b0;
    rollback  = 1'b0;
    drop      = 1'b0;
    hdr_wr    = 1'b0;
    hdr_wdata = '{ts: ts, nhits: nhits};

    if (in.valid && in.sop) begin
      state_n  = P_TS;
      rollback = (state == P_CNT || state == P_HIT);   // no eop seen: unfinished fragment
      drop     = rollback;
    end else if (word_done) begin
      unique case (state)
        P_TS:  state_n = P_CNT;
        P_CNT: begin
          if (word[15:0] > 16'(MAX_HITS)) begin
            drop    = 1'b1;
            state_n = P_BAD;
          end else if (word[15:0] == 16'd0) begin
            hdr_wdata = '{ts: ts, nhits: 16'd0};
            if (hdr_full) drop = 1'b1;
            else          hdr_wr = 1'b1;
            state_n = P_TS;
          end else begin
            state_n = P_HIT;
          end
        end
        P_HIT: begin
          hit_wr = !hit_full && !ovf;
          if (left == 16'd1) begin
            state_n = P_TS;
            if (ovf || hit_full || hdr_full) begin
              rollback = 1'b1;
              drop     = 1'b1;
            end else begin
              commit = 1'b1;
              hdr_wr = 1'b1;
            end
          end
        end
        P_BAD: ;
        default: state_n = P_TS;
      endcase
    end

    // End of datagram inside a fragment: drop it.
    if (in.valid && in.eop && !in.sop) begin
      if (state_n == P_CNT || state_n == P_HIT) begin
        rollback = 1'b1;
        drop     = 1'b1;
        commit   = 1'b0;
        hit_wr   = 1'b0;
      end
      state_n = P_TS;
    end

    wp_spec_n = wp_spec + (AW+1)'(hit_wr);
  end

  always_ff @(posedge clk) begin
    if (hit_wr) hit_mem[wp_spec[AW-1:0]] <= word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= P_TS;
      bpos     <= '0;
      sh       <= '0;
      ts       <= '0;
      nhits    <= '0;
      left     <= '0;
      ovf      <= 1'b0;
      wp_spec  <= '0;
      wp_com   <= '0;
      rp       <= '0;
      frag_cnt <= '0;
      drop_cnt <= '0;
    end else begin
      state <= state_n;
      if (in.valid) begin
        bpos <= in.sop ? 2'd1 : bpos + 2'd1;
        sh   <= {sh[15:0], in.data};
      end
      if (word_done && state == P_TS)  ts <= word;
      if (word_done && state == P_CNT) begin
        nhits <= word[15:0];
        left  <= word[15:0];
        ovf   <= 1'b0;
      end
      if (word_done && state == P_HIT) begin
        left <= left - 16'd1;
        if (hit_full) ovf <= 1'b1;
      end
      if (rollback)    wp_spec <= wp_com;
      else             wp_spec <= wp_spec_n;
      if (commit)      wp_com  <= wp_spec_n;
      if (hit_pop && hit_valid) rp <= rp + 1'b1;
      if (hdr_wr)      frag_cnt <= frag_cnt + 1;
      if (drop)        drop_cnt <= drop_cnt + 1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) hit_pop |-> hit_valid);
endmodule
