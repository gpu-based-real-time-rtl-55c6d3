// sync_fifo: single-clock show-ahead FIFO.
//
// Holds up to DEPTH words of W bits. The oldest word is always visible on
// rd_data while empty is low; rd_en pops it. wr_en pushes wr_data unless the
// FIFO is full (a push into a full FIFO is ignored; callers check full).
// Pointers are one bit wider than the address so that full and empty are
// told apart. count gives the number of words stored. Storage is a plain
// array that synthesis maps to RAM or registers.
module sync_fifo #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  // A pop from an empty FIFO is a caller error.
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule
