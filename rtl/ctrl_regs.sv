// ctrl_regs: host-visible configuration of the NaNet receive path.
//
// The host driver configures the NIC and registers its receive buffers
// through these registers. Writes arrive one 32-bit word at a time on a
// simple write port (in a board this sits behind the PCIe core's register
// BAR). Register map, word addresses (constants in nanet_pkg):
//   0x00 UDP destination port accepted by every link    reset 58913
//   0x01 board enable mask for the merger               reset all boards
//   0x02 merge time window, timestamp units              reset 1
//   0x03 merger wait limit, clock cycles                 reset 256
//   0x04 buffer gathering time frame, clock cycles       reset TIMEOUT_RST
//   0x05 buffer size, 32-bit words                       reset BUF_BYTES/4
//   0x06 number of buffers in the ring                   reset N_BUF
//   0x07 hand a buffer to the NIC: data = buffer index   (command)
//   0x10+2i / 0x11+2i  low / high 32 bits of the bus address of buffer i
// A buffer is registered by writing its address and then its index to 0x07;
// the same command returns it after the host has consumed it. Writes take
// effect on the next clock edge; the command produces a one-cycle rel_valid.
// The register map and reset values are this design's choices.
module ctrl_regs
  import nanet_pkg::*;
#(
  parameter int unsigned N_BOARDS    = 4,
  parameter int unsigned N_BUF       = 8,
  parameter int unsigned BUF_BYTES   = 8192,
  parameter int unsigned TIMEOUT_RST = 50000
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [7:0]                wr_addr,
  input  logic [31:0]               wr_data,
  output logic [15:0]               udp_port,
  output logic [N_BOARDS-1:0]       board_en,
  output logic [31:0]               mrg_window,
  output logic [31:0]               mrg_wait,
  output logic [31:0]               frame_time,
  output logic [15:0]               buf_words,
  output logic [$clog2(N_BUF):0]    nbuf,
  output logic [63:0]               base [N_BUF],
  output logic                      rel_valid,
  output logic [$clog2(N_BUF)-1:0]  rel_idx
);
  localparam int unsigned IW = $clog2(N_BUF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      udp_port   <= UDP_PORT_RST;
      board_en   <= '1;
      mrg_window <= 32'd1;
      mrg_wait   <= 32'd256;
      frame_time <= 32'(TIMEOUT_RST);
      buf_words  <= 16'(BUF_BYTES / 4);
      nbuf       <= (IW+1)'(N_BUF);
      base       <= '{default: '0};
      rel_valid  <= 1'b0;
      rel_idx    <= '0;
    end else begin
      rel_valid <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr)
          REG_UDP_PORT:   udp_port   <= wr_data[15:0];
          REG_BOARD_EN:   board_en   <= wr_data[N_BOARDS-1:0];
          REG_MRG_WINDOW: mrg_window <= wr_data;
          REG_MRG_WAIT:   mrg_wait   <= wr_data;
          REG_FRAME_TIME: frame_time <= wr_data;
          REG_BUF_WORDS:  buf_words  <= wr_data[15:0];
          REG_NBUF:       nbuf       <= (wr_data[15:0] == 16'd0 || wr_data[15:0] > 16'(N_BUF))
                                        ? (IW+1)'(N_BUF) : wr_data[IW:0];
          REG_RELEASE: begin
            rel_valid <= 1'b1;
            rel_idx   <= wr_data[IW-1:0];
          end
          default: begin
            for (int i = 0; i < N_BUF; i++) begin
              if (wr_addr == REG_BASE_LO + 8'(2 * i)) base[i][31:0]  <= wr_data;
              if (wr_addr == REG_BASE_HI + 8'(2 * i)) base[i][63:32] <= wr_data;
            end
          end
        endcase
      end
    end
  end
endmodule
