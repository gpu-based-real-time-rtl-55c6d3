// nanet_pkg: types and constants shared by the NaNet receive path.
//
// The receive path moves three kinds of streams:
//   byte_beat_t  - one byte per cycle from a GbE MAC, and UDP payload bytes
//                  after header removal (sop on the first byte, eop on the last);
//   word_beat_t  - 32-bit words of merged events (valid/ready handshake with a
//                  separate ready signal);
//   tlp_beat_t   - PCIe memory-write requests: the sop beat carries the bus
//                  address and the number of 32-bit data words that follow.
// Fragment and merged-event formats, the register map and all widths are this
// design's own choices; the source describes the functions, not the formats.
package nanet_pkg;

  typedef struct packed {
    logic       valid;
    logic       sop;
    logic       eop;
    logic [7:0] data;
  } byte_beat_t;

  typedef struct packed {
    logic        valid;
    logic        sop;
    logic        eop;
    logic [31:0] data;
  } word_beat_t;

  typedef struct packed {
    logic        valid;
    logic        sop;
    logic        eop;
    logic [63:0] addr;     // valid on sop
    logic [9:0]  len_dw;   // valid on sop: data words in this request
    logic [31:0] data;
  } tlp_beat_t;

  // Header of one event fragment from one readout board.
  typedef struct packed {
    logic [31:0] ts;       // fragment timestamp
    logic [15:0] nhits;    // number of hit words that follow
  } frag_hdr_t;


  // Register map of ctrl_regs (word addresses).
  localparam logic [7:0] REG_UDP_PORT   = 8'h00;
  localparam logic [7:0] REG_BOARD_EN   = 8'h01;
  localparam logic [7:0] REG_MRG_WINDOW = 8'h02;
  localparam logic [7:0] REG_MRG_WAIT   = 8'h03;
  localparam logic [7:0] REG_FRAME_TIME = 8'h04;
  localparam logic [7:0] REG_BUF_WORDS  = 8'h05;
  localparam logic [7:0] REG_NBUF       = 8'h06;
  localparam logic [7:0] REG_RELEASE    = 8'h07;
  localparam logic [7:0] REG_BASE_LO    = 8'h10;  // + 2*i
  localparam logic [7:0] REG_BASE_HI    = 8'h11;  // + 2*i

  // Reset values.
  localparam logic [15:0] UDP_PORT_RST  = 16'd58913;

endpackage
