// nsps_pkg: types and constants shared by the level-3 node, the level-2
// decoder and the level-1 bridge of the networked signal processing system
// (NSPS).
//
// Every packet on the NSPS network is a sequence of 64-bit (8-byte) words. The
// first word is a fixed header whose fields (source id, datatype, data pixel
// descriptor, number of streams, packet size, timestamp) follow the list of
// mandatory header fields of the NSPS data network. The field widths below are
// this design's choice; only the field list and the 8-byte size are given.
// A stream beat carries one word plus start- and end-of-packet marks.
package nsps_pkg;

  localparam int unsigned WORD_BITS = 64;

  // Datatype field values (encoding chosen here).
  typedef enum logic [3:0] {
    DT_NONE   = 4'h0,
    DT_DATA   = 4'h1,  // coded antenna samples
    DT_STATUS = 4'h2,  // IAA ("I am alive") status reply
    DT_AYA    = 4'h3,  // AYA ("are you alive") query
    DT_CMD    = 4'h4,  // command / configuration
    DT_CALIB  = 4'h5,  // calibration network data
    DT_CPLX   = 4'h6   // level-2 complex pairs (decoded and packed)
  } datatype_e;

  // Data pixel descriptor values (encoding chosen here).
  localparam logic [3:0] PIX_64BIT = 4'd0;  // plain 64-bit words
  localparam logic [3:0] PIX_5BIT  = 4'd5;  // 5-bit words {flag, 4-bit code}, 12 per 64-bit word
  localparam logic [3:0] PIX_C32   = 4'd6;  // 32-bit complex words {re16, im16}, 2 per 64-bit word

  // Level-1 bridge: number of cluster destinations that time slices rotate over.
  localparam int unsigned NUM_DEST = 4;

  // Static UDP/IP/Ethernet fields of the level-1 bridge, set at configuration.
  typedef struct packed {
    logic [47:0]                 src_mac;
    logic [31:0]                 src_ip;
    logic [15:0]                 src_port;
    logic [NUM_DEST-1:0][47:0]   dst_mac;
    logic [NUM_DEST-1:0][31:0]   dst_ip;
    logic [15:0]                 port_base;    // UDP port = port_base + datatype
    logic [4:0]                  slice_shift;  // time slice = timestamp >> slice_shift
    logic [$clog2(NUM_DEST)-1:0] dest_mask;    // destinations used = dest_mask + 1 (power of 2)
  } bridge_cfg_t;

  // 8-byte packet header.
  typedef struct packed {
    logic [7:0]  src_id;     // [63:56]
    datatype_e   datatype;   // [55:52]
    logic [3:0]  pixel;      // [51:48]
    logic [3:0]  streams;    // [47:44]
    logic [11:0] pkt_size;   // [43:32] words, header included
    logic [31:0] timestamp;  // [31:0]
  } hdr_t;

  // One word of a packet stream.
  typedef struct packed {
    logic                 sop;
    logic                 eop;
    logic [WORD_BITS-1:0] data;
  } beat_t;

  // Command word: second word of a DT_CMD or DT_AYA packet.
  typedef struct packed {
    logic [7:0]  target;  // node id, 8'hFF = all nodes
    logic [7:0]  opcode;
    logic [15:0] addr;
    logic [31:0] data;
  } cmd_t;

  localparam logic [7:0] BROADCAST_ID = 8'hFF;

  localparam logic [7:0] OP_NOP       = 8'h00;
  localparam logic [7:0] OP_WR_LUT    = 8'h01;  // addr = {4'b0, tag[1:0], sample[9:0]}, data[3:0] = code
  localparam logic [7:0] OP_SET_SRC   = 8'h02;  // data[7:0] = source id put in headers
  localparam logic [7:0] OP_START     = 8'h03;  // start acquisition at next block
  localparam logic [7:0] OP_STOP      = 8'h04;  // stop acquisition at next block
  localparam logic [7:0] OP_SET_ROUTE = 8'h05;  // addr[3:0] = datatype, data = port mask
  localparam logic [7:0] OP_SET_THR   = 8'h06;  // addr 0..2 power threshold, 3 flag magnitude, 4 flag LUT tag

endpackage
