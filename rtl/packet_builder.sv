// packet_builder: block buffer and packetiser of the level-3 data router.
//
// Coded samples of all NUM_CH channels arrive together, one sample time per
// in_valid, with the block marks of the sequencer. A whole block of
// SAMPLES_PER_PKT sample times is stored in one of two memory banks; while one
// bank fills, the other is sent. On the way out the block is reorganised
// (transposed) to channel-major order, so that a packet holds the same time
// stretch of every antenna element, one channel after another:
//
//   word 0          8-byte header (nsps_pkg::hdr_t): src_id, DT_DATA,
//                   PIX_5BIT, streams = NUM_CH, pkt_size, timestamp of the
//                   block's first sample
//   word 1          header extension: bits [2c+1:2c] normal table tag of
//                   channel c, bits [2*NUM_CH+1:2*NUM_CH] flag table tag
//   word 2 + c*WPC + w  channel c, samples 12w .. 12w+11; sample 12w+j in
//                   bits [5j+4:5j] as {flag, code}; bits [63:60] zero
//
// Only blocks whose first sample arrives with acq_on are stored. If a block is
// complete while the other bank has not yet been sent, the new block is
// discarded and counted in overflows, so data are lost only as whole packets.
// The paper gives the buffering, the time-aligned reorganisation, the header
// fields and packet-granular loss; the field widths, the word layout and the
// extension word are this design's choices.
//
// Interface: out_beat/out_valid/out_ready is a valid/ready stream; out_beat is
// combinational from the buffer (distributed-RAM style read).
module packet_builder
  import nsps_pkg::*;
#(
  parameter int unsigned NUM_CH          = 12,
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter int unsigned NUM_LUTS        = 4,
  localparam int unsigned TW    = $clog2(NUM_LUTS),
  localparam int unsigned WB    = 5,                         // bits per coded word
  localparam int unsigned LANES = 12,                        // coded words per 64-bit word
  localparam int unsigned WPC   = SAMPLES_PER_PKT / LANES,   // payload words per channel
  localparam int unsigned PKT_WORDS = 2 + NUM_CH * WPC
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  logic               acq_on,
  input  logic [31:0]        ts,
  input  logic [WB-1:0]      words [NUM_CH],
  input  logic [TW-1:0]      tags  [NUM_CH],
  input  logic [TW-1:0]      flag_tag,
  input  logic [7:0]         src_id,
  output beat_t              out_beat,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [31:0]        pkts_built,
  output logic [31:0]        overflows
);

  if (SAMPLES_PER_PKT % LANES != 0) begin : g_bad_size
    $error("SAMPLES_PER_PKT must be a multiple of 12");
  end
  if (PKT_WORDS > 4095) begin : g_too_big
    $error("packet does not fit the 12-bit size field");
  end

  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned WW = (WPC > 1) ? $clog2(WPC) : 1;
  localparam int unsigned CW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int unsigned RW = $clog2(PKT_WORDS + 1);

  logic [LANES*WB-1:0] mem [2][NUM_CH][WPC];
  logic [31:0]         ts_m   [2];
  logic [TW-1:0]       tags_m [2][NUM_CH];
  logic [TW-1:0]       ftag_m [2];

  // ---------------- write side ----------------
  logic          wb;          // bank being filled; the other bank is ~wb
  logic          other_full;  // bank ~wb holds a block not yet sent
  logic          writing;
  logic [LW-1:0] lane_q;
  logic [WW-1:0] w_q;
  logic [LW-1:0] pos_lane;
  logic [WW-1:0] pos_w;
  logic          wr_en;
  logic          rd_done;

  assign pos_lane = first ? '0 : lane_q;
  assign pos_w    = first ? '0 : w_q;
  assign wr_en    = in_valid && (first ? acq_on : writing);

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < NUM_CH; c++)
        mem[wb][c][pos_w][pos_lane*WB +: WB] <= words[c];
      if (first) begin
        ts_m[wb]   <= ts;
        tags_m[wb] <= tags;
        ftag_m[wb] <= flag_tag;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wb         <= 1'b0;
      other_full <= 1'b0;
      writing    <= 1'b0;
      lane_q     <= '0;
      w_q        <= '0;
      pkts_built <= '0;
      overflows  <= '0;
    end else begin
      if (rd_done) other_full <= 1'b0;
      if (in_valid) begin
        if (first) writing <= acq_on;
        if (pos_lane == LW'(LANES - 1)) begin
          lane_q <= '0;
          w_q    <= pos_w + 1'b1;
        end else begin
          lane_q <= pos_lane + 1'b1;
          w_q    <= pos_w;
        end
        if (last && wr_en) begin
          writing <= 1'b0;
          if (!other_full || rd_done) begin
            wb         <= ~wb;
            other_full <= 1'b1;
            pkts_built <= pkts_built + 1;
          end else begin
            overflows  <= overflows + 1;
          end
        end
      end
    end
  end

  // ---------------- read side ----------------
  logic          rb;
  logic [RW-1:0] rd_cnt;
  logic [CW-1:0] rd_c;
  logic [WW-1:0] rd_w;
  hdr_t          hdr;
  logic [63:0]   ext;

  assign rb = ~wb;

  always_comb begin
    hdr           = '0;
    hdr.src_id    = src_id;
    hdr.datatype  = DT_DATA;
    hdr.pixel     = PIX_5BIT;
    hdr.streams   = 4'(NUM_CH);
    hdr.pkt_size  = 12'(PKT_WORDS);
    hdr.timestamp = ts_m[rb];
    ext = '0;
    for (int c = 0; c < NUM_CH; c++) ext[c*TW +: TW] = tags_m[rb][c];
    ext[NUM_CH*TW +: TW] = ftag_m[rb];
  end

  always_comb begin
    out_valid     = other_full;
    out_beat.sop  = (rd_cnt == '0);
    out_beat.eop  = (rd_cnt == RW'(PKT_WORDS - 1));
    if (rd_cnt == '0)      out_beat.data = hdr;
    else if (rd_cnt == 1)  out_beat.data = ext;
    else                   out_beat.data = 64'(mem[rb][rd_c][rd_w]);
  end

  assign rd_done = out_valid && out_ready && out_beat.eop;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_cnt <= '0;
      rd_c   <= '0;
      rd_w   <= '0;
    end else if (out_valid && out_ready) begin
      if (out_beat.eop) begin
        rd_cnt <= '0;
        rd_c   <= '0;
        rd_w   <= '0;
      end else begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt >= 2) begin
          if (rd_w == WW'(WPC - 1)) begin
            rd_w <= '0;
            rd_c <= rd_c + 1'b1;
          end else begin
            rd_w <= rd_w + 1'b1;
          end
        end
      end
    end
  end

endmodule
