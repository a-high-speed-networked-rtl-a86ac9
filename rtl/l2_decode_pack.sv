// l2_decode_pack: level-2 decoder and pair packer in front of the FFT.
//
// Takes the coded data packets of a level-3 node (nsps_pkg PIX_5BIT layout:
// header, table-tag extension word, channel-major payload of twelve 5-bit
// words per 64-bit word) and turns them into complex packets for the FFT.
// Every 5-bit word {flag, code} is decoded through a small table: the flag
// bit selects the packet's flag table, otherwise the channel's normal table,
// both named in the extension word. Channels 2k and 2k+1 are then packed as
// the real and imaginary parts of one 32-bit complex integer (16 bits each).
//
// Output packet: header with this node's id (the source id is replaced because
// the data were processed), DT_CPLX, PIX_C32, streams = NUM_CH/2, the input
// timestamp; then for pair 0, 1, ... the SAMPLES_PER_PKT complex samples in
// time order, two per 64-bit word, the earlier one in bits [63:32].
// The paper gives the decoding by the header's table tags and the packing of a
// sensor pair into a 32-bit complex word; the decode values (by default the
// code scaled back by 2^(3+tag), the inverse of the level-3 default tables),
// the word layout and the handling of bad packets are this design's choices.
// Packets of another datatype or size are consumed and counted in pkts_bad.
//
// Timing: valid/ready on both sides. An even channel's words are buffered;
// each odd-channel input word yields six output words, one per cycle.
module l2_decode_pack
  import nsps_pkg::*;
#(
  parameter int unsigned NUM_CH          = 12,
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter int unsigned NUM_LUTS        = 4,
  localparam int unsigned TW    = $clog2(NUM_LUTS),
  localparam int unsigned LANES = 12,
  localparam int unsigned WPC   = SAMPLES_PER_PKT / LANES,
  localparam int unsigned IN_WORDS  = 2 + NUM_CH * WPC,
  localparam int unsigned OUT_WORDS = 1 + (NUM_CH / 2) * (SAMPLES_PER_PKT / 2)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [7:0]    node_id,
  input  beat_t         in_beat,
  input  logic          in_valid,
  output logic          in_ready,
  output beat_t         out_beat,
  output logic          out_valid,
  input  logic          out_ready,
  // decode table write port
  input  logic          dec_we,
  input  logic [TW-1:0] dec_tag,
  input  logic [3:0]    dec_code,
  input  logic [15:0]   dec_value,
  output logic [31:0]   pkts_out,
  output logic [31:0]   pkts_bad,
  output logic [31:0]   flagged
);

  if (NUM_CH % 2 != 0 || SAMPLES_PER_PKT % LANES != 0 || OUT_WORDS > 4095) begin : g_bad
    $error("l2_decode_pack: unsupported size");
  end

  localparam int unsigned CW = $clog2(NUM_CH);
  localparam int unsigned WW = (WPC > 1) ? $clog2(WPC) : 1;

  typedef enum logic [2:0] {S_HDR, S_EXT, S_EVEN, S_ODD, S_SKIP} state_e;

  state_e        state;
  hdr_t          hdr_q;
  logic [TW-1:0] tag_q [NUM_CH];
  logic [TW-1:0] ftag_q;
  logic [63:0]   buf_q [WPC];
  logic [CW-1:0] ch;
  logic [WW-1:0] w;
  logic [2:0]    k;          // output word within an odd-channel input word
  logic [15:0]   dec [NUM_LUTS][16];

  // Default decode values: the level-3 default table t keeps sample >>> (3+t).
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < NUM_LUTS; t++)
        for (int c = 0; c < 16; c++)
          dec[t][c] <= 16'(int'(signed'(4'(c))) * (2 ** (3 + t)));
    end else if (dec_we) begin
      dec[dec_tag][dec_code] <= dec_value;
    end
  end

  function automatic logic [15:0] decode(logic [4:0] word5, logic [TW-1:0] ntag, logic [TW-1:0] ftag,
                                         logic [15:0] tbl [NUM_LUTS][16]);
    return tbl[word5[4] ? ftag : ntag][word5[3:0]];
  endfunction

  hdr_t        hin, hout;
  logic [63:0] re_w, im_w, packed_w;
  logic [4:0]  re0, re1, im0, im1;
  logic        last_in_word;

  assign hin  = hdr_t'(in_beat.data);
  assign re_w = buf_q[w];
  assign im_w = in_beat.data;
  assign re0  = re_w[10*k +: 5];
  assign re1  = re_w[10*k + 5 +: 5];
  assign im0  = im_w[10*k +: 5];
  assign im1  = im_w[10*k + 5 +: 5];
  assign packed_w = {decode(re0, tag_q[ch - 1], ftag_q, dec), decode(im0, tag_q[ch], ftag_q, dec),
                     decode(re1, tag_q[ch - 1], ftag_q, dec), decode(im1, tag_q[ch], ftag_q, dec)};
  assign last_in_word = (k == 3'd5);

  always_comb begin
    hout           = '0;
    hout.src_id    = node_id;
    hout.datatype  = DT_CPLX;
    hout.pixel     = PIX_C32;
    hout.streams   = 4'(NUM_CH / 2);
    hout.pkt_size  = 12'(OUT_WORDS);
    hout.timestamp = hdr_q.timestamp;
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_beat  = '{sop: 1'b0, eop: 1'b0, data: packed_w};
    case (state)
      S_HDR:  in_ready = 1'b1;
      S_EXT: begin
        // The new header leaves while the extension word is consumed.
        out_valid = in_valid;
        out_beat  = '{sop: 1'b1, eop: 1'b0, data: hout};
        in_ready  = out_ready;
      end
      S_EVEN: in_ready = 1'b1;
      S_ODD: begin
        out_valid    = in_valid;
        out_beat.eop = last_in_word && in_beat.eop;
        in_ready     = out_ready && last_in_word;
      end
      default: in_ready = 1'b1;  // S_SKIP
    endcase
  end

  logic good_hdr;
  assign good_hdr = in_beat.sop && hin.datatype == DT_DATA && hin.pixel == PIX_5BIT
                    && hin.streams == 4'(NUM_CH) && hin.pkt_size == 12'(IN_WORDS);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_HDR;
      hdr_q    <= '0;
      ftag_q   <= '0;
      ch       <= '0;
      w        <= '0;
      k        <= '0;
      pkts_out <= '0;
      pkts_bad <= '0;
      flagged  <= '0;
    end else begin
      case (state)
        S_HDR: if (in_valid) begin
          if (good_hdr) begin
            hdr_q <= hin;
            state <= S_EXT;
          end else if (in_beat.sop) begin
            pkts_bad <= pkts_bad + 1;
            state    <= in_beat.eop ? S_HDR : S_SKIP;
          end
        end
        S_EXT: if (in_valid && out_ready) begin
          for (int c = 0; c < NUM_CH; c++) tag_q[c] <= in_beat.data[c*TW +: TW];
          ftag_q <= in_beat.data[NUM_CH*TW +: TW];
          ch     <= '0;
          w      <= '0;
          k      <= '0;
          state  <= S_EVEN;
        end
        S_EVEN: if (in_valid) begin
          buf_q[w] <= in_beat.data;
          if (w == WW'(WPC - 1)) begin
            w     <= '0;
            ch    <= ch + 1'b1;
            state <= S_ODD;
          end else begin
            w <= w + 1'b1;
          end
        end
        S_ODD: if (in_valid && out_ready) begin
          if (!last_in_word) begin
            k <= k + 1'b1;
          end else begin
            int nf;
            k  <= '0;
            nf = 0;
            for (int j = 0; j < LANES; j++) nf += int'(re_w[5*j+4]) + int'(im_w[5*j+4]);
            flagged <= flagged + 32'(nf);
            if (in_beat.eop) begin
              pkts_out <= pkts_out + 1;
              state    <= S_HDR;
            end else if (w == WW'(WPC - 1)) begin
              w     <= '0;
              ch    <= ch + 1'b1;
              state <= S_EVEN;
            end else begin
              w <= w + 1'b1;
            end
          end
        end
        default: if (in_valid && in_beat.eop) state <= S_HDR;  // S_SKIP
      endcase
    end
  end

endmodule
