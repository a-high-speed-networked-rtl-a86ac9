// gige_bridge: level-1 bridge from the NSPS packet network to Gigabit Ethernet.
//
// NSPS packets (any datatype) are buffered whole in a store-and-forward
// packet buffer and then sent, one per Ethernet frame, as the payload of a
// UDP/IPv4 datagram on a byte stream for a Gigabit Ethernet MAC (one byte per
// cycle at 125 MHz). All address fields are static configuration (cfg):
//   - UDP destination port = cfg.port_base + datatype, so data, calibration
//     and status/control packets reach the cluster on different ports;
//   - destination MAC and IP rotate over cfg.dest_mask + 1 cluster nodes by
//     time slice: index = (timestamp >> cfg.slice_shift) & cfg.dest_mask.
//     This partitions the load along the time axis by manipulating the
//     Ethernet destination address, as the level-1 description asks.
// Frame bytes: destination MAC, source MAC, EtherType 0x0800; IPv4 header
// (no options, DF set, TTL 64, protocol 17, identification = frame count,
// header checksum computed here); UDP header (checksum 0, allowed by IPv4);
// then the NSPS packet, most significant byte of each 64-bit word first. The
// MAC adds preamble, FCS and inter-frame gap. Packets of more than 183 words
// need jumbo frames on the switch.
// The paper gives the UDP bridge, static fields, per-network-type ports and
// destination-address load partitioning; the buffer size (on-chip here, a
// DDR2 RAM in the paper's board), the slice rule and all header constants are
// this design's choices.
//
// Timing: in_* never stalls (whole packets are dropped when the buffer is
// full, counted in pkts_dropped); room is the pull request for upstream.
// tx_valid/tx_ready is a byte handshake; tx_last marks a frame's last byte.
module gige_bridge
  import nsps_pkg::*;
#(
  parameter int unsigned BUF_WORDS  = 4096,
  parameter int unsigned ROOM_WORDS = 512
) (
  input  logic         clk,
  input  logic         rst,
  input  bridge_cfg_t  cfg,
  input  beat_t        in_beat,
  input  logic         in_valid,
  output logic         room,
  output logic [7:0]   tx_data,
  output logic         tx_valid,
  output logic         tx_last,
  input  logic         tx_ready,
  output logic [31:0]  frames_sent,
  output logic [31:0]  pkts_dropped
);

  localparam int unsigned HDR_BYTES = 42;
  localparam int unsigned DW = $clog2(NUM_DEST);

  beat_t       f_beat;
  logic        f_valid, f_ready;
  logic [15:0] f_avail;

  pkt_fifo #(.DEPTH(BUF_WORDS), .ROOM_WORDS(ROOM_WORDS)) u_buf (
    .clk, .rst, .in_beat, .in_valid, .room,
    .out_beat(f_beat), .out_valid(f_valid), .out_ready(f_ready),
    .pkts_avail(f_avail), .pkts_dropped
  );

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_e;
  state_e                 state;
  logic [HDR_BYTES*8-1:0] fh_q;
  logic [5:0]             bcnt;
  logic [2:0]             bidx;
  logic [15:0]            ip_id;

  // Frame header for the packet at the head of the buffer.
  hdr_t                   nh;
  logic [DW-1:0]          di;
  logic [15:0]            ip_len, udp_len;
  logic [159:0]           iph;
  logic [HDR_BYTES*8-1:0] fh;

  function automatic logic [15:0] ip_checksum(logic [159:0] h);
    logic [31:0] s;
    s = '0;
    for (int i = 0; i < 10; i++) s += 32'(h[16*i +: 16]);
    s = {16'b0, s[15:0]} + {16'b0, s[31:16]};
    s = {16'b0, s[15:0]} + {16'b0, s[31:16]};
    return ~s[15:0];
  endfunction

  always_comb begin
    logic [31:0] slice;
    nh      = hdr_t'(f_beat.data);
    slice   = nh.timestamp >> cfg.slice_shift;
    di      = slice[DW-1:0] & cfg.dest_mask;
    udp_len = 16'(8 + 8 * int'(nh.pkt_size));
    ip_len  = 16'(20) + udp_len;
    iph     = {8'h45, 8'h00, ip_len, ip_id, 16'h4000, 8'd64, 8'd17, 16'h0000,
               cfg.src_ip, cfg.dst_ip[di]};
    iph[79:64] = ip_checksum(iph);
    fh      = {cfg.dst_mac[di], cfg.src_mac, 16'h0800, iph,
               cfg.src_port, 16'(cfg.port_base + 16'(nh.datatype)), udp_len, 16'h0000};
  end

  always_comb begin
    tx_valid = 1'b0;
    tx_last  = 1'b0;
    tx_data  = '0;
    f_ready  = 1'b0;
    case (state)
      S_HDR: begin
        tx_valid = 1'b1;
        tx_data  = fh_q[HDR_BYTES*8 - 1 - 8*int'(bcnt) -: 8];
      end
      S_PAY: begin
        tx_valid = 1'b1;
        tx_data  = f_beat.data[63 - 8*int'(bidx) -: 8];
        tx_last  = f_beat.eop && (bidx == 3'd7);
        f_ready  = tx_ready && (bidx == 3'd7);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      fh_q        <= '0;
      bcnt        <= '0;
      bidx        <= '0;
      ip_id       <= '0;
      frames_sent <= '0;
    end else begin
      case (state)
        S_IDLE: if (f_valid) begin
          fh_q  <= fh;
          bcnt  <= '0;
          state <= S_HDR;
        end
        S_HDR: if (tx_ready) begin
          if (bcnt == 6'(HDR_BYTES - 1)) begin
            bidx  <= '0;
            state <= S_PAY;
          end else begin
            bcnt <= bcnt + 1'b1;
          end
        end
        default: if (tx_ready) begin  // S_PAY
          bidx <= bidx + 1'b1;
          if (tx_last) begin
            state       <= S_IDLE;
            ip_id       <= ip_id + 1'b1;
            frames_sent <= frames_sent + 1;
          end
        end
      endcase
    end
  end

endmodule
