// nsps_path: one data path through the custom part of the NSPS tree, from the
// antenna-base digitiser to the commodity Gigabit Ethernet network.
//
//   level 3: nsps_l3_node      12 ADC channels -> coded, flagged, time-aligned
//                              packets on 4 peer-to-peer links + C&M port
//   level 2: pkt_fifo          link receive buffer; its free space is the
//                              pull request on the 4 links
//            l2_decode_pack    decode with the packet's table tags, pack
//                              sensor pairs as 32-bit complex words
//   level 1: gige_bridge       buffer whole packets, send each as a UDP
//                              datagram, destination rotating by time slice
//
// The serial links between the boards (Aurora over fibre in the paper) are
// modelled as direct connections on one clock; the four data links of the
// level-3 node all end in the one level-2 receive buffer, which asks for a
// packet on every link while it has room for one. When Gigabit Ethernet
// cannot carry everything (the full level-3 rate is far above 1 Gb/s once
// decoded), back-pressure fills the buffers and the level-3 switch drops whole
// packets, exactly the "pull" behaviour of the NSPS network. The level-2 FFT
// and data pooler, the DDR2 memory and the transceivers are not part of this
// path. Status packets leave on the control-and-monitor port (cm_*).
module nsps_path
  import nsps_pkg::*;
#(
  parameter int unsigned NUM_CH          = 12,
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter logic [7:0]  L3_ID           = 8'h30,
  parameter logic [7:0]  L2_ID           = 8'h20,
  parameter int unsigned RX_WORDS        = 512,
  parameter int unsigned BRIDGE_WORDS    = 4096
) (
  input  logic               clk,
  input  logic               rst,
  // level 3: ADCs and time standard
  input  logic               adc_valid,
  input  logic signed [9:0]  adc_data [NUM_CH],
  input  logic               sync,
  input  logic [31:0]        ts_load,
  // control and monitor network
  input  beat_t              cmd_beat,
  input  logic               cmd_valid,
  output beat_t              fwd_beat,
  output logic               fwd_valid,
  input  logic               cm_req,
  output beat_t              cm_beat,
  output logic               cm_valid,
  // level 2 decode table
  input  logic               dec_we,
  input  logic [1:0]         dec_tag,
  input  logic [3:0]         dec_code,
  input  logic [15:0]        dec_value,
  // level 1 Gigabit Ethernet
  input  bridge_cfg_t        gige_cfg,
  output logic [7:0]         tx_data,
  output logic               tx_valid,
  output logic               tx_last,
  input  logic               tx_ready,
  // counters
  output logic [31:0]        l3_pkts_built,
  output logic [31:0]        l3_overflows,
  output logic [31:0]        l3_drops,
  output logic [31:0]        l2_pkts_out,
  output logic [31:0]        l2_flagged,
  output logic [31:0]        frames_sent,
  output logic [31:0]        l2_bad,
  output logic [31:0]        bridge_dropped
);

  // ---------------- level 3 ----------------
  logic [4:0]  link_req, link_valid;
  beat_t       link_beat;
  logic [31:0] l3_sent, l3_cmds;

  nsps_l3_node #(.NUM_CH(NUM_CH), .SAMPLES_PER_PKT(SAMPLES_PER_PKT), .NUM_LUTS(4),
                 .NUM_LINKS(4), .NODE_ID(L3_ID)) u_l3 (
    .clk, .rst, .adc_valid, .adc_data, .sync, .ts_load,
    .cmd_beat, .cmd_valid, .fwd_beat, .fwd_valid,
    .link_req, .link_beat, .link_valid,
    .pkts_built(l3_pkts_built), .overflows(l3_overflows), .drops(l3_drops),
    .sent(l3_sent), .cmds_seen(l3_cmds)
  );

  assign cm_beat  = link_beat;
  assign cm_valid = link_valid[4];

  // ---------------- level 2 ----------------
  logic        rx_room, rx_valid, rx_ready;
  beat_t       rx_beat;
  logic [15:0] rx_avail;
  logic [31:0] rx_dropped;

  assign link_req = {cm_req, {4{rx_room}}};

  pkt_fifo #(.DEPTH(RX_WORDS), .ROOM_WORDS(2 + NUM_CH * SAMPLES_PER_PKT / 12)) u_rx (
    .clk, .rst, .in_beat(link_beat), .in_valid(|link_valid[3:0]), .room(rx_room),
    .out_beat(rx_beat), .out_valid(rx_valid), .out_ready(rx_ready),
    .pkts_avail(rx_avail), .pkts_dropped(rx_dropped)
  );

  beat_t l2_beat;
  logic  l2_valid, l2_ready;

  l2_decode_pack #(.NUM_CH(NUM_CH), .SAMPLES_PER_PKT(SAMPLES_PER_PKT), .NUM_LUTS(4)) u_l2 (
    .clk, .rst, .node_id(L2_ID),
    .in_beat(rx_beat), .in_valid(rx_valid), .in_ready(rx_ready),
    .out_beat(l2_beat), .out_valid(l2_valid), .out_ready(l2_ready),
    .dec_we, .dec_tag, .dec_code, .dec_value,
    .pkts_out(l2_pkts_out), .pkts_bad(l2_bad), .flagged(l2_flagged)
  );

  // ---------------- level 1 ----------------
  logic        br_room;

  // A packet may start only while the bridge buffer has room for a whole one.
  logic l2_in_pkt;
  always_ff @(posedge clk) begin
    if (rst) l2_in_pkt <= 1'b0;
    else if (l2_valid && l2_ready) l2_in_pkt <= !l2_beat.eop;
  end
  assign l2_ready = l2_in_pkt || br_room;

  gige_bridge #(.BUF_WORDS(BRIDGE_WORDS),
                .ROOM_WORDS(1 + (NUM_CH / 2) * (SAMPLES_PER_PKT / 2))) u_l1 (
    .clk, .rst, .cfg(gige_cfg), .in_beat(l2_beat), .in_valid(l2_valid && l2_ready),
    .room(br_room), .tx_data, .tx_valid, .tx_last, .tx_ready,
    .frames_sent, .pkts_dropped(bridge_dropped)
  );

endmodule
