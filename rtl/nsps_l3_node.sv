// nsps_l3_node: data processing FPGA of a level-3 (digitiser) board of the
// NSPS tree.
//
// One board digitises NUM_CH antenna elements. Its FPGA turns the 10-bit
// samples into about 4-bit codes with a per-word flag, collects them into
// time-aligned packets and sends those packets upstream over peer-to-peer
// links; a control agent on the control-and-monitor network configures it and
// answers status queries. Data path:
//
//   adc_data --> lut_encoder x NUM_CH --> packet_builder --\
//        \--> power_lut_select (table choice per block)     packet_router --> link_*
//   sequencer (timestamp, block marks, start/stop)          /   (4 links + C&M port)
//   cmd_* --> control_agent --> IAA status packets --------/
//                           \--> configuration of all of the above, fwd_*
//
// Everything runs on one fabric clock; adc_valid marks the cycles that carry a
// sample, which must be fewer than the cycles the packets need to leave: a
// packet of SAMPLES_PER_PKT sample times is 2 + NUM_CH*SAMPLES_PER_PKT/12
// words long, so with the defaults adc_valid may be high in at most 120 of 122
// cycles on average (a 100 Ms/s ADC on a 125 MHz fabric clock uses 80 %).
// The serial transceivers (Aurora over 2.5 Gb/s fibre), the ADCs and the clock
// synthesiser are outside this module: link_*, adc_* and the clock are their
// connections. The structure follows the paper's level-3 description; the
// single clock domain, the port count and all encodings are this design's.
//
// Latency: a packet starts two cycles after the last sample of its block
// (encoder register, bank switch) plus one router decision cycle and one
// router output register.
module nsps_l3_node
  import nsps_pkg::*;
#(
  parameter int unsigned NUM_CH          = 12,
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter int unsigned NUM_LUTS        = 4,
  parameter int unsigned NUM_LINKS       = 4,
  parameter logic [7:0]  NODE_ID         = 8'h30,
  localparam int unsigned NUM_PORTS = NUM_LINKS + 1,
  localparam int unsigned TW = $clog2(NUM_LUTS)
) (
  input  logic                  clk,
  input  logic                  rst,
  // ADCs
  input  logic                  adc_valid,
  input  logic signed [9:0]     adc_data [NUM_CH],
  // time standard
  input  logic                  sync,
  input  logic [31:0]           ts_load,
  // control and monitor network
  input  beat_t                 cmd_beat,
  input  logic                  cmd_valid,
  output beat_t                 fwd_beat,
  output logic                  fwd_valid,
  // links: ports 0..NUM_LINKS-1 data links, port NUM_LINKS control and monitor
  input  logic [NUM_PORTS-1:0]  link_req,
  output beat_t                 link_beat,
  output logic [NUM_PORTS-1:0]  link_valid,
  // counters
  output logic [31:0]           pkts_built,
  output logic [31:0]           overflows,
  output logic [31:0]           drops,
  output logic [31:0]           sent,
  output logic [31:0]           cmds_seen
);

  // ---------------- configuration ----------------
  logic [7:0]            src_id;
  logic                  start_req, stop_req;
  logic                  lut_we;
  logic [TW-1:0]         lut_tag;
  logic [9:0]            lut_addr;
  logic [3:0]            lut_wdata;
  logic                  route_we;
  logic [3:0]            route_idx;
  logic [NUM_PORTS-1:0]  route_mask;
  logic [31:0]           thresh [NUM_LUTS-1];
  logic [9:0]            flag_thresh;
  logic [TW-1:0]         flag_tag;


  // ---------------- sequencer ----------------
  localparam int unsigned IW = $clog2(SAMPLES_PER_PKT);
  logic [IW-1:0] idx;
  logic          first, last, acq_on;
  logic [31:0]   ts;

  sequencer #(.SAMPLES_PER_PKT(SAMPLES_PER_PKT), .TS_BITS(32)) u_seq (
    .clk, .rst, .sample_valid(adc_valid), .sync, .ts_load,
    .start_req, .stop_req, .idx, .first, .last, .ts, .acq_on
  );

  // Block marks delayed to line up with the encoder outputs.
  logic        first_d, last_d, acq_on_d;
  logic [31:0] ts_d;
  always_ff @(posedge clk) begin
    first_d  <= first;
    last_d   <= last;
    acq_on_d <= acq_on;
    ts_d     <= ts;
  end

  // ---------------- table choice and encoders ----------------
  logic [TW-1:0] norm_tags [NUM_CH];
  logic [4:0]    words     [NUM_CH];
  logic [TW-1:0] used_tags [NUM_CH];
  logic [NUM_CH-1:0] enc_valid;

  power_lut_select #(.NUM_CH(NUM_CH), .IN_BITS(10), .NUM_LUTS(NUM_LUTS), .ACC_BITS(32)) u_pwr (
    .clk, .rst, .sample_valid(adc_valid), .samples(adc_data), .last,
    .thresh, .tags(norm_tags)
  );

  for (genvar c = 0; c < NUM_CH; c++) begin : g_enc
    lut_encoder #(.IN_BITS(10), .CODE_BITS(4), .NUM_LUTS(NUM_LUTS)) u_enc (
      .clk, .rst, .in_valid(adc_valid), .sample(adc_data[c]),
      .norm_tag(norm_tags[c]), .flag_tag, .flag_thresh,
      .lut_we, .lut_tag, .lut_addr, .lut_wdata,
      .out_valid(enc_valid[c]), .word(words[c]), .out_tag(used_tags[c])
    );
  end

  // ---------------- packetiser ----------------
  beat_t pb_beat, st_beat;
  logic  pb_valid, pb_ready, st_valid, st_ready;
  logic [31:0] sent_cnt;

  packet_builder #(.NUM_CH(NUM_CH), .SAMPLES_PER_PKT(SAMPLES_PER_PKT), .NUM_LUTS(NUM_LUTS)) u_pb (
    .clk, .rst, .in_valid(enc_valid[0]), .first(first_d), .last(last_d), .acq_on(acq_on_d),
    .ts(ts_d), .words, .tags(used_tags), .flag_tag, .src_id,
    .out_beat(pb_beat), .out_valid(pb_valid), .out_ready(pb_ready),
    .pkts_built, .overflows
  );

  // ---------------- control ----------------
  control_agent #(.NODE_ID(NODE_ID), .SAMPLES_PER_PKT(SAMPLES_PER_PKT), .NUM_LUTS(NUM_LUTS),
                  .NUM_PORTS(NUM_PORTS)) u_ctl (
    .clk, .rst, .cmd_beat, .cmd_valid, .fwd_beat, .fwd_valid,
    .st_beat, .st_valid, .st_ready,
    .ts, .acq_on, .pkts_built, .overflows, .drops,
    .src_id, .start_req, .stop_req, .lut_we, .lut_tag, .lut_addr, .lut_wdata,
    .route_we, .route_idx, .route_mask, .thresh, .flag_thresh, .flag_tag, .cmds_seen
  );

  // ---------------- switch ----------------
  beat_t       r_beat [2];
  logic [1:0]  r_valid, r_ready;
  assign r_beat[0] = pb_beat;
  assign r_beat[1] = st_beat;
  assign r_valid   = {st_valid, pb_valid};
  assign pb_ready  = r_ready[0];
  assign st_ready  = r_ready[1];

  packet_router #(.NUM_SRC(2), .NUM_PORTS(NUM_PORTS)) u_rt (
    .clk, .rst, .src_beat(r_beat), .src_valid(r_valid), .src_ready(r_ready),
    .link_req, .link_beat, .link_valid,
    .route_we, .route_idx, .route_mask, .sent(sent_cnt), .drops
  );
  assign sent = sent_cnt;

endmodule
