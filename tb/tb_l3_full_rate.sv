// tb_l3_full_rate: throughput workload of the level-3 node at its default size
// (12 channels, 120-sample blocks, 4 data links plus the C&M port).
//
// The twelve ADCs of a digitiser board sample at 100 Ms/s; on the assumed
// 125 MHz fabric clock that is a sample set on 4 of every 5 clocks. With all
// four links pulling, every acquired block must leave as one packet, with no
// overrun and no drop, timestamps advancing by exactly one block, the header
// leaving a fixed few clocks after the block's last sample, and the packets
// spread evenly over the four links. The test then finds the rate limit:
// 120 sample sets in every 123 clocks (a 122-word packet plus one routing
// clock per 120 samples) must still run without loss, and a sample on every
// clock must overrun. Each phase is counted; a phase that did not show its
// behaviour is a failure.
module tb_l3_full_rate;
  import nsps_pkg::*;
  localparam int NC = 12, T = 120, PW = 2 + NC * (T / 12), NPT = 5;
  logic clk = 0, rst = 1;
  logic adc_valid = 0;
  logic signed [9:0] adc_data [NC];
  logic sync = 0;
  logic [31:0] ts_load = 32'd0;
  beat_t cmd_beat = '0;
  logic cmd_valid = 0;
  beat_t fwd_beat;
  logic fwd_valid;
  logic [NPT-1:0] link_req = '1;
  beat_t link_beat;
  logic [NPT-1:0] link_valid;
  logic [31:0] pkts_built, overflows, drops, sent, cmds_seen;
  int checks = 0, failures = 0;

  nsps_l3_node dut (.*);

  always #4 clk = ~clk;   // 125 MHz

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- link receivers ----------------
  int words = 0, pkts = 0, link_use [4];
  longint unsigned last_ts = 0;
  bit have_ts = 0, lossy = 0;
  longint last_sample_cyc [longint unsigned];
  int lat_min = 1 << 30, lat_max = 0;
  always @(posedge clk) begin
    if (!rst && |link_valid[3:0]) begin
      words++;
      if (link_beat.sop) begin
        hdr_t h;
        h = hdr_t'(link_beat.data);
        check(h.datatype == DT_DATA && h.pkt_size == 12'(PW) && h.streams == 4'(NC), "data header");
        if (have_ts && !lossy) check(longint'(h.timestamp) == last_ts + T, $sformatf("timestamp %0d follows %0d", h.timestamp, last_ts));
        if (last_sample_cyc.exists(longint'(h.timestamp))) begin
          int lat;
          lat = int'(cyc - last_sample_cyc[longint'(h.timestamp)]);
          if (lat < lat_min) lat_min = lat;
          if (lat > lat_max) lat_max = lat;
        end
        last_ts = longint'(h.timestamp);
        have_ts = 1;
        for (int p = 0; p < 4; p++) if (link_valid[p]) link_use[p]++;
      end
      if (link_beat.eop) pkts++;
    end
  end

  task automatic send_cmd(datatype_e dt, logic [7:0] op);
    hdr_t h;
    cmd_t c;
    h = '0; h.datatype = dt; h.pkt_size = 12'd2;
    c = '{target: 8'h30, opcode: op, addr: 16'h0, data: 32'h0};
    @(negedge clk);
    cmd_beat = '{sop: 1'b1, eop: 1'b0, data: h}; cmd_valid = 1;
    @(negedge clk);
    cmd_beat = '{sop: 1'b0, eop: 1'b1, data: c};
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // Samples: 'on' sample sets, then 'off' idle clocks, repeated for nblk blocks.
  longint unsigned n = 0;
  task automatic run(int nblk, int on, int off);
    int k;
    k = 0;
    for (int i = 0; i < nblk * T; i++) begin
      @(negedge clk);
      foreach (adc_data[c]) adc_data[c] = 10'($urandom);
      adc_valid = 1;
      if (n % T == T - 1) last_sample_cyc[n - (T - 1)] = cyc + 1;
      n++;
      k++;
      if (k == on) begin
        k = 0;
        repeat (off) begin
          @(negedge clk);
          adc_valid = 0;
        end
      end
    end
    @(negedge clk);
    adc_valid = 0;
  endtask

  int p0, o0;
  initial begin
    foreach (adc_data[c]) adc_data[c] = 0;
    repeat (4) @(posedge clk);
    rst = 0;
    @(negedge clk);
    sync = 1;
    @(negedge clk);
    sync = 0;
    send_cmd(DT_CMD, OP_START);
    // acquisition starts at the end of the first block
    run(1, 4, 1);
    have_ts = 0;
    p0 = pkts;
    // Phase 1: 100 Ms/s on 125 MHz.
    run(40, 4, 1);
    repeat (300) @(negedge clk);
    check(pkts - p0 == 40, $sformatf("100 Ms/s: %0d packets for 40 blocks", pkts - p0));
    check(overflows == 0 && drops == 0, "100 Ms/s: no loss");
    for (int p = 0; p < 4; p++) check(link_use[p] == 10, $sformatf("link %0d carried %0d of 40", p, link_use[p]));
    check(lat_min >= 1 && lat_max <= 6, $sformatf("header latency %0d..%0d clocks", lat_min, lat_max));
    // Phase 2: the highest rate, 120 sample sets per 123 clocks.
    p0 = pkts;
    run(40, 120, 3);
    repeat (300) @(negedge clk);
    check(pkts - p0 == 40, $sformatf("120/123: %0d packets for 40 blocks", pkts - p0));
    check(overflows == 0 && drops == 0, "120/123: no loss");
    // Phase 3: a sample on every clock is more than the links can take.
    o0 = overflows;
    p0 = pkts;
    lossy = 1;   // blocks are lost here, timestamps jump
    run(20, 1, 0);
    repeat (300) @(negedge clk);
    check(overflows > o0, "every clock: overruns");
    check(pkts - p0 + overflows - o0 == 20, "every clock: each block sent or counted");
    check(words == pkts * PW, "whole packets only");
    $display("packets=%0d overruns=%0d latency=%0d..%0d links=%0d/%0d/%0d/%0d", pkts, overflows,
             lat_min, lat_max, link_use[0], link_use[1], link_use[2], link_use[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
