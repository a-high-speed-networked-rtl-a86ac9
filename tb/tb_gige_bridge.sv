// tb_gige_bridge: self-checking test of the level-1 NSPS-to-GigE bridge.
// Sends NSPS packets of several datatypes, sizes and timestamps, takes the
// byte stream with random MAC back-pressure, and checks every frame byte by
// byte against a frame assembled here: MAC addresses chosen by time slice,
// EtherType, IPv4 header with lengths and a checksum verified by summing the
// header (must give 0xFFFF), UDP ports by datatype and the NSPS packet as
// payload. With the MAC stalled the buffer fills; whole packets must then be
// dropped and counted, and every packet is either framed or counted.
module tb_gige_bridge;
  import nsps_pkg::*;
  logic clk = 0, rst = 1;
  bridge_cfg_t cfg;
  beat_t in_beat = '0;
  logic in_valid = 0, room;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;
  logic [31:0] frames_sent, pkts_dropped;
  int checks = 0, failures = 0;

  gige_bridge dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef logic [63:0] words_t [$];
  words_t sent_q [int unsigned];   // by timestamp
  int n_sent = 0, n_frames = 0;
  int dest_use [NUM_DEST];
  bit stall = 0;

  always @(negedge clk) tx_ready = !stall && (($urandom % 5) != 0);

  logic [7:0] fr [$];
  always @(posedge clk) begin
    if (!rst && tx_valid && tx_ready) begin
      fr.push_back(tx_data);
      if (tx_last) begin
        check_frame();
        fr.delete();
      end
    end
  end

  function automatic logic [15:0] be16(int i);
    return {fr[i], fr[i+1]};
  endfunction

  task automatic check_frame();
    hdr_t h;
    int n, d;
    logic [31:0] sum;
    words_t w;
    n_frames++;
    check(fr.size() > 50, "frame size");
    if (fr.size() <= 50) return;
    for (int i = 0; i < 8; i++) h[63 - 8*i -: 8] = fr[42 + i];
    check(sent_q.exists(h.timestamp), $sformatf("payload of a sent packet ts=%0d", h.timestamp));
    if (!sent_q.exists(h.timestamp)) return;
    w = sent_q[h.timestamp];
    sent_q.delete(h.timestamp);
    n = w.size() * 8;
    check(fr.size() == 42 + n, "frame length");
    d = int'((h.timestamp >> cfg.slice_shift) & 32'(cfg.dest_mask));
    dest_use[d]++;
    for (int i = 0; i < 6; i++) check(fr[i] == cfg.dst_mac[d][47 - 8*i -: 8], "dst mac");
    for (int i = 0; i < 6; i++) check(fr[6 + i] == cfg.src_mac[47 - 8*i -: 8], "src mac");
    check(be16(12) == 16'h0800, "ethertype");
    check(fr[14] == 8'h45 && fr[23] == 8'd17, "ipv4/udp");
    check(be16(16) == 16'(28 + n), "ip length");
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += be16(i);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    check(sum == 32'hFFFF, "ip checksum");
    check({fr[26], fr[27], fr[28], fr[29]} == cfg.src_ip, "src ip");
    check({fr[30], fr[31], fr[32], fr[33]} == cfg.dst_ip[d], "dst ip");
    check(be16(34) == cfg.src_port, "udp src port");
    check(be16(36) == cfg.port_base + 16'(h.datatype), "udp dst port by datatype");
    check(be16(38) == 16'(8 + n), "udp length");
    for (int i = 0; i < n && 42 + i < fr.size(); i++)
      check(fr[42 + i] == w[i / 8][63 - 8 * (i % 8) -: 8], "payload byte");
  endtask

  int unsigned tsv = 0;
  task automatic send_packet(datatype_e dt, int len);
    hdr_t h;
    words_t w;
    h = '0; h.src_id = 8'h20; h.datatype = dt; h.pkt_size = 12'(len); h.timestamp = tsv;
    w.push_back(h);
    for (int i = 1; i < len; i++) w.push_back({$urandom, $urandom});
    sent_q[tsv] = w;
    n_sent++;
    tsv += 120;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      in_beat = '{sop: (i == 0), eop: (i == len - 1), data: w[i]};
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    cfg = '0;
    cfg.src_mac = 48'h02_00_00_00_01_01;
    cfg.src_ip = 32'hC0A8_0101;
    cfg.src_port = 16'd4000;
    cfg.port_base = 16'd5000;
    for (int i = 0; i < NUM_DEST; i++) begin
      cfg.dst_mac[i] = 48'h02_00_00_00_02_00 + 48'(i);
      cfg.dst_ip[i] = 32'hC0A8_0200 + 32'(i);
    end
    cfg.slice_shift = 5'd8;
    cfg.dest_mask = 2'd3;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 30; k++) begin
      datatype_e dt;
      dt = (k % 5 == 0) ? DT_STATUS : (k % 7 == 0) ? DT_CALIB : DT_DATA;
      send_packet(dt, (k % 3 == 0) ? 3 : (k % 3 == 1) ? 122 : 361);
      repeat ($urandom % 3000) @(negedge clk);
    end
    repeat (5000) @(posedge clk);
    check(pkts_dropped == 0, "no drops while the MAC keeps up");
    // MAC stalled: buffer fills up, whole packets dropped.
    stall = 1;
    for (int k = 0; k < 14; k++) send_packet(DT_DATA, 361);
    check(!room, "room low when full");
    stall = 0;
    repeat (60000) @(posedge clk);
    check(pkts_dropped > 0, "drops when full");
    check(n_frames + pkts_dropped == n_sent, $sformatf("frames %0d + dropped %0d == sent %0d", n_frames, pkts_dropped, n_sent));
    check(frames_sent == n_frames, "frame counter");
    foreach (dest_use[i]) check(dest_use[i] > 0, $sformatf("destination %0d used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
