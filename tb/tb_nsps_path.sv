// tb_nsps_path: end-to-end test of the whole data path at its default size:
// level-3 node (12 channels, 120-sample blocks, 4 links), level-2 receive
// buffer and decode/pack unit, level-1 GigE bridge.
//
// The testbench plays the ADCs, the control-and-monitor master and the GigE
// MAC. It keeps an independent model of the level-3 coding (block power picks
// the next block's table, large samples are flagged and use the flag table,
// table rewrites by command), decodes the model's coded words with its own
// copy of the level-2 decode table, packs sensor pairs into complex words and
// rebuilds the UDP frame, then compares every byte of every frame on the
// Ethernet side. Because the decoded stream is far above what one byte per
// clock can carry, most blocks are dropped whole at level 3 (no link asks for
// them) and the run also forces buffer overruns with a full-rate burst. Every
// acquired block must be either framed or counted as overrun or drop. The
// mechanisms counted are: flagged samples, table switches, a rewritten level-3
// entry and a rewritten level-2 decode entry in use, start and stop, IAA
// replies on the C&M port, overruns, pull drops, back-pressure from the MAC,
// and all four time-slice destinations used. One that never happens fails.
module tb_nsps_path;
  import nsps_pkg::*;
  localparam int NC = 12, T = 120, WPC = T / 12, PW = 2 + NC * WPC, NPT = 5;
  localparam int OW = 1 + (NC / 2) * (T / 2);
  logic clk = 0, rst = 1;
  logic adc_valid = 0;
  logic signed [9:0] adc_data [NC];
  logic sync = 0;
  logic [31:0] ts_load = 32'd1000;
  beat_t cmd_beat = '0;
  logic cmd_valid = 0;
  beat_t fwd_beat;
  logic fwd_valid;
  logic cm_req = 1;
  beat_t cm_beat;
  logic cm_valid;
  logic dec_we = 0;
  logic [1:0] dec_tag = 0;
  logic [3:0] dec_code = 0;
  logic [15:0] dec_value = 0;
  bridge_cfg_t gige_cfg;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;
  logic [31:0] l3_pkts_built, l3_overflows, l3_drops, l2_pkts_out, l2_flagged,
               frames_sent, l2_bad, bridge_dropped;
  int checks = 0, failures = 0;

  nsps_path dut (.*);

  always #4 clk = ~clk;   // 125 MHz fabric clock

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- reference model ----------------
  logic [3:0] lut_m [4][1024];
  longint unsigned thr [3];
  int flag_thr = 448;
  logic [1:0] flag_tag_m = 2'd3;
  logic [7:0] my_id = 8'h30;
  logic [1:0] cur_tag [NC];          // normal table of the block being sent
  longint unsigned energy [NC];
  bit lut_written [4][1024];
  longint unsigned n = 0;            // samples since sync
  typedef logic [63:0] pkt_t [PW];
  pkt_t cur_pkt;
  pkt_t expected [int unsigned];     // captured blocks by timestamp
  bit capturing = 0;
  int captured = 0;

  // mechanism counters
  int m_flag = 0, m_tag_switch = 0, m_lut_written_used = 0, m_start = 0, m_stop = 0;
  int m_iaa = 0, m_overrun = 0, m_drop = 0;

  function automatic logic [3:0] ref_code(int t, int x);
    int y;
    y = x >>> (3 + t);
    if (y > 7) y = 7;
    if (y < -8) y = -8;
    return 4'(y);
  endfunction

  longint cyc = 0;
  always @(posedge clk) cyc++;

  // Expected acquisition state, as the sequencer should apply it at block ends.
  bit want_run = 0, run = 0;

  // One ADC sample time: compute the model, drive the pins.
  task automatic adc_sample(int amp [NC], int spike_pct);
    int idx;
    idx = int'(n % T);
    if (idx == 0) begin
      capturing = run;
      if (run) begin
        hdr_t h;
        h = '0;
        h.src_id = my_id; h.datatype = DT_DATA; h.pixel = PIX_5BIT; h.streams = 4'(NC);
        h.pkt_size = 12'(PW); h.timestamp = 32'(1000 + n);
        cur_pkt[0] = h;
        cur_pkt[1] = '0;
        for (int c = 0; c < NC; c++) cur_pkt[1][2*c +: 2] = cur_tag[c];
        cur_pkt[1][2*NC +: 2] = flag_tag_m;
        for (int i = 2; i < PW; i++) cur_pkt[i] = '0;
      end
    end
    for (int c = 0; c < NC; c++) begin
      int x, mag;
      logic [1:0] sel;
      bit f;
      x = int'($urandom % (2 * amp[c] + 1)) - amp[c];
      if ($urandom % 1000 < spike_pct * 10) x = ($urandom % 2) ? 511 - int'($urandom % 40) : -512 + int'($urandom % 40);
      if (x > 511) x = 511;
      if (x < -512) x = -512;
      adc_data[c] = 10'(x);
      energy[c] += longint'(x * x);
      mag = (x < 0) ? -x : x;
      f = mag > flag_thr;
      sel = f ? flag_tag_m : cur_tag[c];
      if (capturing) begin
        if (f) m_flag++;
        if (lut_written[sel][10'(x)]) m_lut_written_used++;
        cur_pkt[2 + c * WPC + idx / 12][5 * (idx % 12) +: 5] = {f, lut_m[sel][10'(x)]};
      end
    end
    adc_valid = 1;
    if (idx == T - 1) begin
      if (capturing) begin
        expected[32'(1000 + n - (T - 1))] = cur_pkt;
        captured++;
      end
      for (int c = 0; c < NC; c++) begin
        logic [1:0] nt;
        nt = 2'((energy[c] > thr[0]) + (energy[c] > thr[1]) + (energy[c] > thr[2]));
        if (nt != cur_tag[c]) m_tag_switch++;
        cur_tag[c] = nt;
        energy[c] = 0;
      end
      if (run != want_run) begin
        if (want_run) m_start++; else m_stop++;
      end
      run = want_run;
    end
  endtask

  // Runs the ADC for nblk blocks; valid_pct percent of cycles carry a sample.
  task automatic run_adc(int nblk, int valid_pct, int spike_pct);
    int amp [NC];
    for (int b = 0; b < nblk; b++) begin
      for (int c = 0; c < NC; c++) begin
        int choice [5] = '{20, 60, 120, 250, 500};
        amp[c] = choice[$urandom % 5];
      end
      for (int s = 0; s < T; s++) begin
        @(negedge clk);
        while (int'($urandom % 100) >= valid_pct) begin
          adc_valid = 0;
          @(negedge clk);
        end
        adc_sample(amp, spike_pct);
        n++;
      end
    end
    @(negedge clk);
    adc_valid = 0;
  endtask

  // ---------------- command master ----------------
  logic [63:0] reply [$];
  task automatic send_cmd(datatype_e dt, logic [7:0] tgt, logic [7:0] op, logic [15:0] addr, logic [31:0] data);
    hdr_t h;
    cmd_t c;
    h = '0; h.src_id = 8'h00; h.datatype = dt; h.pkt_size = 12'd2;
    c = '{target: tgt, opcode: op, addr: addr, data: data};
    @(negedge clk);
    cmd_beat = '{sop: 1'b1, eop: 1'b0, data: h}; cmd_valid = 1;
    @(negedge clk);
    cmd_beat = '{sop: 1'b0, eop: 1'b1, data: c};
    @(negedge clk);
    cmd_valid = 0;
    repeat (8) @(negedge clk);   // leave time for the status reply
  endtask

  // Waits until the sample index is in the middle of a block, so that a start
  // or stop sent now is applied at the end of this block.
  task automatic mid_block();
    while (!(n % T > 30 && n % T < 60)) @(negedge clk);
  endtask

  // ---------------- C&M port ----------------
  logic [63:0] got [$];
  always @(posedge clk) begin
    if (!rst && cm_valid) begin
      if (cm_beat.sop || got.size() > 8) got.delete();
      got.push_back(cm_beat.data);
      if (cm_beat.eop) begin
        hdr_t h;
        h = hdr_t'(got[0]);
        check(h.datatype == DT_STATUS && got.size() == 3, "status reply on C&M port");
        m_iaa++;
        reply = got;
      end
    end
  end

  // ---------------- level-2 decode model ----------------
  logic [15:0] dec_m [4][16];
  bit dec_written [4][16];
  int m_dec_written_used = 0, m_flag_out = 0;

  function automatic logic [63:0] cplx_word(pkt_t cp, int w);
    // output word w (1..OW-1) of the complex packet made from coded packet cp
    int p, s;
    logic [63:0] r;
    p = (w - 1) / (T / 2);
    s = 2 * ((w - 1) % (T / 2));
    for (int k = 0; k < 2; k++) begin
      logic [15:0] v [2];
      for (int j = 0; j < 2; j++) begin
        int c, idx;
        logic [4:0] cw;
        logic [1:0] t;
        c = 2 * p + j;
        idx = s + k;
        cw = cp[2 + c * WPC + idx / 12][5 * (idx % 12) +: 5];
        t = cw[4] ? cp[1][25:24] : cp[1][2 * c +: 2];
        v[j] = dec_m[t][cw[3:0]];
        if (dec_written[t][cw[3:0]]) m_dec_written_used++;
        if (cw[4]) m_flag_out++;
      end
      r[63 - 32 * k -: 32] = {v[0], v[1]};
    end
    return r;
  endfunction

  // ---------------- GigE MAC ----------------
  int n_frames = 0, m_backpressure = 0;
  int dest_use [NUM_DEST];
  logic [7:0] fr [$];
  always @(negedge clk) tx_ready = ($urandom % 10) != 0;
  always @(posedge clk) begin
    if (!rst && tx_valid && !tx_ready) m_backpressure++;
    if (!rst && tx_valid && tx_ready) begin
      fr.push_back(tx_data);
      if (tx_last || fr.size() > 42 + 8 * OW) begin
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
    int d;
    logic [31:0] sum;
    pkt_t cp;
    n_frames++;
    check(fr.size() == 42 + 8 * OW, $sformatf("frame length %0d", fr.size()));
    if (fr.size() != 42 + 8 * OW) return;
    for (int i = 0; i < 8; i++) h[63 - 8*i -: 8] = fr[42 + i];
    check(h.src_id == 8'h20 && h.datatype == DT_CPLX && h.pixel == PIX_C32 &&
          h.streams == 4'(NC / 2) && h.pkt_size == 12'(OW), "complex packet header");
    check(expected.exists(h.timestamp), $sformatf("frame ts %0d of an acquired block", h.timestamp));
    if (!expected.exists(h.timestamp)) return;
    cp = expected[h.timestamp];
    expected.delete(h.timestamp);
    d = int'((h.timestamp >> gige_cfg.slice_shift) & 32'(gige_cfg.dest_mask));
    dest_use[d]++;
    for (int i = 0; i < 6; i++) check(fr[i] == gige_cfg.dst_mac[d][47 - 8*i -: 8], "dst mac by slice");
    for (int i = 0; i < 6; i++) check(fr[6 + i] == gige_cfg.src_mac[47 - 8*i -: 8], "src mac");
    check(be16(12) == 16'h0800 && fr[14] == 8'h45 && fr[23] == 8'd17, "ipv4 udp");
    check(be16(16) == 16'(28 + 8 * OW), "ip length");
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += be16(i);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    sum = (sum & 32'hFFFF) + (sum >> 16);
    check(sum == 32'hFFFF, "ip checksum");
    check({fr[30], fr[31], fr[32], fr[33]} == gige_cfg.dst_ip[d], "dst ip by slice");
    check(be16(36) == gige_cfg.port_base + 16'(DT_CPLX), "udp port by datatype");
    check(be16(38) == 16'(8 + 8 * OW), "udp length");
    for (int w = 1; w < OW; w++) begin
      logic [63:0] e, g;
      e = cplx_word(cp, w);
      for (int b = 0; b < 8; b++) g[63 - 8*b -: 8] = fr[42 + 8*w + b];
      check(g == e, $sformatf("ts %0d word %0d got %h exp %h", h.timestamp, w, g, e));
    end
  endtask

  initial begin
    for (int t = 0; t < 4; t++)
      for (int a = 0; a < 1024; a++) begin
        lut_m[t][a] = ref_code(t, int'(signed'(10'(a))));
        lut_written[t][a] = 0;
      end
    for (int t = 0; t < 4; t++)
      for (int k = 0; k < 16; k++) begin
        dec_m[t][k] = 16'(int'(signed'(4'(k))) * (8 << t));
        dec_written[t][k] = 0;
      end
    for (int k = 0; k < 3; k++) thr[k] = longint'(T) * (512 << (2 * k));
    foreach (cur_tag[c]) cur_tag[c] = 0;
    foreach (energy[c]) energy[c] = 0;
    foreach (adc_data[c]) adc_data[c] = 0;
    gige_cfg = '0;
    gige_cfg.src_mac = 48'h02_00_00_00_01_01;
    gige_cfg.src_ip = 32'hC0A8_0101;
    gige_cfg.src_port = 16'd4000;
    gige_cfg.port_base = 16'd5000;
    for (int i = 0; i < NUM_DEST; i++) begin
      gige_cfg.dst_mac[i] = 48'h02_00_00_00_02_10 + 48'(i);
      gige_cfg.dst_ip[i] = 32'hC0A8_0210 + 32'(i);
    end
    gige_cfg.slice_shift = 5'd7;
    gige_cfg.dest_mask = 2'd3;
    repeat (4) @(posedge clk);
    rst = 0;
    @(negedge clk);
    sync = 1;
    @(negedge clk);
    sync = 0;

    // Level-2 decode: flagged words of the flag table decode to full scale.
    @(negedge clk);
    dec_we = 1; dec_tag = 2'd3; dec_code = 4'd7; dec_value = 16'h7FFF;
    dec_m[3][7] = 16'h7FFF; dec_written[3][7] = 1;
    @(negedge clk);
    dec_tag = 2'd3; dec_code = 4'd8; dec_value = 16'h8000;
    dec_m[3][8] = 16'h8000; dec_written[3][8] = 1;
    @(negedge clk);
    dec_we = 0;

    send_cmd(DT_AYA, 8'h30, OP_NOP, 0, 0);
    repeat (20) @(negedge clk);
    check(m_iaa == 1 && reply.size() == 3, "IAA reply");
    for (int a = 0; a < 16; a++) begin
      send_cmd(DT_CMD, 8'h30, OP_WR_LUT, {4'b0, 2'(a % 2), 10'(a)}, 32'(15 - a));
      lut_m[a % 2][a] = 4'(15 - a);
      lut_written[a % 2][a] = 1;
    end
    send_cmd(DT_CMD, 8'h30, OP_SET_THR, 16'd3, 32'd460);
    flag_thr = 460;

    fork
      run_adc(120, 80, 1);
      begin
        repeat (2 * 150) @(negedge clk);
        mid_block();
        send_cmd(DT_CMD, 8'h30, OP_START, 0, 0);
        want_run = 1;
      end
    join
    // Samples faster than packets can leave: buffer overruns.
    run_adc(10, 100, 1);
    fork
      run_adc(120, 60, 1);
      begin
        repeat (100 * 200) @(negedge clk);
        mid_block();
        send_cmd(DT_CMD, 8'h30, OP_STOP, 0, 0);
        want_run = 0;
      end
    join
    // Let the bridge drain.
    begin
      int idle;
      idle = 0;
      while (idle < 5000) begin
        @(negedge clk);
        idle = tx_valid ? 0 : idle + 1;
      end
    end
    send_cmd(DT_AYA, 8'h30, OP_NOP, 0, 0);
    repeat (30) @(negedge clk);

    m_overrun = l3_overflows;
    m_drop = l3_drops;
    check(reply.size() == 3 && reply[2] == {l3_overflows, l3_drops}, "IAA reports counters");
    check(n_frames + l3_overflows + l3_drops == captured,
          $sformatf("frames %0d + overruns %0d + drops %0d == acquired %0d", n_frames, l3_overflows, l3_drops, captured));
    check(expected.size() == l3_overflows + l3_drops, "only counted blocks missing");
    check(frames_sent == n_frames && l2_pkts_out == n_frames, "frame counters");
    check(l2_bad == 0 && bridge_dropped == 0, "no bad or dropped packets after level 3");
    check(l2_flagged == m_flag_out, "level-2 flag count");
    $display("mechanisms: frames=%0d flagged=%0d table_switches=%0d l3_rewritten_used=%0d l2_rewritten_used=%0d starts=%0d stops=%0d iaa=%0d overruns=%0d drops=%0d mac_stalls=%0d dests=%0d/%0d/%0d/%0d",
             n_frames, m_flag_out, m_tag_switch, m_lut_written_used, m_dec_written_used, m_start, m_stop, m_iaa,
             m_overrun, m_drop, m_backpressure, dest_use[0], dest_use[1], dest_use[2], dest_use[3]);
    check(n_frames > 0, "frames sent");
    check(m_flag_out > 0, "flagged samples reached the network");
    check(m_tag_switch > 0, "table switch happened");
    check(m_lut_written_used > 0, "rewritten level-3 entry used");
    check(m_dec_written_used > 0, "rewritten level-2 entry used");
    check(m_start == 1 && m_stop == 1, "start and stop at block boundaries");
    check(m_iaa == 21, $sformatf("IAA replies %0d", m_iaa));
    check(m_overrun > 0, "buffer overrun happened");
    check(m_drop > 0, "pull drop happened");
    check(m_backpressure > 0, "MAC back-pressure happened");
    for (int i = 0; i < NUM_DEST; i++) check(dest_use[i] > 0, $sformatf("destination %0d used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
