// tb_nsps_l3_node: end-to-end test of the level-3 node at its default size
// (12 channels, 120-sample blocks, 4 tables, 4 data links + C&M port).
//
// The testbench plays the ADCs, the control-and-monitor master and the four
// level-2 receivers. It configures the node through command packets, runs
// acquisition, and checks every data packet that leaves the node against an
// independent model: per-channel block power decides the next block's normal
// table, words beyond the flag magnitude use the flag table, codes come from a
// copy of the default table formula plus the table writes sent, and the
// header, the extension word and the channel-major payload are rebuilt here.
// It also checks the IAA replies and counts each mechanism of the design:
// flagged words, table switches, a rewritten table entry in use, start and stop
// taking effect at block boundaries, round-robin use of all four links, packets
// dropped for lack of a requesting link, and buffer overruns when samples come
// faster than packets can leave. A mechanism that never happened is a failure.
module tb_nsps_l3_node;
  import nsps_pkg::*;
  localparam int NC = 12, T = 120, WPC = T / 12, PW = 2 + NC * WPC, NPT = 5;
  logic clk = 0, rst = 1;
  logic adc_valid = 0;
  logic signed [9:0] adc_data [NC];
  logic sync = 0;
  logic [31:0] ts_load = 32'd1000;
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

  always #4 clk = ~clk;   // 125 MHz fabric clock

  initial begin
    repeat (60000) @(posedge clk);
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
  longint last_sample_cyc [int unsigned];
  bit capturing = 0;
  int captured = 0;

  // mechanism counters
  int m_flag = 0, m_tag_switch = 0, m_lut_written_used = 0, m_start = 0, m_stop = 0;
  int m_iaa = 0, m_overrun = 0, m_drop = 0;
  int link_use [4];

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
        if (int'(n % T) == T - 1 && capturing) last_sample_cyc[32'(1000 + n - (T - 1))] = cyc;
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

  // ---------------- link receivers ----------------
  logic [63:0] got [$];
  int cur_port = -1;
  int received = 0;
  int order [$];
  always @(posedge clk) begin
    if (!rst && link_valid != 0) begin
      int p;
      p = -1;
      for (int i = 0; i < NPT; i++) if (link_valid[i]) p = i;
      if (link_beat.sop) begin
        got.delete();
        cur_port = p;
      end
      check(p == cur_port, "one port per packet");
      got.push_back(link_beat.data);
      if (link_beat.eop) begin
        hdr_t h;
        h = hdr_t'(got[0]);
        if (h.datatype == DT_STATUS) begin
          check(p == NPT - 1, "status on C&M port");
          m_iaa++;
          reply = got;
        end else begin
          check(h.datatype == DT_DATA && p < 4, "data packet on a data link");
          check(expected.exists(h.timestamp), $sformatf("packet ts %0d of an acquired block", h.timestamp));
          check(got.size() == PW, "packet length");
          if (expected.exists(h.timestamp) && got.size() == PW) begin
            for (int i = 0; i < PW; i++)
              check(got[i] == expected[h.timestamp][i],
                    $sformatf("ts %0d word %0d got %h exp %h", h.timestamp, i, got[i], expected[h.timestamp][i]));
            expected.delete(h.timestamp);
          end
          if (last_sample_cyc.exists(h.timestamp)) begin
            // header leaves a few cycles after the block's last sample
            check(cyc - last_sample_cyc[h.timestamp] - got.size() <= 6,
                  $sformatf("latency %0d", cyc - last_sample_cyc[h.timestamp] - got.size()));
          end
          received++;
          link_use[p]++;
          order.push_back(p);
        end
        got.delete();
      end
    end
  end

  initial begin
    for (int t = 0; t < 4; t++)
      for (int a = 0; a < 1024; a++) begin
        lut_m[t][a] = ref_code(t, int'(signed'(10'(a))));
        lut_written[t][a] = 0;
      end
    for (int k = 0; k < 3; k++) thr[k] = longint'(T) * (512 << (2 * k));
    foreach (cur_tag[c]) cur_tag[c] = 0;
    foreach (energy[c]) energy[c] = 0;
    foreach (adc_data[c]) adc_data[c] = 0;
    repeat (4) @(posedge clk);
    rst = 0;
    @(negedge clk);
    sync = 1;
    @(negedge clk);
    sync = 0;

    // Are you alive?
    send_cmd(DT_AYA, 8'h30, OP_NOP, 0, 0);
    repeat (20) @(negedge clk);
    check(m_iaa == 1 && reply.size() == 3, "IAA reply");
    // Table rewrites: entry 0..15 of table 0 and 1 get new codes.
    for (int a = 0; a < 16; a++) begin
      send_cmd(DT_CMD, 8'h30, OP_WR_LUT, {4'b0, 2'(a % 2), 10'(a)}, 32'(15 - a));
      lut_m[a % 2][a] = 4'(15 - a);
      lut_written[a % 2][a] = 1;
    end
    // Lower the flag magnitude, set source id via broadcast.
    send_cmd(DT_CMD, 8'h30, OP_SET_THR, 16'd3, 32'd460);
    flag_thr = 460;
    send_cmd(DT_CMD, 8'hFF, OP_SET_SRC, 0, 32'h31);
    my_id = 8'h31;
    repeat (20) @(negedge clk);
    check(fwd_valid == 0, "forwarding idle");

    fork
      run_adc(40, 80, 1);
      begin
        // Start mid-block of block 2.
        repeat (2 * 150) @(negedge clk);
        mid_block();
        send_cmd(DT_CMD, 8'h31, OP_START, 0, 0);
        want_run = 1;
        // Data links stop requesting for a while: whole packets dropped.
        repeat (1500) @(negedge clk);
        link_req[3:0] = 4'b0000;
        repeat (600) @(negedge clk);
        link_req[3:0] = 4'b1111;
        repeat (1000) @(negedge clk);
        // Only two links requesting: those two share the traffic.
        link_req[3:0] = 4'b0101;
        repeat (800) @(negedge clk);
        link_req[3:0] = 4'b1111;
      end
    join
    // Samples faster than packets can leave: buffer overruns.
    run_adc(10, 100, 1);
    // Stop mid-block.
    fork
      run_adc(6, 80, 1);
      begin
        repeat (150) @(negedge clk);
        mid_block();
        send_cmd(DT_CMD, 8'h31, OP_STOP, 0, 0);
        want_run = 0;
      end
    join
    repeat (400) @(negedge clk);
    send_cmd(DT_AYA, 8'h31, OP_NOP, 0, 0);
    repeat (30) @(negedge clk);

    m_overrun = overflows;
    m_drop = drops;
    check(reply.size() == 3 && reply[2] == {overflows, drops}, "IAA reports counters");
    check(received + overflows + drops == captured,
          $sformatf("received %0d + overruns %0d + drops %0d == acquired %0d", received, overflows, drops, captured));
    check(expected.size() == overflows + drops, "only counted blocks missing");
    check(pkts_built == received + drops, "packets built");
    $display("mechanisms: flagged=%0d table_switches=%0d rewritten_entry_used=%0d starts=%0d stops=%0d iaa=%0d overruns=%0d drops=%0d links=%0d/%0d/%0d/%0d",
             m_flag, m_tag_switch, m_lut_written_used, m_start, m_stop, m_iaa, m_overrun, m_drop,
             link_use[0], link_use[1], link_use[2], link_use[3]);
    check(m_flag > 0, "flagging happened");
    check(m_tag_switch > 0, "table switch happened");
    check(m_lut_written_used > 0, "rewritten table entry used");
    check(m_start == 1 && m_stop == 1, "start and stop at block boundaries");
    check(m_iaa == 22, $sformatf("IAA replies %0d", m_iaa));
    check(m_overrun > 0, "buffer overrun happened");
    check(m_drop > 0, "pull drop happened");
    for (int p = 0; p < 4; p++) check(link_use[p] > 0, $sformatf("link %0d used", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
