// tb_packet_builder: self-checking test of the block buffer and packetiser.
// Feeds blocks of random 5-bit words for 12 channels with the sequencer's
// block marks, some blocks not acquired, and checks every packet that comes
// out word by word against a packet built independently from the same data:
// header fields, extension word with the table tags, channel-major payload.
// A phase with out_ready held low forces buffer overruns; the test checks that
// whole blocks are lost, counted, and that every acquired block is either
// delivered or counted. In the free-running phase it checks that a packet
// starts one cycle after the block's last sample.
module tb_packet_builder;
  import nsps_pkg::*;
  localparam int NC = 12, T = 120, WPC = T / 12, PW = 2 + NC * WPC;
  logic clk = 0, rst = 1;
  logic in_valid = 0, first = 0, last = 0, acq_on = 0;
  logic [31:0] ts = 0;
  logic [4:0] words [NC];
  logic [1:0] tags [NC];
  logic [1:0] flag_tag = 0;
  logic [7:0] src_id = 8'h5A;
  beat_t out_beat;
  logic out_valid, out_ready = 1;
  logic [31:0] pkts_built, overflows;
  int checks = 0, failures = 0;

  packet_builder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef logic [63:0] pkt_t [PW];
  pkt_t expected [int unsigned];     // keyed by timestamp
  int acquired = 0, received = 0;
  longint cyc = 0, last_cyc = -100;
  bit free_phase = 1;

  always @(posedge clk) cyc++;

  // Receiver.
  logic [63:0] got [$];
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      if (out_beat.sop) begin
        check(got.size() == 0, "sop inside packet");
        got.delete();
        if (free_phase) check(cyc - last_cyc <= 2, $sformatf("latency %0d", cyc - last_cyc));
      end
      got.push_back(out_beat.data);
      if (out_beat.eop) begin
        hdr_t h;
        h = hdr_t'(got[0]);
        received++;
        check(got.size() == PW, "packet length");
        check(expected.exists(h.timestamp), "packet of an acquired block");
        if (expected.exists(h.timestamp) && got.size() == PW) begin
          for (int i = 0; i < PW; i++)
            check(got[i] == expected[h.timestamp][i],
                  $sformatf("ts %0d word %0d got %h exp %h", h.timestamp, i, got[i], expected[h.timestamp][i]));
          expected.delete(h.timestamp);
        end
        got.delete();
      end
    end
  end

  task automatic send_block(bit acq, int gap_pct);
    pkt_t p;
    logic [1:0] tg [NC];
    logic [1:0] ft;
    hdr_t h;
    foreach (tg[c]) tg[c] = 2'($urandom);
    ft = 2'($urandom);
    h = '0;
    h.src_id = src_id; h.datatype = DT_DATA; h.pixel = PIX_5BIT; h.streams = 4'(NC);
    h.pkt_size = 12'(PW); h.timestamp = ts;
    p[0] = h;
    p[1] = '0;
    for (int c = 0; c < NC; c++) p[1][2*c +: 2] = tg[c];
    p[1][2*NC +: 2] = ft;
    for (int i = 2; i < PW; i++) p[i] = '0;
    for (int s = 0; s < T; s++) begin
      @(negedge clk);
      while ($urandom % 100 < gap_pct) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1; first = (s == 0); last = (s == T - 1); acq_on = acq;
      foreach (words[c]) begin
        words[c] = 5'($urandom);
        p[2 + c * WPC + s / 12][5 * (s % 12) +: 5] = words[c];
      end
      // Tags are presented with the first sample only; scramble them later.
      foreach (tags[c]) tags[c] = (s == 0) ? tg[c] : 2'($urandom);
      flag_tag = (s == 0) ? ft : 2'($urandom);
      if (acq) begin
        int unsigned key;
        key = ts - s;
        expected[key] = p;
      end
      @(posedge clk);
      #1 ts = ts + 1;
      if (s == T - 1) last_cyc = cyc;
    end
    @(negedge clk);
    in_valid = 0; first = 0; last = 0;
    if (acq) acquired++;
  endtask

  initial begin
    foreach (words[c]) words[c] = 0;
    foreach (tags[c]) tags[c] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // Free-running phase: every acquired block must come out.
    for (int b = 0; b < 12; b++) send_block(b != 3 && b != 7, 10);
    repeat (300) @(posedge clk);
    check(received == acquired, $sformatf("all delivered %0d/%0d", received, acquired));
    check(overflows == 0, "no overflow while free");
    // Stall phase: the link stops taking packets for several blocks.
    free_phase = 0;
    out_ready = 0;
    for (int b = 0; b < 5; b++) send_block(1, 5);
    out_ready = 1;
    for (int b = 0; b < 4; b++) begin
      fork
        send_block(1, 2);
        begin
          while (1) begin
            @(negedge clk);
            out_ready = ($urandom % 8) != 0;
          end
        end
      join_any
      disable fork;
      out_ready = 1;
    end
    repeat (400) @(posedge clk);
    check(overflows >= 3, $sformatf("overruns counted (%0d)", overflows));
    check(received + overflows == acquired, $sformatf("delivered %0d + lost %0d == acquired %0d", received, overflows, acquired));
    check(pkts_built == received, "pkts_built counter");
    check(expected.size() == overflows, "lost blocks are the ones counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
