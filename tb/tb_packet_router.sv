// tb_packet_router: self-checking test of the static-route pull switch.
// Two sources offer packets of random length and datatype. The downstream
// ports request packets at random. Each delivered packet is checked word by
// word against what its source sent, and its port against the route table
// (mask of the datatype, port requesting when the packet was decided); packets
// for which no port of the route was requesting must be dropped whole and
// counted. Round-robin use of the four data links and a route-table rewrite
// are checked too.
module tb_packet_router;
  import nsps_pkg::*;
  localparam int NS = 2, NP = 5;
  logic clk = 0, rst = 1;
  beat_t src_beat [NS];
  logic [NS-1:0] src_valid = '0, src_ready;
  logic [NP-1:0] link_req = '0;
  beat_t link_beat;
  logic [NP-1:0] link_valid;
  logic route_we = 0;
  logic [3:0] route_idx = 0;
  logic [NP-1:0] route_mask = 0;
  logic [31:0] sent, drops;
  int checks = 0, failures = 0;

  packet_router dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [NP-1:0] routes [16];
  // Packets each source has sent, in order; delivered packets are matched by
  // a serial number in the timestamp field.
  logic [63:0] sent_pkts [int unsigned][$];
  int n_recv = 0;
  int port_use [NP];
  int serial = 0;

  // Source drivers.
  task automatic source(int s, int npk);
    for (int k = 0; k < npk; k++) begin
      int len;
      hdr_t h;
      logic [63:0] w [$];
      len = 1 + $urandom % 12;
      h = '0;
      h.src_id = 8'(s);
      h.datatype = (s == 1) ? DT_STATUS : (($urandom % 4 == 0) ? DT_CALIB : DT_DATA);
      h.pkt_size = 12'(len);
      h.timestamp = serial++;
      w.push_back(h);
      for (int i = 1; i < len; i++) w.push_back({$urandom, $urandom});
      sent_pkts[h.timestamp] = w;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        src_beat[s] = '{sop: (i == 0), eop: (i == len - 1), data: w[i]};
        src_valid[s] = 1;
        do @(posedge clk); while (!src_ready[s]);
      end
      @(negedge clk);
      src_valid[s] = 0;
      repeat ($urandom % 20) @(negedge clk);
    end
  endtask

  // Request history: the route decision uses link_req two clock edges before
  // the first word of a packet appears on a link.
  logic [NP-1:0] req_d1 = '0, req_d2 = '0;
  always @(posedge clk) begin
    req_d2 <= req_d1;
    req_d1 <= link_req;
  end

  // Receiver.
  logic [63:0] got [$];
  int cur_port = -1;
  always @(posedge clk) begin
    if (!rst && link_valid != 0) begin
      int p;
      p = -1;
      for (int i = 0; i < NP; i++) if (link_valid[i]) p = i;
      if (link_beat.sop) begin
        hdr_t h0;
        h0 = hdr_t'(link_beat.data);
        got.delete();
        cur_port = p;
        check(routes[h0.datatype][p] && req_d2[p], $sformatf("port %0d allowed and requesting", p));
      end
      check(p == cur_port, "whole packet on one port");
      got.push_back(link_beat.data);
      if (link_beat.eop) begin
        hdr_t h;
        h = hdr_t'(got[0]);
        n_recv++;
        port_use[p]++;
        check(sent_pkts.exists(h.timestamp), "known packet");
        if (sent_pkts.exists(h.timestamp)) begin
          check(got.size() == sent_pkts[h.timestamp].size(), "length");
          foreach (got[i]) if (i < sent_pkts[h.timestamp].size())
            check(got[i] == sent_pkts[h.timestamp][i], "payload");
        end
      end
    end
  end

  initial begin
    foreach (src_beat[s]) src_beat[s] = '0;
    for (int i = 0; i < 16; i++) routes[i] = '0;
    routes[DT_DATA] = 5'b01111; routes[DT_STATUS] = 5'b10000; routes[DT_CALIB] = 5'b10000;
    repeat (3) @(posedge clk);
    rst = 0;
    fork
      source(0, 150);
      source(1, 40);
      begin
        for (int i = 0; i < 8000; i++) begin
          @(negedge clk);
          link_req = 5'($urandom);
          if (i > 4000 && i < 4400) link_req = '0;   // everything busy: drops
          if (i == 5000) begin
            route_we = 1; route_idx = DT_CALIB; route_mask = 5'b00011;
          end else route_we = 0;
          #1 if (i == 5000) routes[DT_CALIB] = 5'b00011;
        end
      end
    join
    repeat (50) @(posedge clk);
    check(n_recv == sent, "sent counter");
    check(drops > 0, "drops happened");
    check(n_recv + drops == serial, "every packet delivered or dropped");
    for (int p = 0; p < NP; p++) check(port_use[p] > 0, $sformatf("port %0d used", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
