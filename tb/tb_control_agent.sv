// tb_control_agent: self-checking test of the command and status handler.
// Sends command and AYA packets addressed to this node, to another node and to
// all nodes, then checks the configuration outputs (table writes, source id,
// start/stop pulses, route writes, thresholds, flag settings), the contents of
// each IAA status reply, and which commands are regenerated downstream.
module tb_control_agent;
  import nsps_pkg::*;
  localparam logic [7:0] ME = 8'h30;
  logic clk = 0, rst = 1;
  beat_t cmd_beat = '0;
  logic cmd_valid = 0;
  beat_t fwd_beat;
  logic fwd_valid;
  beat_t st_beat;
  logic st_valid, st_ready = 1;
  logic [31:0] ts = 32'h1000, pkts_built = 32'd77, overflows = 32'd5, drops = 32'd9;
  logic acq_on = 1;
  logic [7:0] src_id;
  logic start_req, stop_req, lut_we, route_we;
  logic [1:0] lut_tag, flag_tag;
  logic [9:0] lut_addr, flag_thresh;
  logic [3:0] lut_wdata, route_idx;
  logic [4:0] route_mask;
  logic [31:0] thresh [3];
  logic [31:0] cmds_seen;
  int checks = 0, failures = 0;

  control_agent dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Monitors.
  int n_start = 0, n_stop = 0, n_lut = 0, n_route = 0;
  logic [11:0] last_lut_a; logic [3:0] last_lut_d;
  logic [3:0] last_r_idx; logic [4:0] last_r_mask;
  logic [63:0] fwd [$];
  logic [63:0] st [$];
  always @(posedge clk) if (!rst) begin
    if (start_req) n_start++;
    if (stop_req) n_stop++;
    if (lut_we) begin n_lut++; last_lut_a = {lut_tag, lut_addr}; last_lut_d = lut_wdata; end
    if (route_we) begin n_route++; last_r_idx = route_idx; last_r_mask = route_mask; end
    if (fwd_valid) fwd.push_back(fwd_beat.data);
    if (st_valid && st_ready) st.push_back(st_beat.data);
  end

  task automatic send(datatype_e dt, logic [7:0] tgt, logic [7:0] op, logic [15:0] addr, logic [31:0] data);
    hdr_t h;
    cmd_t c;
    h = '0; h.src_id = 8'h01; h.datatype = dt; h.pkt_size = 12'd2;
    c = '{target: tgt, opcode: op, addr: addr, data: data};
    @(negedge clk);
    cmd_beat = '{sop: 1'b1, eop: 1'b0, data: h}; cmd_valid = 1;
    @(negedge clk);
    cmd_beat = '{sop: 1'b0, eop: 1'b1, data: c};
    @(negedge clk);
    cmd_valid = 0;
    repeat (8) @(negedge clk);
  endtask

  task automatic expect_reply(logic [7:0] op, logic [15:0] addr, logic [7:0] id);
    hdr_t h;
    check(st.size() == 3, $sformatf("reply of 3 words (%0d)", st.size()));
    if (st.size() == 3) begin
      h = hdr_t'(st[0]);
      check(h.src_id == id && h.datatype == DT_STATUS && h.pkt_size == 3, "reply header");
      check(st[1] == {op, 7'b0, acq_on, addr, pkts_built}, "reply word 1");
      check(st[2] == {overflows, drops}, "reply word 2");
    end
    st.delete();
  endtask

  task automatic expect_fwd(bit yes, logic [7:0] tgt, logic [7:0] op);
    if (yes) begin
      check(fwd.size() == 2, "forwarded 2 words");
      if (fwd.size() == 2) begin
        hdr_t fh;
        cmd_t fc;
        fh = hdr_t'(fwd[0]);
        fc = cmd_t'(fwd[1]);
        check(fh.src_id == 8'h01, "forwarded header");
        check(fc.target == tgt && fc.opcode == op, "forwarded command");
      end
    end else begin
      check(fwd.size() == 0, "not forwarded");
    end
    fwd.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check(src_id == ME, "reset source id");
    check(thresh[0] == 120 * 512 && thresh[1] == 120 * 2048 && thresh[2] == 120 * 8192, "reset thresholds");
    // AYA to me: reply, no forward.
    send(DT_AYA, ME, OP_NOP, 16'h0, 0);
    expect_reply(OP_NOP, 16'h0, ME);
    expect_fwd(0, 0, 0);
    // AYA to another node: forward only.
    send(DT_AYA, 8'h44, OP_NOP, 16'h0, 0);
    check(st.size() == 0, "no reply for other node");
    expect_fwd(1, 8'h44, OP_NOP);
    // LUT write to me.
    send(DT_CMD, ME, OP_WR_LUT, {4'b0, 2'd2, 10'd777}, 32'h0000_000B);
    check(n_lut == 1 && last_lut_a == {2'd2, 10'd777} && last_lut_d == 4'hB, "table write");
    expect_reply(OP_WR_LUT, {4'b0, 2'd2, 10'd777}, ME);
    expect_fwd(0, 0, 0);
    // Start, broadcast: executed, answered and forwarded.
    send(DT_CMD, BROADCAST_ID, OP_START, 16'h0, 0);
    check(n_start == 1, "start pulse");
    expect_reply(OP_START, 16'h0, ME);
    expect_fwd(1, BROADCAST_ID, OP_START);
    // Stop for another node: not executed.
    send(DT_CMD, 8'h31, OP_STOP, 16'h0, 0);
    check(n_stop == 0, "foreign stop ignored");
    expect_fwd(1, 8'h31, OP_STOP);
    send(DT_CMD, ME, OP_STOP, 16'h0, 0);
    check(n_stop == 1, "stop pulse");
    expect_reply(OP_STOP, 16'h0, ME);
    // Routes and thresholds.
    send(DT_CMD, ME, OP_SET_ROUTE, 16'h0005, 32'h13);
    check(n_route == 1 && last_r_idx == 4'h5 && last_r_mask == 5'h13, "route write");
    expect_reply(OP_SET_ROUTE, 16'h0005, ME);
    send(DT_CMD, ME, OP_SET_THR, 16'd1, 32'd123456);
    check(thresh[1] == 32'd123456 && thresh[0] == 120 * 512, "threshold write");
    send(DT_CMD, ME, OP_SET_THR, 16'd3, 32'd300);
    check(flag_thresh == 10'd300, "flag threshold");
    send(DT_CMD, ME, OP_SET_THR, 16'd4, 32'd1);
    check(flag_tag == 2'd1, "flag table");
    st.delete();
    // New source id: the node now answers to it.
    send(DT_CMD, ME, OP_SET_SRC, 16'h0, 32'h52);
    check(src_id == 8'h52, "source id");
    st.delete();
    send(DT_AYA, 8'h52, OP_NOP, 16'h0, 0);
    expect_reply(OP_NOP, 16'h0, 8'h52);
    send(DT_AYA, ME, OP_NOP, 16'h0, 0);
    check(st.size() == 0, "old id no longer answered");
    expect_fwd(1, ME, OP_NOP);
    // Back-pressure on the reply: held until taken.
    st_ready = 0;
    send(DT_AYA, 8'h52, OP_NOP, 16'h0, 0);
    check(st_valid && st.size() == 0, "reply waits");
    st_ready = 1;
    repeat (5) @(negedge clk);
    expect_reply(OP_NOP, 16'h0, 8'h52);
    // Commands back to back while the reply port is held: the first four
    // replies are queued behind the one waiting in the output buffer and come
    // out in order; the sixth is lost.
    st_ready = 0;
    for (int k = 0; k < 6; k++) begin
      hdr_t h;
      cmd_t c;
      h = '0; h.src_id = 8'h01; h.datatype = DT_AYA; h.pkt_size = 12'd2;
      c = '{target: 8'h52, opcode: OP_NOP, addr: 16'(100 + k), data: 32'h0};
      @(negedge clk);
      cmd_beat = '{sop: 1'b1, eop: 1'b0, data: h}; cmd_valid = 1;
      @(negedge clk);
      cmd_beat = '{sop: 1'b0, eop: 1'b1, data: c};
    end
    @(negedge clk);
    cmd_valid = 0;
    repeat (5) @(negedge clk);
    check(st.size() == 0, "burst replies held");
    st_ready = 1;
    repeat (40) @(negedge clk);
    check(st.size() == 15, $sformatf("five held replies (%0d words)", st.size()));
    for (int k = 0; k < 5 && 3 * k + 2 < st.size(); k++) begin
      hdr_t h;
      h = hdr_t'(st[3 * k]);
      check(h.datatype == DT_STATUS && st[3 * k + 1][47:32] == 16'(100 + k), $sformatf("queued reply %0d in order", k));
    end
    st.delete();
    // Non-command packets are ignored.
    send(DT_DATA, 8'h52, OP_START, 16'h0, 0);
    check(n_start == 1 && st.size() == 0, "data packet ignored");
    check(cmds_seen == 20, $sformatf("commands seen %0d", cmds_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
