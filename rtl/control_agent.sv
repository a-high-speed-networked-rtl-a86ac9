// control_agent: command, configuration and status handler of an NSPS node.
//
// Command packets reach the node over the control-and-monitor network. Each
// is two words: an 8-byte header with datatype DT_CMD or DT_AYA and a command
// word (nsps_pkg::cmd_t: target id, opcode, address, data). A command whose
// target is this node's id, or the broadcast id 8'hFF, is executed; the node
// then answers with an IAA ("I am alive") status packet of three words:
//
//   word 0  header: src_id, DT_STATUS, pkt_size 3, timestamp now
//   word 1  {opcode echoed, 7'b0, acq_on, address echoed, packets built}
//   word 2  {block overruns, router drops}
//
// An AYA ("are you alive") query only produces the reply. A command not
// addressed to this node alone (another id, or broadcast) is regenerated on
// the fwd_* port for the entities below this node. Replies wait in a queue of
// four; the reply of a command that finds the queue full is lost (the command
// is still executed). A reply's status words are taken when it is sent.
// Executed commands update the configuration held here: coding-table writes,
// source id, acquisition start/stop (applied by the sequencer at the next
// block), route-table writes, power thresholds, flag magnitude and flag table.
// The AYA/IAA exchange, broadcast forwarding and the command-with-status-reply
// rule follow the paper; the command word layout, the opcodes, the reply
// contents and the reset defaults are this design's choices.
//
// Timing: cmd_* is accepted every cycle (no back-pressure); configuration
// pulses come one cycle after the command word; st_* is a valid/ready stream.
module control_agent
  import nsps_pkg::*;
#(
  parameter logic [7:0]  NODE_ID         = 8'h30,
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter int unsigned NUM_LUTS        = 4,
  parameter int unsigned NUM_PORTS       = 5,
  localparam int unsigned TW = $clog2(NUM_LUTS)
) (
  input  logic                  clk,
  input  logic                  rst,
  // command input and forwarded commands
  input  beat_t                 cmd_beat,
  input  logic                  cmd_valid,
  output beat_t                 fwd_beat,
  output logic                  fwd_valid,
  // status replies
  output beat_t                 st_beat,
  output logic                  st_valid,
  input  logic                  st_ready,
  // status inputs
  input  logic [31:0]           ts,
  input  logic                  acq_on,
  input  logic [31:0]           pkts_built,
  input  logic [31:0]           overflows,
  input  logic [31:0]           drops,
  // configuration outputs
  output logic [7:0]            src_id,
  output logic                  start_req,
  output logic                  stop_req,
  output logic                  lut_we,
  output logic [TW-1:0]         lut_tag,
  output logic [9:0]            lut_addr,
  output logic [3:0]            lut_wdata,
  output logic                  route_we,
  output logic [3:0]            route_idx,
  output logic [NUM_PORTS-1:0]  route_mask,
  output logic [31:0]           thresh [NUM_LUTS-1],
  output logic [9:0]            flag_thresh,
  output logic [TW-1:0]         flag_tag,
  output logic [31:0]           cmds_seen
);

  hdr_t        hdr_q;
  logic        in_pkt, want_word;
  cmd_t        cmd;
  logic        for_me, fwd_it, is_cmd, is_aya;
  logic        fwd_second;
  logic [63:0] fwd_word_q;

  // Reply buffer and queue of replies still to be sent ({opcode, addr}).
  localparam int unsigned RQ = 4;
  logic [1:0]  st_cnt;
  logic [63:0] st_w [3];
  logic [23:0] rq_mem [RQ];
  logic [1:0]  rq_wp, rq_rp;
  logic [2:0]  rq_n;
  logic        rq_push, rq_pop;
  logic [23:0] rq_in;

  assign cmd    = cmd_t'(cmd_beat.data);
  assign is_cmd = (hdr_q.datatype == DT_CMD);
  assign is_aya = (hdr_q.datatype == DT_AYA);
  assign for_me = (cmd.target == src_id) || (cmd.target == BROADCAST_ID);
  assign fwd_it = (cmd.target != src_id);

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt      <= 1'b0;
      want_word   <= 1'b0;
      hdr_q       <= '0;
      src_id      <= NODE_ID;
      start_req   <= 1'b0;
      stop_req    <= 1'b0;
      lut_we      <= 1'b0;
      lut_tag     <= '0;
      lut_addr    <= '0;
      lut_wdata   <= '0;
      route_we    <= 1'b0;
      route_idx   <= '0;
      route_mask  <= '0;
      for (int k = 0; k < NUM_LUTS - 1; k++)
        thresh[k] <= 32'(SAMPLES_PER_PKT * (512 << (2 * k)));
      flag_thresh <= 10'd448;
      flag_tag    <= TW'(NUM_LUTS - 1);
      fwd_valid   <= 1'b0;
      fwd_beat    <= '0;
      fwd_second  <= 1'b0;
      fwd_word_q  <= '0;
      st_valid    <= 1'b0;
      st_cnt      <= '0;
      cmds_seen   <= '0;
      for (int i = 0; i < 3; i++) st_w[i] <= '0;
      rq_wp       <= '0;
      rq_rp       <= '0;
      rq_n        <= '0;
      for (int i = 0; i < RQ; i++) rq_mem[i] <= '0;
    end else begin
      start_req <= 1'b0;
      stop_req  <= 1'b0;
      lut_we    <= 1'b0;
      route_we  <= 1'b0;

      // Forwarding: second word one cycle after the header.
      fwd_valid  <= fwd_second;
      fwd_second <= 1'b0;
      if (fwd_second) fwd_beat <= '{sop: 1'b0, eop: 1'b1, data: fwd_word_q};

      if (cmd_valid) begin
        if (cmd_beat.sop) begin
          hdr_q     <= hdr_t'(cmd_beat.data);
          in_pkt    <= !cmd_beat.eop;
          want_word <= !cmd_beat.eop;
        end else if (in_pkt) begin
          if (cmd_beat.eop) in_pkt <= 1'b0;
          want_word <= 1'b0;
          if (want_word && (is_cmd || is_aya)) begin
            cmds_seen <= cmds_seen + 1;
            if (fwd_it) begin
              fwd_beat   <= '{sop: 1'b1, eop: 1'b0, data: hdr_q};
              fwd_valid  <= 1'b1;
              fwd_second <= 1'b1;
              fwd_word_q <= cmd_beat.data;
            end
            if (for_me) begin
              if (is_cmd) begin
                case (cmd.opcode)
                  OP_WR_LUT: begin
                    lut_we    <= 1'b1;
                    lut_tag   <= TW'(cmd.addr[11:10]);
                    lut_addr  <= cmd.addr[9:0];
                    lut_wdata <= cmd.data[3:0];
                  end
                  OP_SET_SRC:   src_id <= cmd.data[7:0];
                  OP_START:     start_req <= 1'b1;
                  OP_STOP:      stop_req  <= 1'b1;
                  OP_SET_ROUTE: begin
                    route_we   <= 1'b1;
                    route_idx  <= cmd.addr[3:0];
                    route_mask <= NUM_PORTS'(cmd.data);
                  end
                  OP_SET_THR: begin
                    for (int k = 0; k < NUM_LUTS - 1; k++)
                      if (int'(cmd.addr) == k) thresh[k] <= cmd.data;
                    if (int'(cmd.addr) == NUM_LUTS - 1) flag_thresh <= cmd.data[9:0];
                    else if (int'(cmd.addr) == NUM_LUTS) flag_tag <= TW'(cmd.data);
                  end
                  default: ;
                endcase
              end
            end
          end
        end
      end

      // Reply queue: one entry per executed command, sent in order.
      if (rq_push) begin
        rq_mem[rq_wp] <= rq_in;
        rq_wp         <= rq_wp + 1'b1;
      end
      if (rq_pop) begin
        rq_rp    <= rq_rp + 1'b1;
        st_w[0]  <= hdr_t'{src_id: src_id, datatype: DT_STATUS, pixel: PIX_64BIT,
                           streams: 4'd0, pkt_size: 12'd3, timestamp: ts};
        st_w[1]  <= {rq_mem[rq_rp][23:16], 7'b0, acq_on, rq_mem[rq_rp][15:0], pkts_built};
        st_w[2]  <= {overflows, drops};
        st_valid <= 1'b1;
        st_cnt   <= '0;
      end
      rq_n <= rq_n + 3'(rq_push) - 3'(rq_pop);

      if (st_valid && st_ready) begin
        if (st_cnt == 2'd2) begin
          st_valid <= 1'b0;
          st_cnt   <= '0;
        end else begin
          st_cnt <= st_cnt + 1'b1;
        end
      end
    end
  end

  // A command for this node queues its reply; a full queue loses the reply.
  assign rq_in   = {cmd.opcode, cmd.addr};
  assign rq_push = cmd_valid && !cmd_beat.sop && in_pkt && want_word && (is_cmd || is_aya)
                   && for_me && (rq_n != 3'(RQ));
  assign rq_pop  = !st_valid && (rq_n != 3'd0);

  assign st_beat = '{sop: (st_cnt == 2'd0), eop: (st_cnt == 2'd2), data: st_w[st_cnt]};

endmodule
