// packet_router: static-route packet switch with pull-driven outputs.
//
// NUM_SRC packet streams (here the data packetiser and the status replies of
// the control agent) are switched, a whole packet at a time, to NUM_PORTS
// outputs (four peer-to-peer links towards level 2 and one control-and-monitor
// port). The route is a static table indexed by the header's datatype field;
// each entry is a mask of allowed ports, written at configuration time.
//
// Outputs follow the NSPS "pull" rule: a downstream node raises link_req[p]
// only when it can take a whole packet, and a packet is sent only to a port
// that is requesting. Among the requesting ports of a route, the next one in
// round-robin order is taken, which spreads data packets over the four links.
// If no port of the route requests, the packet is consumed and dropped whole
// (counted in drops), so the source keeps its timing and loss is in integral
// packets. Higher source index has priority between packets.
// The paper gives static routing, the pull mechanism and whole-packet loss; the
// table indexed by datatype, the round-robin choice and the port count of the
// control-and-monitor port are this design's choices.
//
// Timing: one idle cycle per packet for the route decision, then one word per
// cycle; link outputs are registered (one cycle after the source handshake).
// A port that requested must accept the whole packet without back-pressure.
module packet_router
  import nsps_pkg::*;
#(
  parameter int unsigned NUM_SRC   = 2,
  parameter int unsigned NUM_PORTS = 5,
  localparam int unsigned SW = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1,
  localparam int unsigned PW = $clog2(NUM_PORTS)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  beat_t                 src_beat  [NUM_SRC],
  input  logic [NUM_SRC-1:0]    src_valid,
  output logic [NUM_SRC-1:0]    src_ready,
  input  logic [NUM_PORTS-1:0]  link_req,
  output beat_t                 link_beat,     // shared by all ports
  output logic [NUM_PORTS-1:0]  link_valid,
  input  logic                  route_we,
  input  logic [3:0]            route_idx,
  input  logic [NUM_PORTS-1:0]  route_mask,
  output logic [31:0]           sent,
  output logic [31:0]           drops
);

  typedef enum logic [1:0] {S_IDLE, S_PASS, S_DROP} state_e;

  state_e                state;
  logic [NUM_PORTS-1:0]  routes [16];
  logic [SW-1:0]         cur_src, pick_src;
  logic [PW-1:0]         cur_port, pick_port, rr;
  logic                  have_src, have_port;
  hdr_t                  head;
  logic [NUM_PORTS-1:0]  cand;

  // Source choice: highest index with a packet waiting.
  always_comb begin
    have_src = 1'b0;
    pick_src = '0;
    for (int s = 0; s < NUM_SRC; s++)
      if (src_valid[s]) begin
        have_src = 1'b1;
        pick_src = SW'(s);
      end
  end

  assign head = hdr_t'(src_beat[pick_src].data);
  assign cand = routes[head.datatype] & link_req;

  // Port choice: first candidate at or after the round-robin pointer.
  always_comb begin
    have_port = 1'b0;
    pick_port = '0;
    for (int k = NUM_PORTS - 1; k >= 0; k--) begin
      int unsigned p;
      p = (int'(rr) + k) % NUM_PORTS;
      if (cand[p]) begin
        have_port = 1'b1;
        pick_port = PW'(p);
      end
    end
  end

  always_comb begin
    src_ready = '0;
    if (state == S_IDLE) begin
      // Discard stray words that do not start a packet.
      if (have_src && !src_beat[pick_src].sop) src_ready[pick_src] = 1'b1;
    end else begin
      src_ready[cur_src] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      cur_src    <= '0;
      cur_port   <= '0;
      rr         <= '0;
      link_valid <= '0;
      link_beat  <= '0;
      sent       <= '0;
      drops      <= '0;
      for (int i = 0; i < 16; i++) routes[i] <= '0;
      routes[DT_DATA]   <= NUM_PORTS'((1 << (NUM_PORTS - 1)) - 1);  // all links
      routes[DT_STATUS] <= NUM_PORTS'(1 << (NUM_PORTS - 1));        // C&M port
      routes[DT_CALIB]  <= NUM_PORTS'(1 << (NUM_PORTS - 1));
    end else begin
      if (route_we) routes[route_idx] <= route_mask;
      link_valid <= '0;
      case (state)
        S_IDLE: begin
          if (have_src && src_beat[pick_src].sop) begin
            cur_src <= pick_src;
            if (have_port) begin
              state    <= S_PASS;
              cur_port <= pick_port;
              rr       <= PW'((int'(pick_port) + 1) % NUM_PORTS);
            end else begin
              state    <= S_DROP;
            end
          end
        end
        S_PASS: begin
          if (src_valid[cur_src]) begin
            link_beat            <= src_beat[cur_src];
            link_valid[cur_port] <= 1'b1;
            if (src_beat[cur_src].eop) begin
              state <= S_IDLE;
              sent  <= sent + 1;
            end
          end
        end
        default: begin  // S_DROP
          if (src_valid[cur_src] && src_beat[cur_src].eop) begin
            state <= S_IDLE;
            drops <= drops + 1;
          end
        end
      endcase
    end
  end

  // A packet is delivered to one port at a time.
  always_ff @(posedge clk)
    if (!rst) assert ($onehot0(link_valid)) else $error("packet_router: several ports valid");

endmodule
