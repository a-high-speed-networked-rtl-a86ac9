// pkt_fifo: store-and-forward packet buffer.
//
// Beats of NSPS packets are written without back-pressure. At each
// start-of-packet the header's pkt_size field is compared with the free
// space; a packet that would not fit is discarded whole and counted, so loss
// is always in whole packets. The read side offers a packet only when all of
// it is stored (pkts_avail > 0), so a reader can stream it without gaps.
// room is high while at least ROOM_WORDS words are free; a link receiver uses
// it as its pull request towards the upstream node.
//
// Timing: write to read latency is one cycle after the packet's last word;
// out_beat is read combinationally from the buffer array.
module pkt_fifo
  import nsps_pkg::*;
#(
  parameter int unsigned DEPTH      = 512,
  parameter int unsigned ROOM_WORDS = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  input  beat_t       in_beat,
  input  logic        in_valid,
  output logic        room,
  output beat_t       out_beat,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] pkts_avail,
  output logic [31:0] pkts_dropped
);

  beat_t        mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   used;         // words held, committed or being written
  logic          dropping, writing;
  hdr_t          hin;
  logic          do_wr, do_rd, eop_in, eop_out;

  assign hin     = hdr_t'(in_beat.data);
  if (DEPTH != 2 ** AW) begin : g_bad_depth
    $error("DEPTH must be a power of two");
  end

  int unsigned free_words;
  assign free_words = DEPTH - int'(used);
  assign room       = free_words >= ROOM_WORDS;

  // A new packet is accepted if its declared size fits.
  logic accept_sop;
  assign accept_sop = in_valid && in_beat.sop && (free_words >= int'(hin.pkt_size))
                      && (hin.pkt_size != 0);
  assign do_wr   = in_valid && (in_beat.sop ? accept_sop : (writing && !dropping && free_words != 0));
  assign eop_in  = do_wr && in_beat.eop;

  assign out_valid = (pkts_avail != 0);
  assign out_beat  = mem[rd_ptr];
  assign do_rd     = out_valid && out_ready;
  assign eop_out   = do_rd && out_beat.eop;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_beat;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      used         <= '0;
      dropping     <= 1'b0;
      writing      <= 1'b0;
      pkts_avail   <= '0;
      pkts_dropped <= '0;
    end else begin
      if (in_valid && in_beat.sop) begin
        if (accept_sop) begin
          dropping  <= 1'b0;
          writing   <= !in_beat.eop;
        end else begin
          dropping     <= !in_beat.eop;
          writing      <= 1'b0;
          pkts_dropped <= pkts_dropped + 1;
        end
      end else if (in_valid && in_beat.eop) begin
        writing  <= 1'b0;
        dropping <= 1'b0;
      end
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      used <= used + (AW + 1)'(do_wr) - (AW + 1)'(do_rd);
      pkts_avail <= pkts_avail + 16'(eop_in) - 16'(eop_out);
    end
  end

endmodule
