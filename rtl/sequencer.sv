// sequencer: timestamp counter and block event generator of a level-3 node.
//
// The timestamp counts sample times of the ADC sampling clock (one count per
// sample_valid) and is loaded from the central time standard on sync. The
// sequencer also divides the sample stream into blocks of SAMPLES_PER_PKT
// samples, the unit in which packets are formed; idx, first and last describe
// the sample presented in the same cycle (combinational outputs). Start and stop
// requests are held pending and take effect only at the next block boundary, so
// that acquisition always covers whole, globally aligned blocks; acq_on tells
// whether the current sample's block is captured.
// The NSPS architecture asks for a sampling-clock timestamp counter and for
// sequencers whose events align command actions; the block length, the 32-bit
// counter and the pending-request scheme are this design's choices.
// Reset is synchronous and active high: counters clear, acquisition stops.
module sequencer #(
  parameter int unsigned SAMPLES_PER_PKT = 120,
  parameter int unsigned TS_BITS         = 32,
  localparam int unsigned IW = $clog2(SAMPLES_PER_PKT)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               sample_valid,
  input  logic               sync,
  input  logic [TS_BITS-1:0] ts_load,
  input  logic               start_req,
  input  logic               stop_req,
  output logic [IW-1:0]      idx,
  output logic               first,
  output logic               last,
  output logic [TS_BITS-1:0] ts,
  output logic               acq_on
);

  logic [IW-1:0]      cnt;
  logic [TS_BITS-1:0] ts_cnt;
  logic               running, want_run;

  assign idx    = cnt;
  assign first  = (cnt == '0);
  assign last   = (cnt == IW'(SAMPLES_PER_PKT - 1));
  assign ts     = ts_cnt;
  assign acq_on = running;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      ts_cnt   <= '0;
      running  <= 1'b0;
      want_run <= 1'b0;
    end else begin
      if (start_req) want_run <= 1'b1;
      else if (stop_req) want_run <= 1'b0;
      if (sync) begin
        // Re-align to the time standard: a new block starts with the next sample.
        ts_cnt <= ts_load;
        cnt    <= '0;
        running <= 1'b0;
      end else if (sample_valid) begin
        ts_cnt <= ts_cnt + 1'b1;
        if (last) begin
          cnt     <= '0;
          running <= start_req ? 1'b1 : stop_req ? 1'b0 : want_run;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
