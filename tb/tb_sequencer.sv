// tb_sequencer: self-checking test of the block sequencer.
// Drives sample_valid at random, keeps its own sample count and compares idx,
// first, last and the timestamp against it; checks that start and stop
// requests issued in mid-block take effect only at the next block boundary,
// and that sync reloads the timestamp and restarts the block.
module tb_sequencer;
  localparam int unsigned T = 120;
  logic clk = 0, rst = 1;
  logic sample_valid = 0, sync = 0, start_req = 0, stop_req = 0;
  logic [31:0] ts_load = 0;
  logic [6:0] idx;
  logic first, last, acq_on;
  logic [31:0] ts;
  int checks = 0, failures = 0;

  sequencer #(.SAMPLES_PER_PKT(T)) dut (.*);

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
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  longint unsigned n = 0;      // samples since reset/sync
  longint unsigned base = 0;   // timestamp at last sync
  bit exp_run = 0, want = 0, pend_start = 0, pend_stop = 0;
  int starts_seen = 0, stops_seen = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      sample_valid = ($urandom % 4) != 0;
      start_req = 0; stop_req = 0; sync = 0;
      if (cyc == 500)  start_req = 1;
      if (cyc == 4000) stop_req  = 1;
      if (cyc == 7000) start_req = 1;
      if (cyc == 9001) begin sync = 1; ts_load = 32'h1234_0000; end
      #1;
      if (!sync) begin
        check(idx == 7'(n % T), "idx");
        check(first == (n % T == 0), "first");
        check(last == (n % T == T - 1), "last");
        check(ts == 32'(base + n), "timestamp");
        check(acq_on == exp_run, "acq_on");
      end
      @(posedge clk); #1;
      if (start_req) want = 1;
      if (stop_req) want = 0;
      if (sync) begin
        base = ts_load; n = 0; exp_run = 0;
      end else if (sample_valid) begin
        if (n % T == T - 1) begin
          if (exp_run != want) begin
            if (want) starts_seen++; else stops_seen++;
          end
          exp_run = want;
        end
        n++;
      end
    end
    check(starts_seen >= 2 && stops_seen >= 1, "start/stop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
