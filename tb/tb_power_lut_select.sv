// tb_power_lut_select: self-checking test of the power-driven table choice.
// Drives blocks of random samples whose amplitude changes per channel and per
// block, sums the squares independently and checks each channel's tag after
// every block against the number of thresholds exceeded.
module tb_power_lut_select;
  localparam int NC = 12, T = 120;
  logic clk = 0, rst = 1;
  logic sample_valid = 0, last = 0;
  logic signed [9:0] samples [NC];
  logic [31:0] thresh [3];
  logic [1:0] tags [NC];
  int checks = 0, failures = 0;

  power_lut_select dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int seen [4];
  initial begin
    longint acc [NC];
    thresh[0] = T * 512; thresh[1] = T * 2048; thresh[2] = T * 8192;
    foreach (samples[c]) samples[c] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int b = 0; b < 40; b++) begin
      int amp [NC];
      foreach (amp[c]) amp[c] = 1 << (($urandom % 9) + 1);   // 2 .. 512
      foreach (acc[c]) acc[c] = 0;
      for (int i = 0; i < T; i++) begin
        @(negedge clk);
        sample_valid = 1;
        last = (i == T - 1);
        foreach (samples[c]) begin
          int v;
          v = int'($urandom % (2 * amp[c])) - amp[c];
          if (v > 511) v = 511;
          samples[c] = 10'(v);
          acc[c] += longint'(v) * v;
        end
        if ($urandom % 3 == 0) begin   // idle cycle in between
          @(negedge clk);
          sample_valid = 0;
        end
      end
      @(negedge clk);
      sample_valid = 0; last = 0;
      foreach (tags[c]) begin
        int e;
        e = (acc[c] > thresh[0]) + (acc[c] > thresh[1]) + (acc[c] > thresh[2]);
        seen[e]++;
        check(tags[c] == 2'(e), $sformatf("block %0d ch %0d tag %0d exp %0d", b, c, tags[c], e));
      end
    end
    foreach (seen[k]) check(seen[k] > 0, "every tag value occurs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
