// power_lut_select: packet-level choice of the normal coding table.
//
// For every channel the squares of the samples of one block are summed. When
// the block's last sample arrives, the sum is compared with NUM_LUTS-1
// ascending thresholds and the number of thresholds it exceeds becomes that
// channel's normal table tag for the next block; the accumulator restarts.
// The NSPS design states that table choice is driven by integrated power over
// a time stretch; using exactly one block as the stretch, the previous block
// deciding the next one, and the counting comparison are this design's choices.
//
// Timing: tags change at the clock edge that accepts a block's last sample, so
// the first sample of the next block is already coded with the new tag.
// Reset (synchronous) clears the sums and sets all tags to 0.
module power_lut_select #(
  parameter int unsigned NUM_CH   = 12,
  parameter int unsigned IN_BITS  = 10,
  parameter int unsigned NUM_LUTS = 4,
  parameter int unsigned ACC_BITS = 32,
  localparam int unsigned TW = $clog2(NUM_LUTS)
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              sample_valid,
  input  logic signed [IN_BITS-1:0]         samples [NUM_CH],
  input  logic                              last,
  input  logic [ACC_BITS-1:0]               thresh [NUM_LUTS-1],
  output logic [TW-1:0]                     tags   [NUM_CH]
);

  logic [ACC_BITS-1:0] acc [NUM_CH];

  function automatic logic [TW-1:0] classify(logic [ACC_BITS-1:0] e,
                                             logic [ACC_BITS-1:0] th [NUM_LUTS-1]);
    logic [TW-1:0] n;
    n = '0;
    for (int k = 0; k < NUM_LUTS - 1; k++)
      if (e > th[k]) n = n + 1'b1;
    return n;
  endfunction

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [2*IN_BITS-1:0] sq;
    logic [ACC_BITS-1:0]  sum;
    assign sq  = (2*IN_BITS)'(samples[c] * samples[c]);
    assign sum = acc[c] + ACC_BITS'(sq);

    always_ff @(posedge clk) begin
      if (rst) begin
        acc[c]  <= '0;
        tags[c] <= '0;
      end else if (sample_valid) begin
        if (last) begin
          acc[c]  <= '0;
          tags[c] <= classify(sum, thresh);
        end else begin
          acc[c]  <= sum;
        end
      end
    end
  end

endmodule
