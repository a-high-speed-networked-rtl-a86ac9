// lut_encoder: table-driven requantiser for one ADC channel.
//
// A 10-bit two's-complement sample is mapped to a 4-bit code by one of
// NUM_LUTS look-up tables. Each packet uses two tables: a "normal" table chosen
// per block from the channel's integrated power (norm_tag) and a "flag" table
// for segregated data (flag_tag). Every word carries one selection bit saying
// which of the two encoded it, so a downstream decoder can both unflag and
// rescale at word level. The paper gives this scheme; the rule that sets the
// flag bit (|sample| > flag_thresh), the table count and the default contents
// are this design's choices.
//
// Default contents: table t holds saturate_to_4_bits(sample >>> (3 + t)), so a
// higher tag suits a stronger signal. The tables can be rewritten at any time
// through the lut_we port, as the commodity master does when it changes the
// coding scheme.
//
// Timing: out_* is registered, one cycle after in_valid. Table reads are
// synchronous (block-RAM style); the read happens in the sample's cycle.
module lut_encoder #(
  parameter int unsigned IN_BITS   = 10,
  parameter int unsigned CODE_BITS = 4,
  parameter int unsigned NUM_LUTS  = 4,
  localparam int unsigned TW = $clog2(NUM_LUTS)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic signed [IN_BITS-1:0]   sample,
  input  logic [TW-1:0]               norm_tag,
  input  logic [TW-1:0]               flag_tag,
  input  logic [IN_BITS-1:0]          flag_thresh,
  input  logic                        lut_we,
  input  logic [TW-1:0]               lut_tag,
  input  logic [IN_BITS-1:0]          lut_addr,
  input  logic [CODE_BITS-1:0]        lut_wdata,
  output logic                        out_valid,
  output logic [CODE_BITS:0]          word,      // {flag, code}
  output logic [TW-1:0]               out_tag    // normal table used for this word
);

  localparam int unsigned DEPTH = NUM_LUTS * (2 ** IN_BITS);

  logic [CODE_BITS-1:0] lut [DEPTH];

  // Default table contents (FPGA block-RAM initial values).
  function automatic logic [CODE_BITS-1:0] default_code(int unsigned t, int unsigned a);
    int signed x, y, hi, lo;
    x  = int'(signed'(IN_BITS'(a)));
    y  = x >>> (3 + t);
    hi = (2 ** (CODE_BITS - 1)) - 1;
    lo = -(2 ** (CODE_BITS - 1));
    if (y > hi) y = hi;
    if (y < lo) y = lo;
    return CODE_BITS'(y);
  endfunction

  initial begin
    for (int unsigned t = 0; t < NUM_LUTS; t++)
      for (int unsigned a = 0; a < 2 ** IN_BITS; a++)
        lut[t * (2 ** IN_BITS) + a] = default_code(t, a);
  end

  logic [IN_BITS-1:0] mag;
  logic               flag;
  logic [TW-1:0]      sel;

  assign mag  = sample[IN_BITS-1] ? IN_BITS'(-sample) : IN_BITS'(sample);
  assign flag = mag > flag_thresh;
  assign sel  = flag ? flag_tag : norm_tag;

  always_ff @(posedge clk) begin
    if (lut_we && !rst) lut[{lut_tag, lut_addr}] <= lut_wdata;  // no writes while in reset
  end

  always_ff @(posedge clk) begin
    word    <= {flag, lut[{sel, sample}]};
    out_tag <= norm_tag;
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end

endmodule
