// tb_lut_encoder: self-checking test of the table-driven requantiser.
// Checks random samples against the default table formula
// saturate4(x >>> (3 + tag)), the flag rule |x| > flag_thresh and the choice
// between the normal and the flag table, then rewrites table entries and checks
// that the new codes come out. Output latency is one cycle.
module tb_lut_encoder;
  logic clk = 0, rst = 1;
  logic in_valid = 0;
  logic signed [9:0] sample = 0;
  logic [1:0] norm_tag = 0, flag_tag = 3, lut_tag = 0;
  logic [9:0] flag_thresh = 400, lut_addr = 0;
  logic lut_we = 0;
  logic [3:0] lut_wdata = 0;
  logic out_valid;
  logic [4:0] word;
  logic [1:0] out_tag;
  int checks = 0, failures = 0;

  lut_encoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0] model [4][1024];

  function automatic logic [3:0] ref_code(int t, logic signed [9:0] x);
    int y;
    y = int'(x) >>> (3 + t);
    if (y > 7) y = 7;
    if (y < -8) y = -8;
    return 4'(y);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic drive_and_check(logic signed [9:0] x, logic [1:0] nt);
    int mag;
    bit f;
    logic [1:0] sel;
    @(negedge clk);
    sample = x; norm_tag = nt; in_valid = 1;
    mag = (x < 0) ? -int'(x) : int'(x);
    f = mag > int'(flag_thresh);
    sel = f ? flag_tag : nt;
    @(negedge clk);
    in_valid = 0;
    check(out_valid, "valid");
    check(word == {f, model[sel][x]}, $sformatf("code x=%0d nt=%0d got %h", x, nt, word));
    check(out_tag == nt, "out_tag");
  endtask

  int nflag = 0;
  initial begin
    for (int t = 0; t < 4; t++)
      for (int a = 0; a < 1024; a++) model[t][a] = ref_code(t, 10'(a));
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      logic signed [9:0] x;
      x = 10'($urandom);
      if ((x < 0 ? -int'(x) : int'(x)) > int'(flag_thresh)) nflag++;
      drive_and_check(x, 2'($urandom));
    end
    // Rewrite part of the tables and check again.
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      lut_we = 1; lut_tag = 2'($urandom); lut_addr = 10'($urandom); lut_wdata = 4'($urandom);
      model[lut_tag][lut_addr] = lut_wdata;
      @(negedge clk);
      lut_we = 0;
      drive_and_check(lut_addr, lut_tag);
    end
    flag_thresh = 100; flag_tag = 1;
    for (int i = 0; i < 1000; i++) drive_and_check(10'($urandom), 2'($urandom));
    check(nflag > 0, "flags occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
