// tb_l2_decode_pack: self-checking test of the level-2 decoder and pair packer.
// Builds random coded packets in the level-3 layout (random table tags, flag
// bits and codes), feeds them with random gaps and random output
// back-pressure, and checks each output packet word by word against a
// complex packet computed here from the same data: decode by flag/normal
// table, channel 2k as real and 2k+1 as imaginary part. Also checks that a
// packet of another datatype is skipped and counted, that decode-table writes
// take effect, and that flagged words are counted.
module tb_l2_decode_pack;
  import nsps_pkg::*;
  localparam int NC = 12, T = 120, WPC = T / 12, PW = 2 + NC * WPC, OW = 1 + (NC / 2) * (T / 2);
  logic clk = 0, rst = 1;
  logic [7:0] node_id = 8'h21;
  beat_t in_beat = '0;
  logic in_valid = 0, in_ready;
  beat_t out_beat;
  logic out_valid, out_ready = 1;
  logic dec_we = 0;
  logic [1:0] dec_tag = 0;
  logic [3:0] dec_code = 0;
  logic [15:0] dec_value = 0;
  logic [31:0] pkts_out, pkts_bad, flagged;
  int checks = 0, failures = 0;

  l2_decode_pack dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [15:0] dec_m [4][16];
  typedef logic [63:0] opkt_t [OW];
  opkt_t exp_q [$];
  int exp_flags = 0;

  // Receiver with random back-pressure.
  logic [63:0] got [$];
  int n_got = 0;
  always @(negedge clk) out_ready = ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      if (out_beat.sop) got.delete();
      got.push_back(out_beat.data);
      if (out_beat.eop) begin
        n_got++;
        check(exp_q.size() > 0, "expected a packet");
        if (exp_q.size() > 0) begin
          opkt_t e;
          e = exp_q.pop_front();
          check(got.size() == OW, $sformatf("length %0d", got.size()));
          foreach (got[i]) if (i < OW) check(got[i] == e[i], $sformatf("word %0d got %h exp %h", i, got[i], e[i]));
        end
        got.delete();
      end
    end
  end

  task automatic send_word(logic sop, logic eop, logic [63:0] d);
    @(negedge clk);
    while ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
    in_beat = '{sop: sop, eop: eop, data: d};
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic send_packet(bit good, int unsigned tsv);
    hdr_t h;
    logic [1:0] tg [NC];
    logic [1:0] ft;
    logic [4:0] s [NC][T];
    logic [63:0] w [PW];
    opkt_t e;
    h = '0; h.src_id = 8'h30; h.datatype = good ? DT_DATA : DT_CALIB; h.pixel = PIX_5BIT;
    h.streams = 4'(NC); h.pkt_size = 12'(PW); h.timestamp = tsv;
    w[0] = h;
    w[1] = '0;
    foreach (tg[c]) begin tg[c] = 2'($urandom); w[1][2*c +: 2] = tg[c]; end
    ft = 2'($urandom); w[1][2*NC +: 2] = ft;
    for (int i = 2; i < PW; i++) w[i] = '0;
    for (int c = 0; c < NC; c++)
      for (int t = 0; t < T; t++) begin
        s[c][t] = 5'($urandom);
        if ($urandom % 4 != 0) s[c][t][4] = 0;   // flags are the exception
        w[2 + c * WPC + t / 12][5 * (t % 12) +: 5] = s[c][t];
      end
    if (good) begin
      hdr_t oh;
      oh = '0; oh.src_id = node_id; oh.datatype = DT_CPLX; oh.pixel = PIX_C32;
      oh.streams = 4'(NC / 2); oh.pkt_size = 12'(OW); oh.timestamp = tsv;
      e[0] = oh;
      for (int p = 0; p < NC / 2; p++)
        for (int t = 0; t < T; t += 2) begin
          logic [15:0] v [4];
          v[0] = dec_m[s[2*p][t][4] ? ft : tg[2*p]][s[2*p][t][3:0]];
          v[1] = dec_m[s[2*p+1][t][4] ? ft : tg[2*p+1]][s[2*p+1][t][3:0]];
          v[2] = dec_m[s[2*p][t+1][4] ? ft : tg[2*p]][s[2*p][t+1][3:0]];
          v[3] = dec_m[s[2*p+1][t+1][4] ? ft : tg[2*p+1]][s[2*p+1][t+1][3:0]];
          e[1 + p * (T / 2) + t / 2] = {v[0], v[1], v[2], v[3]};
        end
      for (int c = 0; c < NC; c++) for (int t = 0; t < T; t++) exp_flags += int'(s[c][t][4]);
      exp_q.push_back(e);
    end
    for (int i = 0; i < PW; i++) send_word(i == 0, i == PW - 1, w[i]);
  endtask

  initial begin
    for (int t = 0; t < 4; t++)
      for (int c = 0; c < 16; c++) dec_m[t][c] = 16'(int'(signed'(4'(c))) * (8 << t));
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 6; k++) send_packet(k != 2, 32'(1000 + 120 * k));
    // Rewrite some decode values.
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      dec_we = 1; dec_tag = 2'($urandom); dec_code = 4'($urandom); dec_value = 16'($urandom);
      dec_m[dec_tag][dec_code] = dec_value;
      @(negedge clk);
      dec_we = 0;
    end
    for (int k = 0; k < 4; k++) send_packet(1, 32'(5000 + 120 * k));
    repeat (3000) @(posedge clk);
    check(n_got == 9 && pkts_out == 9, $sformatf("9 packets out (%0d)", n_got));
    check(pkts_bad == 1, "bad packet counted");
    check(exp_q.size() == 0, "nothing missing");
    check(flagged == 32'(exp_flags), $sformatf("flag count %0d exp %0d", flagged, exp_flags));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
