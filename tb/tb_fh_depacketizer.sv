// tb_fh_depacketizer: builds fronthaul packets in the testbench, in the format
// of fh_packetizer, and sends them with random gaps while stalling the output at
// random. Packets: 12 good ones covering one 792-subcarrier symbol, one with a bad
// magic (dropped, bad_hdr_cnt = 1), one header-only packet (dropped, bad_hdr_cnt =
// 2) and one whose tlast comes a word early (passed, len_err_cnt = 1). Every
// output beat must carry the rebuilt tag and the payload word.
module tb_fh_depacketizer;
  import lulis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rx_tvalid = 0, rx_tready, rx_tlast = 0;
  logic [127:0] rx_tdata = '0;
  logic out_valid, out_ready = 0;
  beat_t out_beat;
  logic [15:0] bad_hdr_cnt, len_err_cnt;
  int checks = 0, failures = 0;

  fh_depacketizer dut (.*);

  beat_t expq [$];
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic beat_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected beat"); end
    else begin
      e = expq.pop_front();
      if (out_beat != e) begin failures++; if (failures < 10) $display("bad beat sc %0d", out_beat.tag.sc); end
    end
  end

  task automatic word(logic [127:0] d, logic last);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin rx_tvalid = 0; @(negedge clk); end
    rx_tvalid = 1; rx_tdata = d; rx_tlast = last;
    @(posedge clk);
    while (!rx_tready) @(posedge clk);
    #1 rx_tvalid = 0;
  endtask

  task automatic packet(logic [15:0] magic, int frame, int sym, int first, int len, int nsend, bit expect_out);
    word({magic, 16'(frame), 8'(sym), 16'(first), 8'(len), 8'd3, 56'd0}, nsend == 0);
    for (int i = 0; i < nsend; i++) begin
      automatic beat_t b;
      b.tag = '{frame: 16'(frame), sym: 3'(sym), sc: 10'(first + i)};
      for (int k = 0; k < K_USERS; k++) b.v[k] = '{re: 16'($urandom), im: 16'($urandom)};
      if (expect_out) expq.push_back(b);
      word(b.v, i == nsend - 1);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) packet(16'h4C55, 40, 1, 66 * p, 66, 66, 1);
    packet(16'h1234, 40, 2, 0, 66, 66, 0);
    packet(16'h4C55, 40, 2, 0, 66, 0, 0);
    packet(16'h4C55, 40, 2, 66, 66, 65, 1);
    repeat (50) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("left %0d", expq.size()); end
    checks++; if (bad_hdr_cnt != 2) begin failures++; $display("bad_hdr %0d", bad_hdr_cnt); end
    checks++; if (len_err_cnt != 1) begin failures++; $display("len_err %0d", len_err_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
