// tb_fh_packetizer: sends two full symbols (2 x 792 beats) through the packetizer
// with random input gaps and random tready stalls. The testbench parses the output
// itself: every packet must start with a header holding the magic, frame, symbol,
// first subcarrier, length min(66, 792 - first) and node id. The payload words must
// be the beats' values in order, and tlast must come exactly on the last one. A beat
// out of sequence must be counted in seq_err_cnt.
module tb_fh_packetizer;
  import lulis_pkg::*;
  localparam int NSC = 792, PB = 66;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] node_id = 8'd9;
  logic in_valid = 0, in_ready, tx_tvalid, tx_tready = 0, tx_tlast;
  beat_t in_beat = '0;
  logic [127:0] tx_tdata;
  logic [15:0] seq_err_cnt;
  int checks = 0, failures = 0;

  fh_packetizer dut (.*);

  beat_t sent [$];
  int in_pkt = 0, pcnt = 0, plen = 0, n_pkts = 0, n_words = 0;
  int exp_first = 0;

  always @(negedge clk) tx_tready = ($urandom_range(0, 4) != 0);

  always @(posedge clk) if (rst_n && tx_tvalid && tx_tready) begin
    if (!in_pkt) begin
      automatic beat_t b = sent[0];
      automatic int first = int'(b.tag.sc);
      automatic int el = (NSC - first < PB) ? NSC - first : PB;
      checks++;
      if (tx_tdata[127:112] != 16'h4C55 || tx_tdata[111:96] != b.tag.frame || tx_tdata[95:88] != 8'(b.tag.sym) ||
          tx_tdata[87:72] != 16'(first) || tx_tdata[71:64] != 8'(el) || tx_tdata[63:56] != 8'd9 || tx_tlast) begin
        failures++; $display("bad header %h", tx_tdata);
      end
      plen = int'(tx_tdata[71:64]); pcnt = 0; in_pkt = 1; n_pkts++;
    end else begin
      automatic beat_t b = sent.pop_front();
      checks++;
      if (tx_tdata != b.v || tx_tlast != (pcnt == plen - 1)) begin
        failures++; if (failures < 10) $display("bad payload word %0d of pkt %0d", pcnt, n_pkts);
      end
      pcnt++; n_words++;
      if (tx_tlast) in_pkt = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sy = 0; sy < 2; sy++)
      for (int s = 0; s < NSC; s++) begin
        automatic beat_t b;
        b.tag = '{frame: 16'd33, sym: 3'(sy), sc: 10'(s)};
        for (int k = 0; k < K_USERS; k++) b.v[k] = '{re: 16'($urandom), im: 16'($urandom)};
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_beat = b; sent.push_back(b);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
      end
    // an out-of-sequence beat: subcarrier 5 of symbol 2 after a packet started at 0
    for (int s = 0; s < 2; s++) begin
      automatic beat_t b;
      b.tag = '{frame: 16'd33, sym: 3'd2, sc: (s == 0) ? 10'd0 : 10'd5};
      b.v = '0;
      @(negedge clk); in_valid = 1; in_beat = b; sent.push_back(b);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    repeat (50) @(posedge clk);
    checks++; if (n_pkts != 25) begin failures++; $display("packets %0d", n_pkts); end
    checks++; if (n_words != 2 * NSC + 2) begin failures++; $display("words %0d", n_words); end
    checks++; if (seq_err_cnt != 1) begin failures++; $display("seq_err %0d", seq_err_cnt); end
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
