// tb_subcarrier_demap: feeds three blocks of bins in bit-reversed order, with
// random gaps, where bin k of block b holds re = k, im = b. Checks that each burst
// holds exactly the active subcarriers in frequency order (bins N-NSC/2 .. N-1, then
// 1 .. NSC/2), with the block's tag, the subcarrier index, out_last on the last one,
// and that the first subcarrier appears on the second clock edge after the one that
// takes in the last bin (the testbench sees it one edge later still).
module tb_subcarrier_demap;
  import lulis_pkg::*;
  localparam int N = 1024, NSC = 792, L = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0;
  logic [L-1:0] in_pos = 0;
  cplx_t in_data = '0;
  tag_t in_tag = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  tag_t out_tag;
  int checks = 0, failures = 0;
  int blk = 0, s = 0;
  longint cyc = 0, last_bin_cyc = 0;
  always @(posedge clk) cyc++;

  subcarrier_demap dut (.*);

  function automatic int rev(int p);
    int r = 0;
    for (int i = 0; i < L; i++) if (p & (1 << i)) r |= 1 << (L - 1 - i);
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++)
      for (int p = 0; p < N; p++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (p == 0); in_pos = L'(p);
        in_data.re = 16'(rev(p)); in_data.im = 16'(b);
        in_tag = '{frame: 16'(100 + b), sym: 3'(b), sc: '0};
        if (p == N - 1) last_bin_cyc = cyc;
      end
    @(negedge clk) in_valid = 0;
    repeat (NSC + 20) @(posedge clk);
    checks++;
    if (blk != 3) begin failures++; $display("blocks out %0d", blk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int expbin = (s < NSC / 2) ? N - NSC / 2 + s : s - NSC / 2 + 1;
    checks++;
    if (out_data.re != 16'(expbin) || out_data.im != 16'(blk) || out_tag.sc != 10'(s) ||
        out_tag.frame != 16'(100 + blk) || out_tag.sym != 3'(blk) || out_last != (s == NSC - 1)) begin
      failures++;
      if (failures < 10) $display("blk %0d s %0d: re %0d im %0d sc %0d exp bin %0d", blk, s, out_data.re, out_data.im, out_tag.sc, expbin);
    end
    if (s == 0) begin
      checks++;
      if (cyc - last_bin_cyc != 3) begin failures++; $display("latency %0d", cyc - last_bin_cyc); end
    end
    s++;
    if (s == NSC) begin s = 0; blk++; end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
