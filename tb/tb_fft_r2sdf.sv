// tb_fft_r2sdf: checks the streaming FFT against a direct DFT computed here in real
// arithmetic. Four blocks of random complex samples go in with random gaps. Every
// output bin of the first three is compared with the reference (output position p
// holds bin bitreverse(p)). Tolerance is 3 LSB plus 0.2 % of full scale. The test
// also checks the latency: bin position 0 of a block must leave L+1 clocks after the
// block's last sample.
module tb_fft_r2sdf;
  localparam int N = 1024, L = 10, SH = 5, NBLK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid;
  logic signed [15:0] in_re, in_im;
  logic out_valid, out_first;
  logic [L-1:0] out_pos;
  logic signed [15:0] out_re, out_im;
  int checks = 0, failures = 0;

  fft_r2sdf dut (.clk, .rst_n, .in_valid, .in_re, .in_im, .out_valid, .out_first, .out_pos, .out_re, .out_im);

  real xr [NBLK][N], xi [NBLK][N];
  real cs [N], sn [N];
  int  blk_out = 0, nout = 0;
  longint last_in_cycle [NBLK];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  function automatic real fabs(real x); return x < 0 ? -x : x; endfunction
  function automatic int bitrev(int p);
    int r = 0;
    for (int i = 0; i < L; i++) if (p & (1 << i)) r |= 1 << (L - 1 - i);
    return r;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979 * i / N);
    end
    for (int b = 0; b < NBLK; b++)
      for (int i = 0; i < N; i++) begin
        xr[b][i] = real'($signed($urandom_range(0, 16000)) - 8000);
        xi[b][i] = real'($signed($urandom_range(0, 16000)) - 8000);
      end
    in_valid = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_re = 16'($rtoi(xr[b][i])); in_im = 16'($rtoi(xi[b][i]));
        if (i == N - 1) last_in_cycle[b] = cyc;
      end
    @(negedge clk) in_valid = 0;
    repeat (50) @(posedge clk);
    if (blk_out < NBLK - 1) begin failures++; $display("only %0d blocks out", blk_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && blk_out < NBLK - 1) begin
    automatic int k = bitrev(int'(out_pos));
    automatic real rr = 0, ri = 0, tol;
    for (int n = 0; n < N; n++) begin
      automatic int idx = (n * k) % N;
      rr += xr[blk_out][n] * cs[idx] + xi[blk_out][n] * sn[idx];
      ri += xi[blk_out][n] * cs[idx] - xr[blk_out][n] * sn[idx];
    end
    rr = rr / (1 << SH); ri = ri / (1 << SH);
    tol = 3.0 + 0.002 * 32768.0;
    checks++;
    if ((out_pos == 0) != out_first) failures++;
    if (fabs(rr - real'(out_re)) > tol || fabs(ri - real'(out_im)) > tol) begin
      failures++;
      if (failures < 10) $display("blk %0d pos %0d bin %0d: got %0d,%0d exp %f,%f", blk_out, out_pos, k, out_re, out_im, rr, ri);
    end
    if (out_pos == 0) begin
      checks++;
      // sample N-1 is driven in cycle c and clocked in at c+1; the bin is registered
      // L+1 clocks later and seen by this process one clock after that
      if (cyc - last_in_cycle[blk_out] != L + 2) begin
        failures++; $display("latency %0d", cyc - last_in_cycle[blk_out]);
      end
    end
    nout++;
    if (nout == N) begin nout = 0; blk_out++; end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
