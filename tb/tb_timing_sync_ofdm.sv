// tb_timing_sync_ofdm: one receive chain, end to end. The testbench builds OFDM
// symbols itself: random QPSK values X[s] (+-1500 +-1500j) on the 792 active
// subcarriers, an inverse DFT scaled by 1/32, and a 144-sample cyclic prefix. It
// drives them at 2 samples per 5 clocks, like the converter, with its own
// frame/symbol tags. After the FFT (scaled by 1/32 too), subcarrier s must return
// X[s] within 4 LSB, with the right frame, symbol and index. It also checks the
// latency: a symbol's burst must start 14 clocks (testbench counting) after the
// next symbol's FFT-window sample 1022 is driven, the sample that pushes the
// window's last bin out of the FFT. Every symbol must give exactly 792 subcarriers.
module tb_timing_sync_ofdm;
  import lulis_pkg::*;
  localparam int N = 1024, NSC = 792, CP = 144, NS = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic smp_valid = 0;
  cplx_t smp = '0;
  smp_tag_t t = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  tag_t out_tag;
  int checks = 0, failures = 0;

  timing_sync_ofdm dut (.*);

  real cs [N], sn [N];
  int  xr [NS][NSC], xi [NS][NSC];
  real tr [N], ti [N];
  longint cyc = 0, last_smp_cyc [NS];
  int osym = 0, os = 0;
  always @(posedge clk) cyc++;

  function automatic real fabs(real x); return x < 0 ? -x : x; endfunction
  function automatic int bin_of(int s); return (s < NSC / 2) ? N - NSC / 2 + s : s - NSC / 2 + 1; endfunction

  task automatic make_symbol(int b);
    for (int n = 0; n < N; n++) begin tr[n] = 0; ti[n] = 0; end
    for (int s = 0; s < NSC; s++) begin
      automatic int k = bin_of(s);
      for (int n = 0; n < N; n++) begin
        automatic int idx = (n * k) % N;
        tr[n] += xr[b][s] * cs[idx] - xi[b][s] * sn[idx];
        ti[n] += xr[b][s] * sn[idx] + xi[b][s] * cs[idx];
      end
    end
    for (int n = 0; n < N; n++) begin tr[n] /= 32.0; ti[n] /= 32.0; end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979 * i / N);
    end
    for (int b = 0; b < NS; b++)
      for (int s = 0; s < NSC; s++) begin
        xr[b][s] = $urandom_range(0, 1) ? 1500 : -1500;
        xi[b][s] = $urandom_range(0, 1) ? 1500 : -1500;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // some samples before the first frame start are ignored
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); smp_valid = (i % 5 == 0 || i % 5 == 2); smp = '{re: 16'sd9999, im: 16'sd9999}; t = '0;
    end
    for (int b = 0; b < NS; b++) begin
      make_symbol(b);
      for (int n = -CP; n < N; n++) begin
        automatic int m = (n < 0) ? n + N : n;
        for (int ph = 0; ph < 5; ph++) begin
          @(negedge clk);
          // 2.5 clocks per sample: samples on phases 0 and 2 of every 5 clocks,
          // one sample per iteration of n on phase 0 or 2 alternately
          smp_valid = 0;
          if (ph == 0) begin
            smp_valid = 1;
            smp.re = 16'($rtoi(tr[m] + (tr[m] >= 0 ? 0.5 : -0.5)));
            smp.im = 16'($rtoi(ti[m] + (ti[m] >= 0 ? 0.5 : -0.5)));
            t.active = 1; t.keep = (n >= 0); t.first = (n == 0); t.sym = 3'(b); t.frame = 16'd7;
            if (n == N - 2) last_smp_cyc[b] = cyc;
          end
          if (ph == 2) break;
        end
      end
    end
    @(negedge clk) smp_valid = 0;
    repeat (2000) @(posedge clk);
    checks++;
    if (osym != NS - 1) begin failures++; $display("symbols out %0d", osym); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (fabs(real'(out_data.re) - xr[osym][os]) > 4.0 || fabs(real'(out_data.im) - xi[osym][os]) > 4.0 ||
        out_tag.sc != 10'(os) || out_tag.sym != 3'(osym) || out_tag.frame != 16'd7 || out_last != (os == NSC - 1)) begin
      failures++;
      if (failures < 10) $display("sym %0d s %0d: got %0d,%0d exp %0d,%0d tag %0d/%0d", osym, os,
                                  out_data.re, out_data.im, xr[osym][os], xi[osym][os], out_tag.sym, out_tag.sc);
    end
    if (os == 0) begin
      checks++;
      if (cyc - last_smp_cyc[osym + 1] != 14) begin failures++; $display("latency %0d", cyc - last_smp_cyc[osym + 1]); end
    end
    os++;
    if (os == NSC) begin os = 0; osym++; end
  end

  initial begin
    repeat (NS * 1168 * 3 + 5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
