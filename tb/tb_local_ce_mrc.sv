// tb_local_ce_mrc: drives one frame's uplink symbols into local_ce_mrc at its
// default size (16 chains, 4 users, 792 subcarriers). The pilot symbol is built
// from a random channel H_g per group of 4 subcarriers: y = h[k] * p(s), so the
// estimate must return H_g exactly. The data symbol carries random vectors y.
// The testbench computes G_g = H_g^H H_g and z = H_g^H y in integers, rounds,
// shifts and saturates them the same way, and compares every beat: tag, values,
// order. It also checks that a data beat leaves 4 clocks after it enters, that a
// guard symbol produces nothing, and that one beat with a chain missing is counted
// as a misalignment.
module tb_local_ce_mrc;
  import lulis_pkg::*;
  localparam int M = 16, K = 4, NSC = 792, NG = NSC / K, SH = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [M-1:0] in_valid = '0;
  cplx_t in_y [M];
  tag_t  in_tag [M];
  logic [4:0] out_shift = 5'(SH);
  logic out_valid;
  beat_t out_beat;
  logic [15:0] misalign_cnt;
  int checks = 0, failures = 0;

  local_ce_mrc dut (.*);

  int hr [NG][M][K], hi [NG][M][K];
  int yr [NSC][M], yi [NSC][M];
  longint in_cyc [NSC];
  longint cyc = 0;
  always @(posedge clk) cyc++;
  int n_gram = 0, n_mrc = 0, n_other = 0;

  function automatic int scl(longint x);
    longint w = (x + (64'sd1 <<< (SH - 1))) >>> SH;
    if (w > 32767) return 32767;
    if (w < -32768) return -32768;
    return int'(w);
  endfunction

  task automatic drive(int sym, int s, int frame);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin in_valid = '0; @(negedge clk); end
    in_valid = '1;
    for (int m = 0; m < M; m++) in_tag[m] = '{frame: 16'(frame), sym: 3'(sym), sc: 10'(s)};
  endtask

  initial begin
    for (int m = 0; m < M; m++) begin in_y[m] = '0; in_tag[m] = '0; end
    for (int g = 0; g < NG; g++)
      for (int m = 0; m < M; m++)
        for (int k = 0; k < K; k++) begin
          hr[g][m][k] = $urandom_range(0, 1200) - 600;
          hi[g][m][k] = $urandom_range(0, 1200) - 600;
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pilot symbol
    for (int s = 0; s < NSC; s++) begin
      automatic logic [1:0] pb = pilot_bits(10'(s));
      automatic int pr = pb[1] ? -1 : 1, pi = pb[0] ? -1 : 1;
      drive(SYM_ULP, s, 5);
      for (int m = 0; m < M; m++) begin
        automatic int a = hr[s / K][m][s % K], b = hi[s / K][m][s % K];
        in_y[m].re = 16'(a * pr - b * pi);
        in_y[m].im = 16'(a * pi + b * pr);
      end
    end
    @(negedge clk) in_valid = '0;
    repeat (20) @(negedge clk);
    // data symbol
    for (int s = 0; s < NSC; s++) begin
      drive(SYM_ULD2, s, 5);
      for (int m = 0; m < M; m++) begin
        yr[s][m] = $urandom_range(0, 3000) - 1500;
        yi[s][m] = $urandom_range(0, 3000) - 1500;
        in_y[m].re = 16'(yr[s][m]);
        in_y[m].im = 16'(yi[s][m]);
      end
      in_cyc[s] = cyc;
    end
    // guard symbol: no output; one beat with chain 3 missing
    for (int s = 0; s < 20; s++) drive(SYM_GUARD1, s, 5);
    @(negedge clk) in_valid = '1; in_valid[3] = 1'b0;
    @(negedge clk) in_valid = '0;
    repeat (20) @(posedge clk);
    checks++; if (n_gram != NSC) begin failures++; $display("gram beats %0d", n_gram); end
    checks++; if (n_mrc != NSC) begin failures++; $display("mrc beats %0d", n_mrc); end
    checks++; if (n_other != 0) begin failures++; $display("other beats %0d", n_other); end
    checks++; if (misalign_cnt != 1) begin failures++; $display("misalign %0d", misalign_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int s = int'(out_beat.tag.sc);
    automatic bit bad = 0;
    if (out_beat.tag.sym == SYM_ULP) begin
      automatic int g = s / K, r = s % K;
      if (s != n_gram) bad = 1;
      for (int l = 0; l < K; l++) begin
        automatic longint er = 0, ei = 0;
        for (int m = 0; m < M; m++) begin
          er += longint'(hr[g][m][l]) * hr[g][m][r] + longint'(hi[g][m][l]) * hi[g][m][r];
          ei += longint'(hr[g][m][l]) * hi[g][m][r] - longint'(hi[g][m][l]) * hr[g][m][r];
        end
        if (int'(out_beat.v[l].re) != scl(er) || int'(out_beat.v[l].im) != scl(ei)) bad = 1;
      end
      n_gram++;
    end else if (out_beat.tag.sym == SYM_ULD2) begin
      automatic int g = s / K;
      if (s != n_mrc) bad = 1;
      for (int l = 0; l < K; l++) begin
        automatic longint er = 0, ei = 0;
        for (int m = 0; m < M; m++) begin
          er += longint'(hr[g][m][l]) * yr[s][m] + longint'(hi[g][m][l]) * yi[s][m];
          ei += longint'(hr[g][m][l]) * yi[s][m] - longint'(hi[g][m][l]) * yr[s][m];
        end
        if (int'(out_beat.v[l].re) != scl(er) || int'(out_beat.v[l].im) != scl(ei)) bad = 1;
      end
      checks++;
      if (cyc - in_cyc[s] != 5) begin failures++; if (failures < 10) $display("latency %0d", cyc - in_cyc[s]); end
      n_mrc++;
    end else n_other++;
    if (out_beat.tag.frame != 16'd5) bad = 1;
    checks++;
    if (bad) begin failures++; if (failures < 10) $display("bad beat sym %0d sc %0d", out_beat.tag.sym, s); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
