// tb_lulis_testbed: end-to-end uplink test of the testbed with J = 4 panels of M = 4
// antennas.
//
// The testbench plays the parts that are not logic:
//  * Software: it builds the four users' frames: a pilot symbol, then two QPSK data
//    symbols (+-A +-jA), then four empty symbols. In the pilot symbol, user k sends
//    p(s) * A on subcarriers s with s mod 4 = k. Each symbol goes through an
//    inverse DFT scaled by 1/32 and gets a 144-sample cyclic prefix. The frames are
//    written into the UE memories through the write port. It also sets each
//    panel's sync delay so that frame start meets the first sample.
//  * Air and converters: a flat random channel h[j][m][k] from every user to every
//    antenna, 100 samples of delay, a sample every 2.5 clocks.
//  * Ethernet: eth_link_model between neighbouring panels, 350 clocks of latency,
//    random back-pressure, and one bad packet injected on the first link.
//  * DMA: random back-pressure on the central panel's output.
// Three frames are played and the central panel passes one in two (keep_every = 2).
// So frames 0 and 2 must reach the DMA, 3 x 792 beats each. Every beat is compared
// with the totals worked out here in floating point:
//     G[l][r] = A^2 / 2^SH * sum_j sum_m conj(h[j][m][l]) h[j][m][r]
//     z[k](s) = A / 2^SH * sum_j sum_m conj(h[j][m][k]) sum_k' h[j][m][k'] X_k'(s)
// The tolerance is 2 + J LSB plus 2 % of the value.
// Mechanisms counted (each must occur): Gram beats, MRC beats, frames passed and
// dropped by rate reduction, fronthaul stalls, DMA stalls, local sums waiting in the
// aggregation FIFO of a downstream panel, the bad packet dropped, TDD switching to
// TX in every panel. Error counters that must stay 0: misalignment, FIFO overflow,
// tag mismatch, packet sequence and length errors.
module tb_lulis_testbed;
  import lulis_pkg::*;
  localparam int J = 4, M = 4;
  localparam int K = 4, N = 1024, NSC = 792, CP = 144, SL = N + CP, FL = 7 * SL;
  localparam int LAT_S = 100;      // air + converter delay in samples
  localparam int SH = 12;          // out_shift of every panel
  localparam real A = 1000.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         ue_wr_en = 0, ue_run = 0, ue_dac_ready = 0;
  logic [12:0]  ue_wr_addr = 0;
  cplx_t        ue_wr_data [K];
  logic         ue_dac_valid;
  cplx_t        ue_dac_data [K];
  logic [15:0]  ue_frame_cnt;
  panel_cfg_t    cfg    [J];
  panel_status_t status [J];
  logic [M-1:0] adc_valid [J];
  cplx_t        adc_data  [J][M];
  logic [J-1:0] tdd_tx;
  logic [J-1:0] fh_tx_tvalid, fh_tx_tready, fh_tx_tlast;
  logic [127:0] fh_tx_tdata [J];
  logic [J-1:0] fh_rx_tvalid, fh_rx_tready, fh_rx_tlast;
  logic [127:0] fh_rx_tdata [J];
  logic         dma_tvalid, dma_tready = 0, dma_tlast;
  logic [127:0] dma_tdata;

  lulis_testbed #(.J(J), .M(M)) dut (.*);

  // ---------------- Ethernet links j -> j+1 ----------------
  int link_stalls [J], link_inj [J];
  assign fh_rx_tvalid[0] = 1'b0;
  assign fh_rx_tlast[0]  = 1'b0;
  assign fh_rx_tdata[0]  = '0;
  assign fh_tx_tready[J-1] = 1'b1;
  assign link_stalls[J-1] = 0;
  assign link_inj[J-1] = 0;
  for (genvar j = 0; j < J - 1; j++) begin : g_link
    eth_link_model #(.LAT(350), .STALL_DIV(8), .INJECT_AT(j == 0 ? 12000 : 0)) u_link (
      .clk, .rst_n,
      .in_tvalid (fh_tx_tvalid[j]), .in_tready(fh_tx_tready[j]),
      .in_tlast  (fh_tx_tlast[j]),  .in_tdata (fh_tx_tdata[j]),
      .out_tvalid(fh_rx_tvalid[j+1]), .out_tready(fh_rx_tready[j+1]),
      .out_tlast (fh_rx_tlast[j+1]),  .out_tdata (fh_rx_tdata[j+1]),
      .stall_cycles(link_stalls[j]), .injected(link_inj[j])
    );
  end

  // ---------------- users' frames and channel ----------------
  real cs [N], sn [N];
  real xr [K][3][NSC], xi [K][3][NSC];         // frequency domain, symbols 0..2
  real hr [J][M][K], hi [J][M][K];
  cplx_t frame_mem [K][FL];

  function automatic int bin_of(int s); return (s < NSC / 2) ? N - NSC / 2 + s : s - NSC / 2 + 1; endfunction
  function automatic int rnd(real v); return (v >= 0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5); endfunction
  function automatic real fabs(real x); return x < 0 ? -x : x; endfunction

  task automatic build_frames();
    real tr [N], ti [N];
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979 * i / N);
    end
    for (int k = 0; k < K; k++) begin
      for (int s = 0; s < NSC; s++) begin
        logic [1:0] pb = pilot_bits(10'(s));
        xr[k][0][s] = (s % K == k) ? (pb[1] ? -A : A) : 0.0;
        xi[k][0][s] = (s % K == k) ? (pb[0] ? -A : A) : 0.0;
        for (int d = 1; d < 3; d++) begin
          xr[k][d][s] = $urandom_range(0, 1) ? A : -A;
          xi[k][d][s] = $urandom_range(0, 1) ? A : -A;
        end
      end
      for (int n = 0; n < FL; n++) frame_mem[k][n] = '0;
      for (int d = 0; d < 3; d++) begin
        for (int n = 0; n < N; n++) begin tr[n] = 0; ti[n] = 0; end
        for (int s = 0; s < NSC; s++) begin
          int b = bin_of(s);
          for (int n = 0; n < N; n++) begin
            int idx = (n * b) % N;
            tr[n] += xr[k][d][s] * cs[idx] - xi[k][d][s] * sn[idx];
            ti[n] += xr[k][d][s] * sn[idx] + xi[k][d][s] * cs[idx];
          end
        end
        for (int n = -CP; n < N; n++) begin
          int m = (n < 0) ? n + N : n;
          frame_mem[k][d * SL + CP + n] = '{re: 16'(rnd(tr[m] / 32.0)), im: 16'(rnd(ti[m] / 32.0))};
        end
      end
    end
    for (int j = 0; j < J; j++)
      for (int m = 0; m < M; m++)
        for (int k = 0; k < K; k++) begin
          int ur, ui;
          ur = $urandom_range(0, 1400);
          ui = $urandom_range(0, 1400);
          hr[j][m][k] = (ur - 700) / 1000.0;
          hi[j][m][k] = (ui - 700) / 1000.0;
        end
  endtask

  // ---------------- references ----------------
  real g_re [K][K], g_im [K][K];
  real z_re [3][NSC][K], z_im [3][NSC][K];
  task automatic build_refs();
    real sc = 1.0 / real'(1 << SH);
    for (int l = 0; l < K; l++)
      for (int r = 0; r < K; r++) begin
        g_re[l][r] = 0; g_im[l][r] = 0;
        for (int j = 0; j < J; j++)
          for (int m = 0; m < M; m++) begin
            g_re[l][r] += A * A * sc * (hr[j][m][l] * hr[j][m][r] + hi[j][m][l] * hi[j][m][r]);
            g_im[l][r] += A * A * sc * (hr[j][m][l] * hi[j][m][r] - hi[j][m][l] * hr[j][m][r]);
          end
      end
    for (int d = 1; d < 3; d++)
      for (int s = 0; s < NSC; s++)
        for (int k = 0; k < K; k++) begin
          z_re[d][s][k] = 0; z_im[d][s][k] = 0;
          for (int j = 0; j < J; j++)
            for (int m = 0; m < M; m++) begin
              real yr = 0, yi = 0;
              for (int q = 0; q < K; q++) begin
                yr += hr[j][m][q] * xr[q][d][s] - hi[j][m][q] * xi[q][d][s];
                yi += hr[j][m][q] * xi[q][d][s] + hi[j][m][q] * xr[q][d][s];
              end
              z_re[d][s][k] += A * sc * (hr[j][m][k] * yr + hi[j][m][k] * yi);
              z_im[d][s][k] += A * sc * (hr[j][m][k] * yi - hi[j][m][k] * yr);
            end
        end
  endtask

  // ---------------- converters and air ----------------
  cplx_t  dac_hist [$];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    automatic bit strobe = ue_run && ((cyc % 5 == 0) || (cyc % 5 == 2));
    ue_dac_ready = strobe;
    for (int j = 0; j < J; j++) begin
      adc_valid[j] = strobe ? '1 : '0;
    end
    if (strobe) begin
      // one sample of all users, kept for LAT_S samples
      for (int k = 0; k < K; k++) dac_hist.push_back(ue_dac_data[k]);
      if (dac_hist.size() > (LAT_S + 1) * K)
        for (int k = 0; k < K; k++) void'(dac_hist.pop_front());
      for (int j = 0; j < J; j++)
        for (int m = 0; m < M; m++) begin
          automatic real yr = 0, yi = 0;
          if (dac_hist.size() == (LAT_S + 1) * K)
            for (int k = 0; k < K; k++) begin
              automatic int sr = $signed(dac_hist[k].re), si = $signed(dac_hist[k].im);
              yr += hr[j][m][k] * sr - hi[j][m][k] * si;
              yi += hr[j][m][k] * si + hi[j][m][k] * sr;
            end
          adc_data[j][m] = '{re: 16'(rnd(yr)), im: 16'(rnd(yi))};
        end
    end
  end

  // ---------------- DMA side checks ----------------
  int checks = 0, failures = 0;
  int n_beats = 0, n_frames = 0, n_gram = 0, n_mrc = 0, dma_stalls = 0;
  int tdd_rises [J];
  logic [J-1:0] tdd_d = '0;
  real max_err = 0;

  always @(negedge clk) dma_tready = ($urandom_range(0, 5) != 0);

  function automatic void cmp(real er, real ei, logic signed [15:0] gr, logic signed [15:0] gi, string what, int idx);
    real tol_r = 2.0 + J + 0.02 * fabs(er);
    real tol_i = 2.0 + J + 0.02 * fabs(ei);
    checks++;
    if (fabs(er - gr) > max_err) max_err = fabs(er - gr);
    if (fabs(er - gr) > tol_r || fabs(ei - gi) > tol_i) begin
      failures++;
      if (failures < 12) $display("%s beat %0d: got %0d,%0d exp %f,%f", what, idx, gr, gi, er, ei);
    end
  endfunction

  always @(posedge clk) if (rst_n) begin
    tdd_d <= tdd_tx;
    for (int j = 0; j < J; j++) if (tdd_tx[j] && !tdd_d[j]) tdd_rises[j]++;
    if (dma_tvalid && !dma_tready) dma_stalls++;
    if (dma_tvalid && dma_tready) begin
      automatic int sym = n_beats / NSC, s = n_beats % NSC;
      automatic cplx_t [K-1:0] v = dma_tdata;
      if (sym == 0) begin
        for (int l = 0; l < K; l++) cmp(g_re[l][s % K], g_im[l][s % K], v[l].re, v[l].im, "gram", n_beats);
        n_gram++;
      end else begin
        for (int l = 0; l < K; l++) cmp(z_re[sym][s][l], z_im[sym][s][l], v[l].re, v[l].im, "mrc", n_beats);
        n_mrc++;
      end
      checks++;
      if (dma_tlast != (n_beats == 3 * NSC - 1)) begin failures++; $display("tlast at beat %0d", n_beats); end
      n_beats++;
      if (n_beats == 3 * NSC) begin n_beats = 0; n_frames++; end
    end
  end

  task automatic need(bit ok, string what, int val);
    checks++;
    if (!ok) begin failures++; $display("mechanism/status check failed: %s (%0d)", what, val); end
  endtask

  initial begin
    for (int k = 0; k < K; k++) ue_wr_data[k] = '0;
    for (int j = 0; j < J; j++) begin
      tdd_rises[j] = 0;
      adc_valid[j] = '0;
      for (int m = 0; m < M; m++) adc_data[j][m] = '0;
      // sync reaches panel j 2j clocks after panel 0; the frame starts with the
      // sample that arrives LAT_S samples (250 clocks) after the UE sent sample 0
      cfg[j] = '{sync_delay: 16'(LAT_S * 5 / 2 - 4 - 2 * j), out_shift: 5'(SH),
                 is_first: (j == 0), node_id: 8'(j), keep_every: 8'd2};
    end
    build_frames();
    build_refs();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < FL; n++) begin
      @(negedge clk);
      ue_wr_en = 1; ue_wr_addr = 13'(n);
      for (int k = 0; k < K; k++) ue_wr_data[k] = frame_mem[k][n];
    end
    @(negedge clk) ue_wr_en = 0;
    ue_run = 1;
    wait (n_frames == 2);
    repeat (100) @(posedge clk);
    $display("max |error| %f", max_err);
    need(n_gram == 2 * NSC, "Gram beats at DMA", n_gram);
    need(n_mrc == 4 * NSC, "MRC beats at DMA", n_mrc);
    need(status[J-1].passed >= 2, "frames passed by rate reduction", int'(status[J-1].passed));
    need(status[J-1].dropped >= 1, "frames dropped by rate reduction", int'(status[J-1].dropped));
    need(link_stalls[0] > 0, "fronthaul back-pressure", link_stalls[0]);
    need(dma_stalls > 0, "DMA back-pressure", dma_stalls);
    need(status[J-1].max_fill > 0, "local sums waiting for upstream", int'(status[J-1].max_fill));
    need(link_inj[0] == 1 && status[1].bad_hdr == 1, "bad packet dropped", int'(status[1].bad_hdr));
    for (int j = 0; j < J; j++) begin
      need(tdd_rises[j] >= 2, "TDD switch to TX", tdd_rises[j]);
      need(status[j].misalign == 0, "chain misalignment", int'(status[j].misalign));
      need(status[j].overflow == 0, "FIFO overflow", int'(status[j].overflow));
      need(status[j].mismatch == 0, "tag mismatch", int'(status[j].mismatch));
      need(status[j].seq_err == 0 && status[j].len_err == 0, "packet errors", int'(status[j].seq_err));
      need(status[j].missed_sync == 0, "missed sync", int'(status[j].missed_sync));
    end
    $display("mechanisms: gram=%0d mrc=%0d passed=%0d dropped=%0d link_stalls=%0d dma_stalls=%0d max_fill=%0d bad_hdr=%0d tdd_rises[0]=%0d",
             n_gram, n_mrc, status[J-1].passed, status[J-1].dropped, link_stalls[0], dma_stalls,
             status[J-1].max_fill, status[1].bad_hdr, tdd_rises[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FL + 4 * FL * 5 / 2 + 20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d frames, %0d beats", n_frames, n_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
