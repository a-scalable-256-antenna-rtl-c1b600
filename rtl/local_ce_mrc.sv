// local_ce_mrc: local channel estimation, Gram matrix and MRC of one panel
// ("Local CE, MRC").
//
// The M receive chains of the panel deliver the same subcarrier of the same symbol
// in the same clock. This block first joins them into one received vector y (M
// values). It counts a misalignment if the chains' valids or tags differ. Then, per
// symbol type:
//   * UL pilot symbol. Subcarrier s carries only user k = s mod K, with the known
//     QPSK pilot p(s) (lulis_pkg::pilot_bits). The channel estimate is
//     h[m][k] = y[m] * conj(p) / 2 = y[m] / p. This needs only additions because
//     p = +-1 +-j. The K users of a group of K adjacent subcarriers,
//     g = floor(s / K), share one estimate H_g (M x K), which is stored in the
//     channel memory. Once a group is complete, its local Gram matrix
//     G_g = H_g^H H_g goes out as K beats, one per clock. Beat sc = K*g + r holds
//     column r: G[l][r] for l = 0..K-1.
//   * UL data symbols. Subcarrier s reads H_g for g = floor(s / K) and produces the
//     local MRC vector z = H_g^H y (K values) as one beat with sc = s.
//   * Other symbols are ignored.
// Both products use one array of K x M complex multipliers, out[l] = sum_m
// conj(A[m][l]) * b[m]. It is fed either (A = H_g, b = y) or (A = H_g, b = column r
// of H_g). Sums are exact. Each output is rounded, shifted right by out_shift and
// saturated to 16 bits, so that it fits the 32-bit complex words of the fronthaul.
// What follows the paper: the local sums z_j = H_j^H y_j and G_j = H_j^H H_j
// (Eq. 1, 2) and their place after the 16 chains. This design's own choices: the
// pilot layout (interleaved in frequency), the estimator, the sharing of the
// multipliers, the scaling and the beat format.
// Timing: a data beat leaves 4 clocks after it enters. The K Gram beats of a group
// leave 4..4+K-1 clocks after the group's last pilot subcarrier enters. Throughput
// is one subcarrier per clock. The paper measured 21 clocks for its version of this
// block.
module local_ce_mrc
  import lulis_pkg::*;
#(
  parameter int unsigned M   = 16,
  parameter int unsigned NSC = N_SC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [M-1:0] in_valid,
  input  cplx_t       in_y   [M],
  input  tag_t        in_tag [M],
  input  logic [4:0]  out_shift,     // software register
  output logic        out_valid,
  output beat_t       out_beat,
  output logic [15:0] misalign_cnt
);
  localparam int unsigned K  = K_USERS;
  localparam int unsigned NG = NSC / K;              // subcarrier groups
  localparam int unsigned GW = $clog2(NG);
  localparam int unsigned KW = $clog2(K);
  localparam int unsigned AW = 2 * SAMPLE_W + 2 + $clog2(M);   // accumulator width

  typedef cplx_t hmat_t [M][K];

  // ---------------- join the chains ----------------
  logic v_any, v_all, tags_eq;
  tag_t tg;
  always_comb begin
    v_any   = |in_valid;
    v_all   = &in_valid;
    tags_eq = 1'b1;
    for (int m = 1; m < int'(M); m++) if (in_tag[m] != in_tag[0]) tags_eq = 1'b0;
    tg = in_tag[0];
  end

  logic       is_pilot, is_data;
  logic [KW-1:0] kk;
  logic [GW-1:0] gg;
  assign is_pilot = v_all && (tg.sym == SYM_ULP)  && (tg.sc < sc_idx_t'(NSC));
  assign is_data  = v_all && (tg.sym == SYM_ULD1 || tg.sym == SYM_ULD2) && (tg.sc < sc_idx_t'(NSC));
  assign kk = tg.sc[KW-1:0];
  assign gg = GW'(tg.sc >> KW);

  // Channel estimate of the incoming pilot subcarrier: y * conj(p) / 2.
  cplx_t h_new [M];
  always_comb begin
    logic [1:0] pb;
    logic signed [SAMPLE_W:0] yr, yi, er, ei;
    pb = pilot_bits(tg.sc);
    for (int m = 0; m < int'(M); m++) begin
      yr = (SAMPLE_W+1)'(in_y[m].re);
      yi = (SAMPLE_W+1)'(in_y[m].im);
      // (yr + j yi)(pr - j pi) = (yr pr + yi pi) + j (yi pr - yr pi)
      er = (pb[1] ? -yr : yr) + (pb[0] ? -yi : yi);
      ei = (pb[1] ? -yi : yi) - (pb[0] ? -yr : yr);
      h_new[m].re = er[SAMPLE_W:1];
      h_new[m].im = ei[SAMPLE_W:1];
    end
  end

  // ---------------- stage A: estimate storage / channel read ----------------
  hmat_t hmem [NG];        // channel memory, one group per word
  hmat_t grp;              // group being collected
  hmat_t gsrc;             // group whose Gram matrix is being produced
  hmat_t h_rd;             // channel read for a data subcarrier
  cplx_t y1 [M];
  tag_t  tag1;
  logic  v1;
  logic  gram_busy;
  logic [KW-1:0] gram_r;
  tag_t  gram_tag;

  hmat_t grp_full;
  always_comb begin
    grp_full = grp;
    for (int m = 0; m < int'(M); m++) grp_full[m][kk] = h_new[m];
  end

  always_ff @(posedge clk) begin
    if (is_pilot && kk == KW'(K - 1)) hmem[gg] <= grp_full;
    if (is_data) h_rd <= hmem[gg];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < int'(M); m++) begin
        y1[m] <= '0;
        for (int k = 0; k < int'(K); k++) begin
          grp[m][k]  <= '0;
          gsrc[m][k] <= '0;
        end
      end
      tag1         <= '0;
      v1           <= 1'b0;
      gram_busy    <= 1'b0;
      gram_r       <= '0;
      gram_tag     <= '0;
      misalign_cnt <= '0;
    end else begin
      v1 <= is_data;
      if (is_data) begin
        y1   <= in_y;
        tag1 <= tg;
      end
      if (v_any && (!v_all || !tags_eq) && misalign_cnt != 16'hffff)
        misalign_cnt <= misalign_cnt + 1'b1;
      // Gram sequencer: K columns, one per clock.
      if (gram_busy) begin
        gram_r <= gram_r + 1'b1;
        if (gram_r == KW'(K - 1)) gram_busy <= 1'b0;
      end
      if (is_pilot) begin
        grp <= grp_full;
        if (kk == KW'(K - 1)) begin
          gsrc      <= grp_full;
          gram_busy <= 1'b1;
          gram_r    <= '0;
          gram_tag  <= '{frame: tg.frame, sym: SYM_ULP, sc: sc_idx_t'(gg) << KW};
        end
      end
    end
  end

  // ---------------- stage B: products ----------------
  logic signed [2*SAMPLE_W:0] pr_re [K][M], pr_im [K][M];
  logic signed [2*SAMPLE_W:0] p_re  [K][M], p_im  [K][M];
  // Multiplier operands, sign-extended to the product width.
  logic signed [2*SAMPLE_W:0] op_ar [K][M], op_ai [K][M], op_br [M], op_bi [M];
  always_comb begin
    for (int m = 0; m < int'(M); m++) begin
      op_br[m] = gram_busy ? (2*SAMPLE_W+1)'(gsrc[m][gram_r].re) : (2*SAMPLE_W+1)'(y1[m].re);
      op_bi[m] = gram_busy ? (2*SAMPLE_W+1)'(gsrc[m][gram_r].im) : (2*SAMPLE_W+1)'(y1[m].im);
      for (int l = 0; l < int'(K); l++) begin
        op_ar[l][m] = gram_busy ? (2*SAMPLE_W+1)'(gsrc[m][l].re) : (2*SAMPLE_W+1)'(h_rd[m][l].re);
        op_ai[l][m] = gram_busy ? (2*SAMPLE_W+1)'(gsrc[m][l].im) : (2*SAMPLE_W+1)'(h_rd[m][l].im);
        // conj(a) * b = (ar br + ai bi) + j (ar bi - ai br)
        p_re[l][m] = op_ar[l][m] * op_br[m] + op_ai[l][m] * op_bi[m];
        p_im[l][m] = op_ar[l][m] * op_bi[m] - op_ai[l][m] * op_br[m];
      end
    end
  end
  logic  v2;
  tag_t  tag2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2   <= 1'b0;
      tag2 <= '0;
      for (int l = 0; l < int'(K); l++)
        for (int m = 0; m < int'(M); m++) begin
          pr_re[l][m] <= '0;
          pr_im[l][m] <= '0;
        end
    end else begin
      v2 <= gram_busy | v1;
      if (gram_busy) begin
        tag2    <= gram_tag;
        tag2.sc <= gram_tag.sc | sc_idx_t'(gram_r);
      end else begin
        tag2 <= tag1;
      end
      for (int l = 0; l < int'(K); l++)
        for (int m = 0; m < int'(M); m++) begin
          pr_re[l][m] <= p_re[l][m];
          pr_im[l][m] <= p_im[l][m];
        end
    end
  end

  // ---------------- stage C: sums over the antennas ----------------
  logic signed [AW-1:0] acc_re [K], acc_im [K];
  logic signed [AW-1:0] s_re [K], s_im [K];
  always_comb begin
    for (int l = 0; l < int'(K); l++) begin
      s_re[l] = '0;
      s_im[l] = '0;
      for (int m = 0; m < int'(M); m++) begin
        s_re[l] += AW'(pr_re[l][m]);
        s_im[l] += AW'(pr_im[l][m]);
      end
    end
  end
  logic  v3;
  tag_t  tag3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3   <= 1'b0;
      tag3 <= '0;
      for (int l = 0; l < int'(K); l++) begin
        acc_re[l] <= '0;
        acc_im[l] <= '0;
      end
    end else begin
      v3   <= v2;
      tag3 <= tag2;
      for (int l = 0; l < int'(K); l++) begin
        acc_re[l] <= s_re[l];
        acc_im[l] <= s_im[l];
      end
    end
  end

  // ---------------- stage D: scaling ----------------
  function automatic logic signed [SAMPLE_W-1:0] scale(logic signed [AW-1:0] x, logic [4:0] sh);
    logic signed [63:0] w;
    w = 64'(x);
    if (sh != 0) w = (w + (64'sd1 <<< (sh - 1))) >>> sh;
    return sat16(w);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      out_valid    <= v3;
      out_beat.tag <= tag3;
      for (int l = 0; l < int'(K); l++) begin
        out_beat.v[l].re <= scale(acc_re[l], out_shift);
        out_beat.v[l].im <= scale(acc_im[l], out_shift);
      end
    end
  end

  // The Gram sequencer and data beats never overlap: they come from different symbols.
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(gram_busy && v1)) else $error("local_ce_mrc: Gram and MRC beats collide");
  end
endmodule
