// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-delay-feedback
// (R2SDF) FFT pipeline.
//
// The stage works on blocks of 2*D samples. During the first D samples of a block it
// stores the inputs in a D-deep delay line. Meanwhile it outputs the differences left
// there by the previous block, each multiplied by the twiddle factor
// exp(-j*pi*i/D), where i is the position within the half block. During the second D
// samples it forms the butterfly: it outputs delay + x and puts delay - x back into
// the delay line. The output stream is therefore, block after block, D sums followed
// by D rotated differences. These are the two half-size sub-FFT inputs of a DIF
// decomposition.
// Everything advances only on in_valid, so gaps in the input (the removed cyclic
// prefix) just pause the pipeline. Samples stay inside until more samples arrive: a
// stage releases a block's differences during the first half of the next block.
// The output is one bit wider than the input. A twiddle product is rounded and
// saturated to that width; the output of a stage with index 0 (factor 1) is passed
// on exactly. Twiddles are Q1.15 values computed at elaboration.
// Timing: out_valid and out are registered, so one cycle after the in_valid that
// produced them.
module fft_sdf_stage #(
  parameter int unsigned D = 512,   // delay length; block size is 2*D
  parameter int unsigned W = 16     // input width of I and Q
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W:0]   out_re,
  output logic signed [W:0]   out_im
);
  localparam int unsigned CW = (D > 1) ? $clog2(2 * D) : 1;
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1;

  typedef logic [D-1:0][31:0] tw_tab_t;

  function automatic logic signed [15:0] q15(real x);
    int v;
    v = (x >= 0.0) ? $rtoi(x * 32768.0 + 0.5) : -$rtoi(-x * 32768.0 + 0.5);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return 16'(v);
  endfunction

  // Entry i: {cos(pi*i/D), -sin(pi*i/D)} as Q1.15.
  function automatic tw_tab_t gen_tw();
    tw_tab_t tab;
    real     a;
    for (int i = 0; i < int'(D); i++) begin
      a = 3.14159265358979323846 * real'(i) / real'(D);
      tab[i] = {q15($cos(a)), q15(-$sin(a))};
    end
    return tab;
  endfunction

  localparam tw_tab_t TW = gen_tw();

  logic signed [W:0] dl_re [D];
  logic signed [W:0] dl_im [D];
  logic [CW-1:0]     cnt;
  logic [AW-1:0]     addr;
  logic              phase, primed;

  assign phase = (D > 1) ? cnt[CW-1] : cnt[0];
  assign addr  = (D > 1) ? cnt[AW-1:0] : '0;

  logic signed [W:0] x_re, x_im, d_re, d_im;
  assign x_re = {in_re[W-1], in_re};
  assign x_im = {in_im[W-1], in_im};
  assign d_re = dl_re[addr];
  assign d_im = dl_im[addr];

  // Twiddle product of the delay-line value leaving during the first half.
  logic signed [15:0]   c_tw, s_tw;
  logic signed [W+17:0] p_re, p_im;
  logic signed [W:0]    r_re, r_im;
  localparam logic signed [W+17:0] MAXV = (W+18)'((64'sd1 <<< W) - 1);
  localparam logic signed [W+17:0] MINV = -(W+18)'(64'sd1 <<< W);

  function automatic logic signed [W:0] rnd_sat(logic signed [W+17:0] p);
    logic signed [W+17:0] q;
    q = (p + (W+18)'(32'sd16384)) >>> 15;
    if (q > MAXV) return MAXV[W:0];
    if (q < MINV) return MINV[W:0];
    return q[W:0];
  endfunction

  function automatic logic signed [W+17:0] ext(logic signed [W:0] v);
    return (W+18)'(v);
  endfunction
  function automatic logic signed [W+17:0] ext16(logic signed [15:0] v);
    return (W+18)'(v);
  endfunction

  always_comb begin
    c_tw = TW[addr][31:16];
    s_tw = TW[addr][15:0];
    p_re = ext(d_re) * ext16(c_tw) - ext(d_im) * ext16(s_tw);
    p_im = ext(d_re) * ext16(s_tw) + ext(d_im) * ext16(c_tw);
    if (addr == '0) begin
      r_re = d_re;
      r_im = d_im;
    end else begin
      r_re = rnd_sat(p_re);
      r_im = rnd_sat(p_im);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!phase) begin
        dl_re[addr] <= x_re;
        dl_im[addr] <= x_im;
      end else begin
        dl_re[addr] <= d_re - x_re;
        dl_im[addr] <= d_im - x_im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (!phase) begin
          out_valid <= primed;
          out_re    <= r_re;
          out_im    <= r_im;
        end else begin
          primed    <= 1'b1;
          out_valid <= 1'b1;
          out_re    <= d_re + x_re;
          out_im    <= d_im + x_im;
        end
      end
    end
  end
endmodule
