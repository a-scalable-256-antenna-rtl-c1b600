// fft_r2sdf: streaming N-point FFT of one receive chain (part of "Timing Sync & OFDM").
//
// The FFT is a chain of log2(N) radix-2 single-delay-feedback stages
// (fft_sdf_stage), with delays N/2, N/4, ..., 1. It accepts one complex sample per
// in_valid, at any rate up to one per clock. For each input block of N samples it
// delivers N bins in bit-reversed order: output position p carries bin
// bitreverse(p). out_pos gives p and out_first marks p = 0. Every stage widens the
// data by one bit; only a twiddle product can saturate, which takes inputs near full scale. The output is
//     X[k] / 2^OUT_SHIFT, rounded and saturated to OUT_W bits,
// where X[k] = sum_n x[n] exp(-j 2 pi n k / N). With the default shift of 5 (= log2(N)/2)
// the transform keeps signal power. The paper only names the FFT and its size (1024).
// The architecture, the widths and the scaling are this design's choices.
// Timing: the pipeline advances only on in_valid; its stages hold N-1 samples in
// total. Bin position p of block b leaves with input sample N-1+p counted from the
// start of block b (p = 0 with the block's own last sample, the rest while block b+1
// is fed in), L+1 clocks after that sample.
module fft_r2sdf #(
  parameter int unsigned N         = 1024,
  parameter int unsigned IN_W      = 16,
  parameter int unsigned OUT_W     = 16,
  parameter int unsigned OUT_SHIFT = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic                    out_first,
  output logic [$clog2(N)-1:0]    out_pos,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned FW = IN_W + L;   // width after the last stage

  // Stage s has input width IN_W + s. Each link is sized for the widest one and
  // stage s uses its low IN_W + s bits.
  logic                 v   [L+1];
  logic signed [FW-1:0] re  [L+1];
  logic signed [FW-1:0] im  [L+1];

  assign v[0]  = in_valid;
  assign re[0] = FW'(in_re);
  assign im[0] = FW'(in_im);

  for (genvar s = 0; s < L; s++) begin : g_stage
    localparam int unsigned WS = IN_W + s;
    logic signed [WS:0] o_re, o_im;
    fft_sdf_stage #(.D(N >> (s + 1)), .W(WS)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s]),
      .in_re    (re[s][WS-1:0]),
      .in_im    (im[s][WS-1:0]),
      .out_valid(v[s+1]),
      .out_re   (o_re),
      .out_im   (o_im)
    );
    assign re[s+1] = FW'(o_re);
    assign im[s+1] = FW'(o_im);
  end

  function automatic logic signed [OUT_W-1:0] scale(logic signed [FW-1:0] x);
    logic signed [FW:0] r;
    localparam logic signed [FW:0] MAXV = (FW+1)'((64'sd1 <<< (OUT_W - 1)) - 1);
    localparam logic signed [FW:0] MINV = -(FW+1)'(64'sd1 <<< (OUT_W - 1));
    if (OUT_SHIFT == 0) r = (FW+1)'(x);
    else r = ((FW+1)'(x) + (FW+1)'(64'sd1 <<< (OUT_SHIFT - 1))) >>> OUT_SHIFT;
    if (r > MAXV) return MAXV[OUT_W-1:0];
    if (r < MINV) return MINV[OUT_W-1:0];
    return r[OUT_W-1:0];
  endfunction

  logic [L-1:0] pos;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos       <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_pos   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= v[L];
      if (v[L]) begin
        pos       <= pos + 1'b1;
        out_pos   <= pos;
        out_first <= (pos == '0);
        out_re    <= scale(re[L]);
        out_im    <= scale(im[L]);
      end
    end
  end
endmodule
