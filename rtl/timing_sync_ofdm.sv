// timing_sync_ofdm: OFDM demodulator of one receive chain ("Timing Sync & OFDM").
//
// The chain takes the decimated ADC samples of one antenna together with the
// panel's frame timer tag (frame_timer). Samples whose tag has keep = 0 are cyclic
// prefix, or come before the first frame start; they are dropped. The 1024 kept
// samples of each symbol go through the streaming FFT (fft_r2sdf). The bins are
// reordered and the guard band removed (subcarrier_demap). The frame and symbol
// number of each FFT window are queued when its first sample enters. They come off
// the queue when the window's first bin leaves the FFT, so each output subcarrier
// carries the tag of the symbol it came from.
// All 7 symbols of a frame are transformed; the later blocks keep only uplink ones.
// The paper lists timing synchronization, FFT, CP removal and guard-band removal as
// this block's tasks. The way they are built here is this design's own.
// Interface: valid-only streams; the chain never stalls, which suits a converter
// that delivers a sample every 2.5 clocks (61.44 MS/s at 153.6 MHz).
// Timing: the FFT holds N-1 samples, so a window's last bin leaves with sample
// N-2 of the next window. The first subcarrier of a symbol follows 13 clocks after
// that sample is taken in, and the burst then lasts 792 clocks. From the first CP
// sample of a symbol to its first subcarrier that is (1168 + 144 + 1022) samples,
// about 5850 clocks at 2.5 clocks per sample.
module timing_sync_ofdm
  import lulis_pkg::*;
#(
  parameter int unsigned N   = N_FFT,
  parameter int unsigned NSC = N_SC
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     smp_valid,
  input  cplx_t    smp,
  input  smp_tag_t t,
  output logic     out_valid,
  output logic     out_last,
  output cplx_t    out_data,
  output tag_t     out_tag
);
  localparam int unsigned L = $clog2(N);

  logic fft_in_valid;
  assign fft_in_valid = smp_valid && t.keep;

  logic               f_valid, f_first;
  logic [L-1:0]       f_pos;
  logic signed [15:0] f_re, f_im;

  fft_r2sdf #(.N(N), .IN_W(SAMPLE_W), .OUT_W(SAMPLE_W), .OUT_SHIFT(L / 2)) u_fft (
    .clk, .rst_n,
    .in_valid (fft_in_valid),
    .in_re    (smp.re),
    .in_im    (smp.im),
    .out_valid(f_valid),
    .out_first(f_first),
    .out_pos  (f_pos),
    .out_re   (f_re),
    .out_im   (f_im)
  );

  // Tag queue: frame and symbol of each window inside the FFT (at most two).
  tag_t       q [4];
  logic [1:0] q_wr, q_rd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wr <= '0;
      q_rd <= '0;
      for (int i = 0; i < 4; i++) q[i] <= '0;
    end else begin
      if (fft_in_valid && t.first) begin
        q[q_wr] <= '{frame: t.frame, sym: t.sym, sc: '0};
        q_wr    <= q_wr + 1'b1;
      end
      if (f_valid && f_first) q_rd <= q_rd + 1'b1;
    end
  end

  subcarrier_demap #(.N(N), .NSC(NSC)) u_demap (
    .clk, .rst_n,
    .in_valid (f_valid),
    .in_first (f_first),
    .in_pos   (f_pos),
    .in_data  ('{re: f_re, im: f_im}),
    .in_tag   (q[q_rd]),
    .out_valid,
    .out_last,
    .out_data,
    .out_tag
  );
endmodule
