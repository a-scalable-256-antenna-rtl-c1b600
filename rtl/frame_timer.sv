// frame_timer: sample, symbol and frame counter of one panel (the timing part of
// "Timing Sync & OFDM").
//
// The 16 receive chains of a panel sample on the same converter clock, so one timer
// serves all of them. The first ADC sample after a frame_start pulse is sample 0 of
// symbol 0. The timer then counts symbols of 1168 samples: 144 samples of cyclic
// prefix followed by 1024 samples for the FFT. A frame has 7 symbols (UL pilot,
// 2 x UL data, guard, DL pilot, DL data, guard). Frames repeat without a gap; each
// new frame_start pulse re-aligns the count. The frame number counts up once per
// frame.
// For the sample on the input this cycle, the timer gives the tag t:
//   active - a frame start has been seen
//   keep   - inside the FFT window; the chain drops samples with keep = 0, which is
//            how the cyclic prefix is removed
//   first  - first sample of the FFT window
//   sym    - symbol index within the frame
//   frame  - frame number
// tdd_tx drives the AFE's TDD switch through a GPIO. It is 1 during the two downlink
// symbols and 0 (receive) otherwise; the guard symbols give time to switch.
// The frame layout, FFT size and CP length follow the paper. The choice of which
// symbols select TX and the way counting restarts are this design's own.
// Timing: t is combinational from the counters and describes the current sample.
// The counters advance on each smp_valid.
module frame_timer
  import lulis_pkg::*;
#(
  parameter int unsigned N   = N_FFT,
  parameter int unsigned CP  = CP_LEN,
  parameter int unsigned NSY = N_SYM
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     frame_start,
  input  logic     smp_valid,
  output smp_tag_t t,
  output logic     tdd_tx
);
  localparam int unsigned SL = N + CP;
  localparam int unsigned SW = $clog2(SL);

  logic             active, pending;
  logic [SW-1:0]    samp;
  sym_idx_t         sym;
  frame_idx_t       frame;

  // A start pulse makes the next valid sample (or the one in the same cycle)
  // sample 0 of symbol 0 of a new frame.
  logic          restart;
  logic [SW-1:0] cur_samp;
  sym_idx_t      cur_sym;
  frame_idx_t    cur_frame;
  assign restart = frame_start | pending;

  always_comb begin
    cur_samp  = restart ? '0 : samp;
    cur_sym   = restart ? '0 : sym;
    // A re-alignment exactly at a natural frame boundary does not count twice.
    cur_frame = (restart && active && (samp != '0 || sym != '0)) ? frame + 1'b1 : frame;
    t.active  = active | restart;
    t.keep    = t.active && (cur_samp >= SW'(CP));
    t.first   = t.active && (cur_samp == SW'(CP));
    t.sym     = cur_sym;
    t.frame   = cur_frame;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      pending <= 1'b0;
      samp    <= '0;
      sym     <= '0;
      frame   <= '0;
    end else if (smp_valid && (active || restart)) begin
      pending <= 1'b0;
      active  <= 1'b1;
      frame   <= cur_frame;
      if (cur_samp == SW'(SL - 1)) begin
        samp <= '0;
        if (cur_sym == sym_idx_t'(NSY - 1)) begin
          sym   <= '0;
          frame <= cur_frame + 1'b1;
        end else begin
          sym <= cur_sym + 1'b1;
        end
      end else begin
        samp <= cur_samp + 1'b1;
        sym  <= cur_sym;
      end
    end else if (frame_start) begin
      pending <= 1'b1;
    end
  end

  assign tdd_tx = active && (sym == SYM_DLP || sym == SYM_DLD);
endmodule
