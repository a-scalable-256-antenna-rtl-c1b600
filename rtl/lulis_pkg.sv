// lulis_pkg: constants and types shared by the distributed MIMO uplink receiver.
//
// The base station is a chain of panels. Each panel turns 16 antenna streams into
// per-subcarrier partial sums of the MRC vector z = H^H y and the Gram matrix
// G = H^H H. Panels add these sums along the chain. This package holds what all
// the blocks have to agree on:
//   * OFDM numerology: FFT size 1024, cyclic prefix 144 samples, 7-symbol frame
//     (UL pilot, UL data, UL data, guard, DL pilot, DL data, guard), 4 users.
//     These numbers follow the paper.
//   * The number of active subcarriers, N_SC = 792. This is the 5G NR size of a
//     50 MHz carrier at 60 kHz spacing (66 resource blocks). The paper does not give
//     it; it is this design's choice.
//   * The "beat": one subcarrier's K complex values plus a tag (frame, symbol,
//     subcarrier). Local results and fronthaul payloads use this same format.
//   * The pilot sequence. Pilots are QPSK (+-1 +-j). Subcarrier s carries a pilot
//     of user s mod K only, so the K users' pilots are interleaved in frequency.
//     The signs come from a multiplicative hash of s (see pilot_bits). The pattern
//     and the sequence are this design's choice; the paper only says that known
//     pilots are sent.
package lulis_pkg;

  // ---- numerology (paper, system parameter table and frame description) ----
  localparam int unsigned N_FFT    = 1024;
  localparam int unsigned CP_LEN   = 144;
  localparam int unsigned SYM_LEN  = N_FFT + CP_LEN;   // 1168 samples
  localparam int unsigned N_SYM    = 7;                 // symbols per frame
  localparam int unsigned K_USERS  = 4;                 // single-antenna users
  // ---- design choices ----
  localparam int unsigned N_SC     = 792;               // active subcarriers
  localparam int unsigned SAMPLE_W = 16;                // I and Q width everywhere

  localparam int unsigned SC_W     = $clog2(N_FFT);     // 10 bits subcarrier index
  localparam int unsigned SYM_W    = 3;
  localparam int unsigned FRAME_W  = 16;

  typedef logic [SC_W-1:0]    sc_idx_t;
  typedef logic [SYM_W-1:0]   sym_idx_t;
  typedef logic [FRAME_W-1:0] frame_idx_t;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  // Symbol positions inside a frame.
  typedef enum logic [SYM_W-1:0] {
    SYM_ULP    = 3'd0,
    SYM_ULD1   = 3'd1,
    SYM_ULD2   = 3'd2,
    SYM_GUARD1 = 3'd3,
    SYM_DLP    = 3'd4,
    SYM_DLD    = 3'd5,
    SYM_GUARD2 = 3'd6
  } sym_e;

  // Tag carried with every subcarrier value through the receiver.
  typedef struct packed {
    frame_idx_t frame;
    sym_idx_t   sym;
    sc_idx_t    sc;
  } tag_t;

  // One subcarrier's worth of partial sums: K complex values.
  // Pilot symbol: beat with sc = K*g + r carries column r of G for subcarrier group g.
  // Data symbols: beat sc carries z(sc).
  typedef struct packed {
    tag_t                tag;
    cplx_t [K_USERS-1:0] v;
  } beat_t;

  localparam int unsigned PAYLOAD_W = K_USERS * 2 * SAMPLE_W;  // 128-bit fronthaul word

  // Per-sample timing information from the frame timer, shared by all chains.
  typedef struct packed {
    logic       active;  // a frame start has been seen
    logic       keep;    // sample belongs to the FFT window (not cyclic prefix)
    logic       first;   // first kept sample of a symbol
    sym_idx_t   sym;
    frame_idx_t frame;
  } smp_tag_t;

  // Software registers of one panel (written from the processor system).
  typedef struct packed {
    logic [15:0] sync_delay;   // cycles from sync edge to frame start
    logic [4:0]  out_shift;    // right shift of the local sums
    logic        is_first;     // first panel of the chain: no upstream sums
    logic [7:0]  node_id;      // written into packet headers
    logic [7:0]  keep_every;   // central panel: pass 1 frame in keep_every
  } panel_cfg_t;

  // Status counters of one panel.
  typedef struct packed {
    logic [7:0]  missed_sync;  // sync pulses ignored while a delay was counting
    logic [15:0] misalign;     // chain outputs out of step
    logic [15:0] overflow;     // local beats lost, aggregation FIFO full
    logic [15:0] mismatch;     // local and upstream tags differed
    logic [15:0] max_fill;     // highest aggregation FIFO fill seen
    logic [15:0] seq_err;      // packetizer input out of sequence
    logic [15:0] bad_hdr;      // fronthaul packets dropped
    logic [15:0] len_err;      // fronthaul packets of the wrong length
    logic [15:0] passed;       // central: frames passed to the DMA
    logic [15:0] dropped;      // central: frames dropped by rate reduction
  } panel_status_t;

  // Pilot of subcarrier s: {re negative, im negative}; value is (+-1) + j(+-1).
  // Formula: h = (s * 40503) mod 2^16, re sign = h[15], im sign = h[12].
  function automatic logic [1:0] pilot_bits(sc_idx_t s);
    logic [31:0] h;
    h = 32'(s) * 32'd40503;
    return {h[15], h[12]};
  endfunction

  // Saturate a wide signed value to SAMPLE_W bits.
  function automatic logic signed [SAMPLE_W-1:0] sat16(logic signed [63:0] x);
    localparam logic signed [63:0] MAXV = 64'sd32767;
    localparam logic signed [63:0] MINV = -64'sd32768;
    if (x > MAXV) return 16'sh7fff;
    if (x < MINV) return 16'sh8000;
    return x[SAMPLE_W-1:0];
  endfunction

endpackage
