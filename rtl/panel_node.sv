// panel_node: the programmable-logic design of one panel (one RFSoC board).
//
// Data path, as drawn for each panel of the testbed:
//   RF ADC streams (M = 16) -> 16 x timing_sync_ofdm -> local_ce_mrc
//     -> matrix_aggregate (+ sums from the previous panel, via fh_depacketizer)
//     -> fh_packetizer -> 25G Ethernet MAC towards the next panel
// In the central (last) panel, CENTRAL = 1, the aggregated sums go to
// rate_reduction and on to the DMA stream instead of the packetizer.
// Timing path: the GPIO sync input goes through sync_delay, which forwards it to the
// next panel and gives the frame start to frame_timer. The timer tags the samples
// of all 16 chains and drives the AFE TDD switch.
// The RF data converter, the Ethernet MAC/PHY and the DMA are vendor IP. Their
// AXI4-Stream sides are this module's ports. The software registers are collected
// in cfg; a bus interface for them (AXI4-Lite from the processor) is not part of
// this module. All nodes of the chain share one bitstream except that the central
// one has CENTRAL = 1. The first node differs only in cfg.is_first.
// The block structure and the order of the blocks follow the paper. Everything
// inside the blocks is described in their own files.
// Timing: all logic runs on the 153.6 MHz fabric clock. ADC samples come at
// 61.44 MS/s, one every 2.5 clocks. adc_valid[0] paces the frame timer; the other
// chains are expected to be in step with it.
module panel_node
  import lulis_pkg::*;
#(
  parameter int unsigned M          = 16,
  parameter bit          CENTRAL    = 1'b0,
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  panel_cfg_t           cfg,
  output panel_status_t        status,
  // RF data converter
  input  logic [M-1:0]         adc_valid,
  input  cplx_t                adc_data [M],
  // GPIOs
  input  logic                 sync_in,
  output logic                 sync_out,
  output logic                 tdd_tx,
  // fronthaul from the previous panel (Ethernet MAC receive side)
  input  logic                 fh_rx_tvalid,
  output logic                 fh_rx_tready,
  input  logic                 fh_rx_tlast,
  input  logic [PAYLOAD_W-1:0] fh_rx_tdata,
  // fronthaul to the next panel (Ethernet MAC transmit side)
  output logic                 fh_tx_tvalid,
  input  logic                 fh_tx_tready,
  output logic                 fh_tx_tlast,
  output logic [PAYLOAD_W-1:0] fh_tx_tdata,
  // central panel: stream to the DMA
  output logic                 dma_tvalid,
  input  logic                 dma_tready,
  output logic                 dma_tlast,
  output logic [PAYLOAD_W-1:0] dma_tdata
);
  // ---------------- timing ----------------
  logic     frame_start;
  smp_tag_t t;
  logic [7:0] missed_sync;

  sync_delay #(.DELAY_W(16)) u_sync (
    .clk, .rst_n,
    .sync_in    (sync_in),
    .delay_cfg  (cfg.sync_delay),
    .sync_fwd   (sync_out),
    .frame_start(frame_start),
    .missed_cnt (missed_sync)
  );

  frame_timer u_timer (
    .clk, .rst_n,
    .frame_start(frame_start),
    .smp_valid  (adc_valid[0]),
    .t          (t),
    .tdd_tx     (tdd_tx)
  );

  // ---------------- 16 receive chains ----------------
  logic [M-1:0] c_valid;
  cplx_t        c_data [M];
  tag_t         c_tag  [M];

  for (genvar m = 0; m < M; m++) begin : g_chain
    logic c_last;
    timing_sync_ofdm u_chain (
      .clk, .rst_n,
      .smp_valid(adc_valid[m]),
      .smp      (adc_data[m]),
      .t        (t),
      .out_valid(c_valid[m]),
      .out_last (c_last),
      .out_data (c_data[m]),
      .out_tag  (c_tag[m])
    );
  end

  // ---------------- local CE / Gram / MRC ----------------
  logic        l_valid;
  beat_t       l_beat;
  logic [15:0] misalign;

  local_ce_mrc #(.M(M)) u_ce (
    .clk, .rst_n,
    .in_valid    (c_valid),
    .in_y        (c_data),
    .in_tag      (c_tag),
    .out_shift   (cfg.out_shift),
    .out_valid   (l_valid),
    .out_beat    (l_beat),
    .misalign_cnt(misalign)
  );

  // ---------------- upstream sums ----------------
  logic  u_valid, u_ready;
  beat_t u_beat;
  logic [15:0] bad_hdr, len_err;

  fh_depacketizer u_depkt (
    .clk, .rst_n,
    .rx_tvalid  (fh_rx_tvalid),
    .rx_tready  (fh_rx_tready),
    .rx_tlast   (fh_rx_tlast),
    .rx_tdata   (fh_rx_tdata),
    .out_valid  (u_valid),
    .out_ready  (u_ready),
    .out_beat   (u_beat),
    .bad_hdr_cnt(bad_hdr),
    .len_err_cnt(len_err)
  );

  // ---------------- aggregation ----------------
  logic  a_valid, a_ready;
  beat_t a_beat;
  logic [15:0] overflow, mismatch;
  logic [$clog2(FIFO_DEPTH):0] max_fill;

  matrix_aggregate #(.DEPTH(FIFO_DEPTH)) u_agg (
    .clk, .rst_n,
    .cfg_first   (cfg.is_first),
    .loc_valid   (l_valid),
    .loc_beat    (l_beat),
    .up_valid    (u_valid),
    .up_ready    (u_ready),
    .up_beat     (u_beat),
    .out_valid   (a_valid),
    .out_ready   (a_ready),
    .out_beat    (a_beat),
    .overflow_cnt(overflow),
    .mismatch_cnt(mismatch),
    .max_fill    (max_fill)
  );

  // ---------------- output: next panel or DMA ----------------
  logic [15:0] seq_err, passed, dropped;

  if (CENTRAL) begin : g_central
    rate_reduction u_rr (
      .clk, .rst_n,
      .keep_every    (cfg.keep_every),
      .in_valid      (a_valid),
      .in_ready      (a_ready),
      .in_beat       (a_beat),
      .m_tvalid      (dma_tvalid),
      .m_tready      (dma_tready),
      .m_tlast       (dma_tlast),
      .m_tdata       (dma_tdata),
      .passed_frames (passed),
      .dropped_frames(dropped)
    );
    assign fh_tx_tvalid = 1'b0;
    assign fh_tx_tlast  = 1'b0;
    assign fh_tx_tdata  = '0;
    assign seq_err      = '0;
  end else begin : g_chain_out
    fh_packetizer u_pkt (
      .clk, .rst_n,
      .node_id    (cfg.node_id),
      .in_valid   (a_valid),
      .in_ready   (a_ready),
      .in_beat    (a_beat),
      .tx_tvalid  (fh_tx_tvalid),
      .tx_tready  (fh_tx_tready),
      .tx_tlast   (fh_tx_tlast),
      .tx_tdata   (fh_tx_tdata),
      .seq_err_cnt(seq_err)
    );
    assign dma_tvalid = 1'b0;
    assign dma_tlast  = 1'b0;
    assign dma_tdata  = '0;
    assign passed     = '0;
    assign dropped    = '0;
  end

  always_comb begin
    status.missed_sync = missed_sync;
    status.misalign    = misalign;
    status.overflow    = overflow;
    status.mismatch    = mismatch;
    status.max_fill    = 16'(max_fill);
    status.seq_err     = seq_err;
    status.bad_hdr     = bad_hdr;
    status.len_err     = len_err;
    status.passed      = passed;
    status.dropped     = dropped;
  end
endmodule
