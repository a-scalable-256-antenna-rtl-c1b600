// lulis_testbed: the whole distributed MIMO uplink testbed, J panels in a daisy
// chain plus the user-equipment board.
//
// Panel j (0 .. J-1) receives M antenna streams and computes its local partial sums
// of the MRC vectors and the Gram matrix. It adds them to the running sums from
// panel j-1 and sends the result to panel j+1. Panel 0 is the first panel and
// starts the sums. Panel J-1 is the central panel: its sums are the totals
//     z = sum_j H_j^H y_j,   G = sum_j H_j^H H_j,
// and after rate reduction they leave on the DMA stream for the processor, where
// zero-forcing can be done in software.
// Timing sync: the UE board (ue_tx) drives its GPIO pulse into panel 0. Each panel
// forwards it to the next one and applies its own software-set delay. Between
// panels these are wires here; in the testbed they are cables.
// What sits outside, as ports:
//   * the RF data converters: adc_valid/adc_data of every panel, and the UE DAC
//     request dac_ready with its samples ue_dac_data;
//   * the 25G Ethernet links: panel j's fh_tx_* is sent by its MAC, and the
//     partner's fh_rx_* of panel j+1 comes from the MAC at the far end. fh_rx of
//     panel 0 and fh_tx of panel J-1 are not used;
//   * the DMA stream of the central panel;
//   * the software registers (cfg, UE memory write port) and status counters;
//   * the AFE TDD switch control of every panel.
// All of it runs on one fabric clock of 153.6 MHz. In the testbed the boards share
// a 10 MHz reference, so their clocks have the same frequency; this model treats
// them as one clock.
// The structure (daisy chain, local processing, central panel, UE board with four
// memories) follows the paper. How the ports are cut is this design's choice.
module lulis_testbed
  import lulis_pkg::*;
#(
  parameter int unsigned J          = 16,
  parameter int unsigned M          = 16,
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // user equipment board
  input  logic                 ue_wr_en,
  input  logic [12:0]          ue_wr_addr,
  input  cplx_t                ue_wr_data  [K_USERS],
  input  logic                 ue_run,
  input  logic                 ue_dac_ready,
  output logic                 ue_dac_valid,
  output cplx_t                ue_dac_data [K_USERS],
  output logic [15:0]          ue_frame_cnt,
  // panels
  input  panel_cfg_t           cfg    [J],
  output panel_status_t        status [J],
  input  logic [M-1:0]         adc_valid [J],
  input  cplx_t                adc_data  [J][M],
  output logic [J-1:0]         tdd_tx,
  // Ethernet MAC streams of every panel
  output logic [J-1:0]         fh_tx_tvalid,
  input  logic [J-1:0]         fh_tx_tready,
  output logic [J-1:0]         fh_tx_tlast,
  output logic [PAYLOAD_W-1:0] fh_tx_tdata [J],
  input  logic [J-1:0]         fh_rx_tvalid,
  output logic [J-1:0]         fh_rx_tready,
  input  logic [J-1:0]         fh_rx_tlast,
  input  logic [PAYLOAD_W-1:0] fh_rx_tdata [J],
  // central panel to DMA
  output logic                 dma_tvalid,
  input  logic                 dma_tready,
  output logic                 dma_tlast,
  output logic [PAYLOAD_W-1:0] dma_tdata
);
  logic ue_sync;
  logic [J:0] sync_chain;

  ue_tx u_ue (
    .clk, .rst_n,
    .wr_en    (ue_wr_en),
    .wr_addr  (ue_wr_addr),
    .wr_data  (ue_wr_data),
    .run      (ue_run),
    .dac_ready(ue_dac_ready),
    .dac_valid(ue_dac_valid),
    .dac_data (ue_dac_data),
    .sync_out (ue_sync),
    .frame_cnt(ue_frame_cnt)
  );

  assign sync_chain[0] = ue_sync;

  logic [J-1:0]         p_dma_tvalid, p_dma_tlast;
  logic [PAYLOAD_W-1:0] p_dma_tdata [J];

  for (genvar j = 0; j < J; j++) begin : g_panel
    panel_node #(.M(M), .CENTRAL(j == J - 1), .FIFO_DEPTH(FIFO_DEPTH)) u_panel (
      .clk, .rst_n,
      .cfg         (cfg[j]),
      .status      (status[j]),
      .adc_valid   (adc_valid[j]),
      .adc_data    (adc_data[j]),
      .sync_in     (sync_chain[j]),
      .sync_out    (sync_chain[j+1]),
      .tdd_tx      (tdd_tx[j]),
      .fh_rx_tvalid(fh_rx_tvalid[j]),
      .fh_rx_tready(fh_rx_tready[j]),
      .fh_rx_tlast (fh_rx_tlast[j]),
      .fh_rx_tdata (fh_rx_tdata[j]),
      .fh_tx_tvalid(fh_tx_tvalid[j]),
      .fh_tx_tready(fh_tx_tready[j]),
      .fh_tx_tlast (fh_tx_tlast[j]),
      .fh_tx_tdata (fh_tx_tdata[j]),
      .dma_tvalid  (p_dma_tvalid[j]),
      .dma_tready  (dma_tready),
      .dma_tlast   (p_dma_tlast[j]),
      .dma_tdata   (p_dma_tdata[j])
    );
  end

  assign dma_tvalid = p_dma_tvalid[J-1];
  assign dma_tlast  = p_dma_tlast[J-1];
  assign dma_tdata  = p_dma_tdata[J-1];
endmodule
