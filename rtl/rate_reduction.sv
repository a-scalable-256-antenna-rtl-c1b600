// rate_reduction: frame dropper in front of the DMA of the central panel.
//
// The DMA to the processor system cannot take every frame's MRC vectors and Gram
// matrices, so only one frame in keep_every is passed and the others are dropped
// whole. A frame starts with the beat (symbol = UL pilot, subcarrier 0) and ends
// with (symbol = second UL data, subcarrier NSC-1). That last beat carries tlast,
// so each DMA transfer holds one frame: 792 Gram beats, then 2 x 792 MRC beats.
// The first frame after reset is passed. keep_every = 0 or 1 passes every frame.
// The paper says that a rate-reduction block drops frames to match the DMA. The
// selection rule, the framing with tlast and the counters are this design's
// choices.
// Handshake: AXI4-Stream. Dropped beats are accepted at once. Kept beats wait for
// m_tready.
// Timing: combinational from input to output.
module rate_reduction
  import lulis_pkg::*;
#(
  parameter int unsigned NSC = N_SC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [7:0]           keep_every,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  beat_t                in_beat,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic                 m_tlast,
  output logic [PAYLOAD_W-1:0] m_tdata,
  output logic [15:0]          passed_frames,
  output logic [15:0]          dropped_frames
);
  logic [7:0] ctr;
  logic       keep_cur, sof, eof, keep_now;

  assign sof      = (in_beat.tag.sym == SYM_ULP)  && (in_beat.tag.sc == '0);
  assign eof      = (in_beat.tag.sym == SYM_ULD2) && (in_beat.tag.sc == sc_idx_t'(NSC - 1));
  assign keep_now = sof ? (ctr == '0) : keep_cur;

  assign m_tvalid = in_valid && keep_now;
  assign m_tlast  = eof;
  assign m_tdata  = in_beat.v;
  assign in_ready = keep_now ? m_tready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr            <= '0;
      keep_cur       <= 1'b0;
      passed_frames  <= '0;
      dropped_frames <= '0;
    end else if (in_valid && in_ready) begin
      if (sof) begin
        keep_cur <= keep_now;
        ctr      <= (32'(ctr) + 1 >= 32'(keep_every)) ? '0 : ctr + 1'b1;
        if (keep_now) passed_frames  <= passed_frames + 1'b1;
        else          dropped_frames <= dropped_frames + 1'b1;
      end
    end
  end
endmodule
