// ue_tx: pilot and data playback of the user-equipment board.
//
// The users are emulated by a separate RFSoC board with four transmit chains, one
// per single-antenna user. Software fills four sample memories, one per user, with
// a complete time-domain frame: 7 symbols x (144 CP + 1024) = 8176 samples holding
// the known pilots and synthetic data symbols. The memories are written through
// wr_en / wr_addr / wr_data; one write sets the same address in all four. While run
// is high the memories are played out cyclically. A sample is taken each time the
// DAC side asserts dac_ready (61.44 MS/s). Each time sample 0 of the frame is
// taken, sync_out goes high for SYNC_W clocks. This is the GPIO timing pulse that
// the base-station panels receive.
// The paper says that four memories send known pilots and synthetic OFDM data and
// that the UE sends the timing signal on a GPIO. The memory layout, the write port
// and the pulse width are this design's choices. The content of the memories
// (pilot placement, modulation) is set by software; the matching receiver rule is
// in lulis_pkg.
// Timing: dac_data shows the sample at the current address; it advances after each
// dac_ready. sync_out rises one clock after sample 0 is taken.
module ue_tx
  import lulis_pkg::*;
#(
  parameter int unsigned K         = K_USERS,
  parameter int unsigned FRAME_LEN = N_SYM * (N_FFT + CP_LEN),
  parameter int unsigned SYNC_W    = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(FRAME_LEN)-1:0] wr_addr,
  input  cplx_t                        wr_data [K],
  input  logic                         run,
  input  logic                         dac_ready,
  output logic                         dac_valid,
  output cplx_t                        dac_data [K],
  output logic                         sync_out,
  output logic [15:0]                  frame_cnt
);
  localparam int unsigned AW = $clog2(FRAME_LEN);

  cplx_t         mem [K][FRAME_LEN];
  logic [AW-1:0] rd_addr;
  logic [$clog2(SYNC_W+1)-1:0] sync_cnt;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < int'(K); k++) mem[k][wr_addr] <= wr_data[k];
  end

  always_comb begin
    for (int k = 0; k < int'(K); k++) dac_data[k] = run ? mem[k][rd_addr] : '0;
  end
  assign dac_valid = run;
  assign sync_out  = (sync_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr   <= '0;
      sync_cnt  <= '0;
      frame_cnt <= '0;
    end else begin
      if (sync_cnt != '0) sync_cnt <= sync_cnt - 1'b1;
      if (!run) begin
        rd_addr <= '0;
      end else if (dac_ready) begin
        if (rd_addr == '0) begin
          sync_cnt  <= ($clog2(SYNC_W+1))'(SYNC_W);
          frame_cnt <= frame_cnt + 1'b1;
        end
        rd_addr <= (rd_addr == AW'(FRAME_LEN - 1)) ? '0 : rd_addr + 1'b1;
      end
    end
  end
endmodule
