// sync_delay: timing-sync receiver of one panel.
//
// The user side sends a timing pulse on a GPIO. Panels pass it along the same daisy
// chain as the data, so each panel sees it later than the one before, by its cable
// delay. This block takes the pulse into the clock domain with a two-flop
// synchronizer and finds its rising edge. It then does two things:
//   * it passes the synchronized level on to the next panel (sync_fwd), and
//   * it issues a one-cycle frame_start pulse delay_cfg cycles after the edge.
// Software sets delay_cfg so that all panels start their frames at the same instant.
// The paper states the purpose (a software-set delay that compensates the measured
// cable delay). The synchronizer, the counter and the rule below are this design's
// own choices.
// Rule: one delay runs at a time. An edge that arrives while a delay is still
// counting is dropped, and the drop is counted in missed_cnt. Pulses come once per
// frame, far apart.
// Timing: frame_start rises 3 + delay_cfg cycles after the rising edge of sync_in
// (2 synchronizer flops and 1 edge register).
module sync_delay #(
  parameter int unsigned DELAY_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sync_in,     // asynchronous GPIO
  input  logic [DELAY_W-1:0] delay_cfg,   // software register
  output logic               sync_fwd,    // to the next panel's GPIO
  output logic               frame_start,
  output logic [7:0]         missed_cnt
);
  logic [2:0]         sync_sr;   // [0],[1] synchronizer, [2] edge history
  logic [DELAY_W-1:0] cnt;
  logic               busy;
  logic               edge_det;

  assign edge_det = sync_sr[1] & ~sync_sr[2];
  assign sync_fwd = sync_sr[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_sr     <= '0;
      cnt         <= '0;
      busy        <= 1'b0;
      frame_start <= 1'b0;
      missed_cnt  <= '0;
    end else begin
      sync_sr     <= {sync_sr[1:0], sync_in};
      frame_start <= 1'b0;
      if (busy) begin
        if (edge_det && missed_cnt != 8'hff) missed_cnt <= missed_cnt + 8'd1;
        if (cnt == '0) begin
          busy        <= 1'b0;
          frame_start <= 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end else if (edge_det) begin
        if (delay_cfg == '0) begin
          frame_start <= 1'b1;
        end else begin
          busy <= 1'b1;
          cnt  <= delay_cfg - 1'b1;
        end
      end
    end
  end
endmodule
