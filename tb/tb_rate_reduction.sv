// tb_rate_reduction: streams 9 complete frames (3 x 792 beats each) with
// keep_every = 4 and random m_tready stalls. Frames 0, 4 and 8 must reach the
// output whole, in order, with tlast only on each frame's last beat. The other
// frames must be dropped without stalling the input. The counters must read 3
// passed and 6 dropped.
module tb_rate_reduction;
  import lulis_pkg::*;
  localparam int NSC = 792, NF = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] keep_every = 8'd4;
  logic in_valid = 0, in_ready, m_tvalid, m_tready = 0, m_tlast;
  beat_t in_beat = '0;
  logic [127:0] m_tdata;
  logic [15:0] passed_frames, dropped_frames;
  int checks = 0, failures = 0, n_last = 0;

  rate_reduction dut (.*);

  beat_t expq [$];
  always @(negedge clk) m_tready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    automatic beat_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected"); end
    else begin
      e = expq.pop_front();
      if (m_tdata != e.v || m_tlast != (e.tag.sym == 3'd2 && e.tag.sc == 10'(NSC - 1))) begin
        failures++; if (failures < 10) $display("bad beat f %0d s %0d sc %0d", e.tag.frame, e.tag.sym, e.tag.sc);
      end
      if (m_tlast) n_last++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int sy = 0; sy < 3; sy++)
        for (int s = 0; s < NSC; s++) begin
          automatic beat_t b;
          b.tag = '{frame: 16'(f), sym: 3'(sy), sc: 10'(s)};
          for (int k = 0; k < K_USERS; k++) b.v[k] = '{re: 16'($urandom), im: 16'($urandom)};
          if (f % 4 == 0) expq.push_back(b);
          @(negedge clk); in_valid = 1; in_beat = b;
          @(posedge clk);
          while (!in_ready) begin
            if (f % 4 != 0) begin failures++; $display("dropped frame stalled"); end
            @(posedge clk);
          end
          #1 in_valid = 0;
        end
    repeat (20) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("left %0d", expq.size()); end
    checks++; if (passed_frames != 3 || dropped_frames != 6) begin failures++; $display("passed %0d dropped %0d", passed_frames, dropped_frames); end
    checks++; if (n_last != 3) begin failures++; $display("tlast %0d", n_last); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
