// tb_sync_delay: applies sync pulses of random width at random times (not aligned
// to the clock edge) for several delay settings, 0 included. frame_start must be a
// single-cycle pulse exactly 3 + delay_cfg clocks after the first clock edge that
// sees the pulse high. sync_fwd must follow sync_in two clocks late. A second pulse
// sent while a long delay is still counting must be dropped and counted in
// missed_cnt.
module tb_sync_delay;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sync_in = 0;
  logic [15:0] delay_cfg = 0;
  logic sync_fwd, frame_start;
  logic [7:0] missed_cnt;
  int checks = 0, failures = 0;
  longint cyc = 0, edge_cyc = -1, start_cyc = -1;
  int n_start = 0;

  sync_delay dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (frame_start) begin n_start++; start_cyc = cyc; end
  end

  // sync_fwd follows sync_in after two clocks
  logic [1:0] hist = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (sync_fwd != hist[1]) failures++;
    hist <= {hist[0], sync_in};
  end

  task automatic pulse(int width);
    @(posedge clk); #3 sync_in = 1;
    edge_cyc = cyc + 1;   // first edge that samples it high
    repeat (width) @(posedge clk);
    #3 sync_in = 0;
  endtask

  initial begin
    int dl [4] = '{0, 1, 17, 300};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      automatic int n0;
      delay_cfg = 16'(dl[i]);
      n0 = n_start;
      pulse($urandom_range(1, 40));
      repeat (dl[i] + 60) @(posedge clk);
      checks++;
      if (n_start != n0 + 1) begin failures++; $display("delay %0d: %0d pulses", dl[i], n_start - n0); end
      checks++;
      if (start_cyc - edge_cyc != 3 + dl[i]) begin failures++; $display("delay %0d: got %0d", dl[i], start_cyc - edge_cyc); end
    end
    // second pulse while counting
    delay_cfg = 16'd500;
    pulse(5);
    repeat (100) @(posedge clk);
    pulse(5);
    repeat (600) @(posedge clk);
    checks++; if (missed_cnt != 1) begin failures++; $display("missed %0d", missed_cnt); end
    checks++; if (n_start != 5) begin failures++; $display("starts %0d", n_start); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
