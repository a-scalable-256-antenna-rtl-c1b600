// tb_ue_tx: writes a distinct value into every address of the four memories
// (re = address, im = 1000 * user - address), starts playback with dac_ready at
// 2 per 5 clocks, and checks two and a half frames of output: each taken sample
// must be the next address in order, wrapping after 8176, with dac_valid high.
// sync_out must rise one clock after each sample 0 is taken and stay high for 16
// clocks, and frame_cnt must count the frames.
module tb_ue_tx;
  import lulis_pkg::*;
  localparam int K = 4, FL = 8176;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, run = 0, dac_ready = 0;
  logic [12:0] wr_addr = 0;
  cplx_t wr_data [K];
  logic dac_valid, sync_out;
  cplx_t dac_data [K];
  logic [15:0] frame_cnt;
  int checks = 0, failures = 0;

  ue_tx dut (.*);

  int addr = 0, n_taken = 0, n_sync_rise = 0;
  longint cyc = 0, last_zero = -100;
  logic sync_d = 0;
  always @(posedge clk) begin
    cyc++;
    sync_d <= rst_n && sync_out;
    if (rst_n && sync_out && !sync_d) begin
      n_sync_rise++;
      checks++;
      if (cyc != last_zero + 1) begin failures++; $display("sync rise at %0d, sample 0 at %0d", cyc, last_zero); end
    end
    if (rst_n && !sync_out && sync_d) begin
      checks++;
      if (cyc != last_zero + 17) begin failures++; $display("sync width %0d", cyc - last_zero - 1); end
    end
    if (run && dac_ready) begin
      checks++;
      for (int k = 0; k < K; k++)
        if (dac_data[k].re != 16'(addr) || dac_data[k].im != 16'(1000 * k - addr) || !dac_valid) begin
          failures++; if (failures < 10) $display("addr %0d user %0d got %0d", addr, k, dac_data[k].re);
        end
      if (addr == 0) last_zero = cyc;
      addr = (addr + 1) % FL;
      n_taken++;
    end
  end

  initial begin
    for (int k = 0; k < K; k++) wr_data[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < FL; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 13'(a);
      for (int k = 0; k < K; k++) wr_data[k] = '{re: 16'(a), im: 16'(1000 * k - a)};
    end
    @(negedge clk) wr_en = 0; run = 1;
    for (int i = 0; i < FL * 5 / 2 * 5 / 2; i++) begin
      @(negedge clk); dac_ready = (i % 5 == 0 || i % 5 == 2);
    end
    @(negedge clk) dac_ready = 0;
    repeat (30) @(posedge clk);
    checks++; if (n_sync_rise != 3) begin failures++; $display("sync pulses %0d", n_sync_rise); end
    checks++; if (frame_cnt != 16'd3) begin failures++; $display("frame_cnt %0d", frame_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
