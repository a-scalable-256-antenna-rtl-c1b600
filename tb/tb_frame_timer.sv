// tb_frame_timer: drives samples at 2 per 5 clocks (gaps of 1 and 2 clocks) and
// frame-start pulses. A reference counter in the testbench gives each sample's
// symbol (0..6, 1168 samples each), position and frame number. Checked for every
// sample: no tag before the first pulse; keep = 0 on the 144 CP samples; first = 1
// on sample 144; the right symbol and frame number; tdd_tx = 1 exactly in symbols 4
// and 5. Pulses: one between samples (first start), one in the middle of a frame
// between samples, one in the same clock as a sample, and one exactly on a frame
// boundary, which must not skip a frame number.
module tb_frame_timer;
  import lulis_pkg::*;
  localparam int SL = 1168, CP = 144, FL = 7 * SL;
  localparam int P0 = 1000, P1 = P0 + FL + 3000, P2 = P1 + 2 * FL, P3 = P2 + FL + 777, NTOT = P3 + FL + 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start = 0, smp_valid = 0;
  smp_tag_t t;
  logic tdd_tx;
  int checks = 0, failures = 0;
  int n_tdd = 0, n_frames_seen = 0;

  frame_timer dut (.*);

  int rs = 0, rp = 0, rf = 0;
  bit ract = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NTOT; n++) begin
      automatic int gaps = (n % 2 == 0) ? 2 : 1;
      automatic bit between = (n == P0 || n == P1);
      automatic bit with_smp = (n == P2 || n == P3);
      automatic bit restart = between || with_smp;
      for (int g = 0; g < gaps; g++) begin
        @(negedge clk); smp_valid = 0; frame_start = between && (g == 0);
      end
      @(negedge clk); smp_valid = 1; frame_start = with_smp;
      if (restart) begin
        if (ract && !(rs == 0 && rp == 0)) rf++;
        rs = 0; rp = 0; ract = 1;
      end
      #1;
      checks++;
      if (t.active != ract || (ract && (t.sym != 3'(rs) || t.frame != 16'(rf) ||
          t.keep != (rp >= CP) || t.first != (rp == CP)))) begin
        failures++;
        if (failures < 10) $display("smp %0d: act %0d sym %0d frame %0d keep %0d | exp %0d %0d %0d pos %0d",
                                    n, t.active, t.sym, t.frame, t.keep, ract, rs, rf, rp);
      end
      if (!restart) begin
        checks++;
        if (tdd_tx != (ract && (rs == 4 || rs == 5))) begin failures++; if (failures < 10) $display("tdd smp %0d", n); end
      end
      if (ract) begin
        rp++;
        if (rp == SL) begin rp = 0; rs++; if (rs == 7) begin rs = 0; rf++; end end
      end
    end
    @(negedge clk) smp_valid = 0; frame_start = 0;
    checks++;
    // frames: 0 from P0, 1, restart to 2 at P1, 3, 4 at P2 (natural boundary, no skip),
    // 5, restart to 6 at P3, 7 just before the end
    if (rf != 7) begin failures++; $display("final frame %0d", rf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NTOT * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
