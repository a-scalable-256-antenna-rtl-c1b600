// tb_matrix_aggregate: checks the partial-sum adder with a 64-deep FIFO.
//  A: 150 local beats arrive ahead of the upstream ones (random lead), upstream
//     comes with random gaps, the output is stalled at random. Every output must be
//     the saturating sum of the matching pair, in order. One upstream beat carries
//     a wrong tag and must raise mismatch_cnt to 1.
//  B: 70 local beats with no upstream: 6 must be dropped (overflow_cnt = 6); the
//     64 kept ones are then summed with upstream beats.
//  C: cfg_first = 1: local beats come out unchanged, without upstream.
module tb_matrix_aggregate;
  import lulis_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_first = 0, loc_valid = 0, up_valid = 0, out_ready = 0;
  beat_t loc_beat = '0, up_beat = '0;
  logic up_ready, out_valid;
  beat_t out_beat;
  logic [15:0] overflow_cnt, mismatch_cnt;
  logic [6:0] max_fill;
  int checks = 0, failures = 0;

  matrix_aggregate #(.DEPTH(D)) dut (.*);

  beat_t locq [$], upq [$], expq [$];

  function automatic beat_t rnd_beat(int i);
    beat_t b;
    b.tag = '{frame: 16'(i / 100), sym: 3'(i % 3), sc: 10'(i)};
    for (int k = 0; k < K_USERS; k++) begin
      b.v[k].re = 16'($urandom_range(0, 65535));
      b.v[k].im = 16'($urandom_range(0, 65535));
    end
    return b;
  endfunction

  function automatic beat_t sum(beat_t a, beat_t b);
    beat_t r = a;
    for (int k = 0; k < K_USERS; k++) begin
      r.v[k].re = sat16(64'(a.v[k].re) + 64'(b.v[k].re));
      r.v[k].im = sat16(64'(a.v[k].im) + 64'(b.v[k].im));
    end
    return r;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      automatic beat_t e = expq.pop_front();
      if (out_beat != e) begin failures++; if (failures < 10) $display("mismatch sc %0d", out_beat.tag.sc); end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  // upstream driver: sends upq entries when allowed
  int up_lag = 0;
  always @(posedge clk) if (rst_n) begin
    if (up_valid && up_ready) up_valid <= 0;
  end
  task automatic send_up();
    while (upq.size() > 0) begin
      @(negedge clk);
      if (!up_valid || up_ready) begin
        if ($urandom_range(0, 2) != 0) begin up_valid = 1; up_beat = upq.pop_front(); end
      end
      @(posedge clk);
      while (up_valid && !up_ready) @(posedge clk);
      #1 up_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- A ----
    fork
      begin
        for (int i = 0; i < 150; i++) begin
          automatic beat_t l = rnd_beat(i), u = rnd_beat(i);
          @(negedge clk); loc_valid = 1; loc_beat = l;
          if (i == 77) u.tag.sc = 10'd999;
          upq.push_back(u);
          expq.push_back(sum(l, u));
          @(negedge clk); loc_valid = 0;
        end
      end
      begin
        repeat (30) @(posedge clk);
        send_up();
        repeat (200) @(posedge clk);
        send_up();
      end
    join
    repeat (100) @(posedge clk);
    checks++; if (mismatch_cnt != 1) begin failures++; $display("mismatch_cnt %0d", mismatch_cnt); end
    checks++; if (expq.size() != 0) begin failures++; $display("A left %0d", expq.size()); end
    // ---- B ----
    for (int i = 0; i < 70; i++) begin
      automatic beat_t l = rnd_beat(1000 + i), u = rnd_beat(1000 + i);
      @(negedge clk); loc_valid = 1; loc_beat = l;
      if (i < D) begin upq.push_back(u); expq.push_back(sum(l, u)); end
    end
    @(negedge clk) loc_valid = 0;
    checks++; if (overflow_cnt != 6) begin failures++; $display("overflow_cnt %0d", overflow_cnt); end
    checks++; if (max_fill != 7'(D)) begin failures++; $display("max_fill %0d", max_fill); end
    send_up();
    repeat (100) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("B left %0d", expq.size()); end
    // ---- C ----
    cfg_first = 1;
    for (int i = 0; i < 20; i++) begin
      automatic beat_t l = rnd_beat(2000 + i);
      @(negedge clk); loc_valid = 1; loc_beat = l; expq.push_back(l);
      @(negedge clk); loc_valid = 0;
    end
    repeat (100) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("C left %0d", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
