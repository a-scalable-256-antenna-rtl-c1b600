// matrix_aggregate: partial-sum aggregation of one panel ("matrix aggregation"; in
// the last panel it is the central MIMO processing).
//
// The MRC vector and the Gram matrix split into per-panel terms:
//     z = sum_j H_j^H y_j,   G = sum_j H_j^H H_j.
// Each panel adds its own terms to the running sums it receives from the panel
// before it and passes the result on. So the fronthaul load between any two panels
// is the same, whatever their place in the chain. All panels start their frames
// together, so a panel's local beats are ready before the matching upstream beats.
// Those have to cross (j-1) fronthaul hops. Local beats therefore wait in a FIFO of
// DEPTH beats. Each upstream beat is added element-wise, with saturation, to the
// FIFO head. The tags must be equal; a mismatch is counted and the sum is still
// produced. With cfg_first = 1 (the first panel of the chain) there is no upstream:
// local beats go straight out and upstream input is taken and dropped.
// Handshakes: local input is valid-only (the receive chains cannot stall). If the
// FIFO is full, a beat is dropped and overflow_cnt counts it. Upstream and output
// follow AXI4-Stream valid/ready rules. The output is registered and holds while
// out_ready is low; a stall backs up into the upstream and then into the FIFO.
// The paper gives the sums and their place in the chain. The FIFO, the alignment by
// arrival order, the saturating 16-bit sums and the error counters are this
// design's choices. For MRC the paper does no other central processing, and
// neither does this design.
// Timing: a sum is on the output one clock after both operands are present.
module matrix_aggregate
  import lulis_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_first,
  // local partial sums
  input  logic        loc_valid,
  input  beat_t       loc_beat,
  // running sums from the previous panel
  input  logic        up_valid,
  output logic        up_ready,
  input  beat_t       up_beat,
  // running sums towards the next panel (or central output)
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_beat,
  // status
  output logic [15:0] overflow_cnt,
  output logic [15:0] mismatch_cnt,
  output logic [$clog2(DEPTH):0] max_fill
);
  localparam int unsigned AW = $clog2(DEPTH);

  beat_t         mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr, fill;
  logic          empty, full, pop, fire;
  beat_t         head;

  assign fill  = wr_ptr - rd_ptr;
  assign empty = (fill == '0);
  assign full  = (fill == (AW+1)'(DEPTH));
  assign head  = mem[rd_ptr[AW-1:0]];

  assign fire     = !empty && (cfg_first || up_valid) && (!out_valid || out_ready);
  assign pop      = fire;
  assign up_ready = cfg_first ? 1'b1 : (!empty && (!out_valid || out_ready));

  function automatic cplx_t cadd(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = sat16(64'(a.re) + 64'(b.re));
    r.im = sat16(64'(a.im) + 64'(b.im));
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (loc_valid && !full) mem[wr_ptr[AW-1:0]] <= loc_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      out_valid    <= 1'b0;
      out_beat     <= '0;
      overflow_cnt <= '0;
      mismatch_cnt <= '0;
      max_fill     <= '0;
    end else begin
      if (loc_valid) begin
        if (!full) wr_ptr <= wr_ptr + 1'b1;
        else if (overflow_cnt != 16'hffff) overflow_cnt <= overflow_cnt + 1'b1;
      end
      if (fill > max_fill) max_fill <= fill;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (pop) begin
        rd_ptr    <= rd_ptr + 1'b1;
        out_valid <= 1'b1;
        out_beat  <= head;
        if (!cfg_first) begin
          for (int k = 0; k < int'(K_USERS); k++) out_beat.v[k] <= cadd(head.v[k], up_beat.v[k]);
          if (head.tag != up_beat.tag && mismatch_cnt != 16'hffff) mismatch_cnt <= mismatch_cnt + 1'b1;
        end
      end
    end
  end

  // AXI4-Stream rule for the upstream producer: once valid, hold until taken.
  a_up_hold: assert property (@(posedge clk) disable iff (!rst_n || cfg_first)
    up_valid && !up_ready |=> up_valid && $stable(up_beat))
    else $error("matrix_aggregate: upstream beat changed while stalled");
endmodule
