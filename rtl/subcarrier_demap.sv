// subcarrier_demap: FFT output reordering and guard-band removal (part of
// "Timing Sync & OFDM").
//
// The FFT delivers a block's bins in bit-reversed order. This block writes them into
// one half of a 2*N-entry buffer at address bitreverse(position). When the half is
// full it swaps halves and reads the full half out, one subcarrier per clock, while
// the next block fills the other half. Only the NSC active subcarriers are read.
// They come out in frequency order, lowest first:
//     s = 0 .. NSC/2-1    -> FFT bin N - NSC/2 + s   (negative frequencies)
//     s = NSC/2 .. NSC-1  -> FFT bin s - NSC/2 + 1   (positive frequencies)
// DC (bin 0) and the bins at the band edges are dropped as guard band. The paper
// says guard-band subcarriers are removed. The count (792), the centred layout with
// an empty DC bin and the buffer scheme are this design's own choices.
// The block's tag (frame, symbol) is taken with the first bin and returned with
// every subcarrier, together with the subcarrier index s.
// Timing: counting the clock edge that takes in the block's last bin as edge 0, the
// first subcarrier is on the output after edge 2.
// A burst lasts NSC clocks; it must end before the next block is complete, which
// holds when bins arrive at most one per clock.
module subcarrier_demap
  import lulis_pkg::*;
#(
  parameter int unsigned N   = N_FFT,
  parameter int unsigned NSC = N_SC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic [$clog2(N)-1:0] in_pos,
  input  cplx_t                in_data,
  input  tag_t                 in_tag,     // sc field ignored; read with in_first
  output logic                 out_valid,
  output logic                 out_last,
  output cplx_t                out_data,
  output tag_t                 out_tag
);
  localparam int unsigned L = $clog2(N);

  cplx_t           mem [2*N];
  logic            wr_bank, rd_bank, rd_active;
  logic [L-1:0]    rd_cnt;
  tag_t            tag_w, tag_r;

  function automatic logic [L-1:0] bitrev(logic [L-1:0] p);
    logic [L-1:0] r;
    for (int i = 0; i < int'(L); i++) r[i] = p[L-1-i];
    return r;
  endfunction

  function automatic logic [L-1:0] bin_of(logic [L-1:0] s);
    if (s < L'(NSC / 2)) return L'(N - NSC / 2) + s;
    return s - L'(NSC / 2) + L'(1);
  endfunction

  // Write side.
  always_ff @(posedge clk) begin
    if (in_valid) mem[{wr_bank, bitrev(in_pos)}] <= in_data;
  end

  logic block_done;
  assign block_done = in_valid && (in_pos == L'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      rd_active <= 1'b0;
      rd_cnt    <= '0;
      tag_w     <= '0;
      tag_r     <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      if (in_valid && in_first) tag_w <= in_tag;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (rd_active) begin
        out_valid      <= 1'b1;
        out_last       <= (rd_cnt == L'(NSC - 1));
        out_data       <= mem[{rd_bank, bin_of(rd_cnt)}];
        out_tag        <= tag_r;
        out_tag.sc     <= sc_idx_t'(rd_cnt);
        if (rd_cnt == L'(NSC - 1)) rd_active <= 1'b0;
        rd_cnt <= rd_cnt + 1'b1;
      end
      if (block_done) begin
        wr_bank   <= ~wr_bank;
        rd_bank   <= wr_bank;
        rd_active <= 1'b1;
        rd_cnt    <= '0;
        tag_r     <= (in_first) ? in_tag : tag_w;
      end
    end
  end

  // A new block may only complete once the previous read burst is over.
  always_ff @(posedge clk) begin
    if (rst_n && block_done) begin
      assert (!rd_active || rd_cnt == L'(NSC - 1))
        else $error("subcarrier_demap: block completed during read burst");
    end
  end
endmodule
