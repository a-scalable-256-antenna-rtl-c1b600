// fh_packetizer: packs a panel's running partial sums into fronthaul packets for the
// 25G Ethernet MAC.
//
// Input is a stream of beats (lulis_pkg::beat_t): one subcarrier's K = 4 complex
// values plus its tag. A symbol's subcarriers arrive in order. The packetizer cuts
// each symbol into packets of up to PKT_BEATS consecutive subcarriers. Each packet
// is one header word followed by the payload words, on a 128-bit AXI4-Stream with
// tlast on the last payload word.
//   header  [127:112] magic 16'h4C55
//           [111:96]  frame number
//           [95:88]   symbol index
//           [87:72]   first subcarrier
//           [71:64]   number of payload words
//           [63:56]   sending panel (node_id)
//           [55:0]    zero
//   payload [32*k +: 32] = {re, im} of user k, as packed in beat_t.v
// The paper says only that the partial sums of all subcarriers are packaged and sent
// over 25G Ethernet in a daisy chain. The header, the packet size (66 subcarriers,
// 1056 payload bytes, so 12 packets per symbol) and the stream width are this
// design's choices. The MAC itself is vendor IP and sits outside.
// Handshake: AXI4-Stream on both sides. The header is sent from the first beat of a
// packet, which is held (in_ready = 0) until the header has gone.
// Timing: combinational from input to output, apart from the state register.
module fh_packetizer
  import lulis_pkg::*;
#(
  parameter int unsigned PKT_BEATS = 66,
  parameter int unsigned NSC       = N_SC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [7:0]           node_id,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  beat_t                in_beat,
  output logic                 tx_tvalid,
  input  logic                 tx_tready,
  output logic                 tx_tlast,
  output logic [PAYLOAD_W-1:0] tx_tdata,
  output logic [15:0]          seq_err_cnt
);
  localparam logic [15:0] MAGIC = 16'h4C55;

  typedef enum logic {S_HDR, S_PAY} state_e;
  state_e     state;
  logic [7:0] cnt, len;
  tag_t       ptag;      // tag of the packet's first beat

  logic [7:0] len_now;
  always_comb begin
    int rem;
    rem = int'(NSC) - int'(in_beat.tag.sc);
    if (rem < 1) rem = 1;
    len_now = (rem < int'(PKT_BEATS)) ? 8'(rem) : 8'(PKT_BEATS);
  end

  always_comb begin
    tx_tvalid = in_valid;
    tx_tlast  = 1'b0;
    tx_tdata  = '0;
    in_ready  = 1'b0;
    if (state == S_HDR) begin
      tx_tdata = {MAGIC, in_beat.tag.frame, 8'(in_beat.tag.sym), 16'(in_beat.tag.sc),
                  len_now, node_id, 56'd0};
    end else begin
      tx_tdata = in_beat.v;
      tx_tlast = (cnt == len - 1'b1);
      in_ready = tx_tready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_HDR;
      cnt         <= '0;
      len         <= '0;
      ptag        <= '0;
      seq_err_cnt <= '0;
    end else begin
      if (state == S_HDR) begin
        if (in_valid && tx_tready) begin
          state <= S_PAY;
          cnt   <= '0;
          len   <= len_now;
          ptag  <= in_beat.tag;
        end
      end else if (in_valid && tx_tready) begin
        if (in_beat.tag.frame != ptag.frame || in_beat.tag.sym != ptag.sym ||
            in_beat.tag.sc != ptag.sc + sc_idx_t'(cnt))
          if (seq_err_cnt != 16'hffff) seq_err_cnt <= seq_err_cnt + 1'b1;
        cnt <= cnt + 1'b1;
        if (cnt == len - 1'b1) state <= S_HDR;
      end
    end
  end

  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_tvalid && !tx_tready |=> tx_tvalid && $stable(tx_tdata) && $stable(tx_tlast))
    else $error("fh_packetizer: output changed while stalled");
endmodule
