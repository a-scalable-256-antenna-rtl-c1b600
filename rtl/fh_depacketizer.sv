// fh_depacketizer: unpacks fronthaul packets received from the previous panel's
// Ethernet link into tagged beats for matrix_aggregate.
//
// It expects the packet format written by fh_packetizer: a header word (magic
// 16'h4C55, frame, symbol, first subcarrier, payload length, sender) and then the
// payload words. Each payload word becomes one beat_t whose tag is rebuilt from the
// header as (frame, symbol, first subcarrier + word index). A packet with a wrong
// magic, or one that ends at its header, is dropped up to its tlast and counted in
// bad_hdr_cnt. A packet whose tlast does not come after exactly the announced
// number of words is counted in len_err_cnt; its words are passed on.
// The packet format is this design's choice (see fh_packetizer).
// Handshake: AXI4-Stream on both sides; a stalled output stalls the link.
// Timing: combinational from the link to the output, apart from the state register.
module fh_depacketizer
  import lulis_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rx_tvalid,
  output logic                 rx_tready,
  input  logic                 rx_tlast,
  input  logic [PAYLOAD_W-1:0] rx_tdata,
  output logic                 out_valid,
  input  logic                 out_ready,
  output beat_t                out_beat,
  output logic [15:0]          bad_hdr_cnt,
  output logic [15:0]          len_err_cnt
);
  localparam logic [15:0] MAGIC = 16'h4C55;

  typedef enum logic [1:0] {S_HDR, S_PAY, S_DROP} state_e;
  state_e     state;
  tag_t       ptag;
  logic [7:0] cnt, len;

  always_comb begin
    rx_tready = 1'b1;
    out_valid = 1'b0;
    out_beat  = '0;
    if (state == S_PAY) begin
      rx_tready       = out_ready;
      out_valid       = rx_tvalid;
      out_beat.tag    = ptag;
      out_beat.tag.sc = ptag.sc + sc_idx_t'(cnt);
      out_beat.v      = rx_tdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_HDR;
      ptag        <= '0;
      cnt         <= '0;
      len         <= '0;
      bad_hdr_cnt <= '0;
      len_err_cnt <= '0;
    end else if (rx_tvalid && rx_tready) begin
      case (state)
        S_HDR: begin
          if (rx_tdata[127:112] == MAGIC && !rx_tlast) begin
            state      <= S_PAY;
            ptag.frame <= rx_tdata[111:96];
            ptag.sym   <= rx_tdata[90:88];
            ptag.sc    <= rx_tdata[81:72];
            len        <= rx_tdata[71:64];
            cnt        <= '0;
          end else begin
            if (bad_hdr_cnt != 16'hffff) bad_hdr_cnt <= bad_hdr_cnt + 1'b1;
            if (!rx_tlast) state <= S_DROP;
          end
        end
        S_PAY: begin
          cnt <= cnt + 1'b1;
          if (rx_tlast) begin
            state <= S_HDR;
            if (cnt != len - 1'b1 && len_err_cnt != 16'hffff) len_err_cnt <= len_err_cnt + 1'b1;
          end
        end
        default: if (rx_tlast) state <= S_HDR;
      endcase
    end
  end
endmodule
