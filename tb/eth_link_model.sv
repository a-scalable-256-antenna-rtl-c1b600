// eth_link_model: behavioural model of one 25G Ethernet fronthaul link between two
// panels (MAC, PHY and cable). It is not synthesizable logic and stands in for
// vendor IP in simulation only.
// Words accepted on the input AXI4-Stream leave on the output LAT clocks later, in
// order. The output honours out_tready. The input is refused (tready = 0) on
// roughly one clock in STALL_DIV, so the sender sees back-pressure. If INJECT_AT > 0,
// the model inserts one two-word packet with a bad header once the link is idle
// after clock INJECT_AT. The receiver must drop that packet.
module eth_link_model #(
  parameter int LAT       = 350,
  parameter int STALL_DIV = 8,
  parameter int INJECT_AT = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_tvalid,
  output logic         in_tready,
  input  logic         in_tlast,
  input  logic [127:0] in_tdata,
  output logic         out_tvalid,
  input  logic         out_tready,
  output logic         out_tlast,
  output logic [127:0] out_tdata,
  output int           stall_cycles,
  output int           injected
);
  typedef struct { logic [127:0] d; logic l; longint t; } word_t;
  word_t q [$];
  longint cyc = 0;
  bit in_pkt = 0;     // input side is inside a packet
  bit out_pkt = 0;    // output side is inside a packet

  initial begin
    stall_cycles = 0;
    injected = 0;
    in_tready = 0;
  end

  always @(negedge clk) in_tready = rst_n && ($urandom_range(0, STALL_DIV - 1) != 0);

  assign out_tvalid = (q.size() > 0) && (q[0].t + LAT <= cyc);
  assign out_tdata  = (q.size() > 0) ? q[0].d : '0;
  assign out_tlast  = (q.size() > 0) ? q[0].l : 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_tvalid && !in_tready) stall_cycles <= stall_cycles + 1;
      if (out_tvalid && out_tready) begin
        out_pkt = !q[0].l;
        void'(q.pop_front());
      end
      if (in_tvalid && in_tready) begin
        q.push_back('{d: in_tdata, l: in_tlast, t: cyc});
        in_pkt = !in_tlast;
      end else if (INJECT_AT > 0 && injected == 0 && cyc > INJECT_AT && !in_pkt) begin
        q.push_back('{d: {16'hDEAD, 112'd0}, l: 1'b0, t: cyc});
        q.push_back('{d: 128'd0, l: 1'b1, t: cyc});
        injected <= 1;
      end
    end
  end
endmodule
