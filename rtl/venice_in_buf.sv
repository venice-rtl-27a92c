// venice_in_buf: the two 8-bit flit buffers of one router input port.
//
// The paper gives each router port two 8-bit buffers. Here they hold the
// header and tail flit of one scout packet. Circuit data bytes (scout = 0)
// pass this block by; the crossbar switches them.
//
// Protocol (this design's choice): `rdy` is high while the buffer is empty.
// A sender starts a packet only when it sees `rdy` high, then sends the
// header flit and the tail flit on two consecutive cycles. Flits are
// captured at the clock edge. `pkt_vld` goes high the cycle after the tail
// arrives and stays high until the router pulses `pop`.
//
// Lint note: the assertions sample rst_n synchronously (to stay quiet in
// reset) while the flops use it as an asynchronous reset, which Verilator
// reports as SYNCASYNCNET. This is intended; assertions are not logic.
module venice_in_buf
  import venice_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  flit_t      in,
  output logic       rdy,
  output logic       pkt_vld,
  output logic [7:0] hdr,
  output logic [7:0] tail,
  input  logic       pop
);
  logic [1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      hdr  <= '0;
      tail <= '0;
    end else begin
      if (pop) cnt <= '0;
      if (in.vld && in.scout) begin
        if (!flit_is_tail(in.data)) begin
          hdr <= in.data;
          cnt <= 2'd1;
        end else begin
          tail <= in.data;
          cnt  <= 2'd2;
        end
      end
    end
  end

  assign rdy     = (cnt == 2'd0);
  assign pkt_vld = (cnt == 2'd2);

  // a header flit may only arrive into an empty buffer, a tail only after it
  a_hdr_into_empty: assert property (@(posedge clk) disable iff (!rst_n)
    (in.vld && in.scout && !flit_is_tail(in.data)) |-> (cnt == 2'd0 || pop));
  a_tail_after_hdr: assert property (@(posedge clk) disable iff (!rst_n)
    (in.vld && in.scout && flit_is_tail(in.data)) |-> (cnt == 2'd1));
endmodule
