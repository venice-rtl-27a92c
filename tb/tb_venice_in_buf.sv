// tb_venice_in_buf: checks the two-flit scout buffer: ready while empty,
// capture of header and tail, packet-valid after the tail, data bytes
// ignored, pop empties it, and random packets come out intact.
module tb_venice_in_buf;
  import venice_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, pop = 1'b0;
  flit_t in = FLIT_IDLE;
  logic rdy, pkt_vld;
  logic [7:0] hdr, tail;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  venice_in_buf dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(rdy && !pkt_vld, "empty after reset");
    for (int n = 0; n < 50; n++) begin
      logic [7:0] h, t;
      h = {1'b0, 7'($urandom)};
      t = {1'b1, 7'($urandom)};
      in = '{vld: 1'b1, scout: 1'b0, data: 8'hAA};   // a data byte: ignored
      @(negedge clk);
      check(rdy && !pkt_vld, "data byte not buffered");
      in = '{vld: 1'b1, scout: 1'b1, data: h};
      @(negedge clk);
      check(!rdy && !pkt_vld, "header held, not ready");
      in = '{vld: 1'b1, scout: 1'b1, data: t};
      @(negedge clk);
      in = FLIT_IDLE;
      check(pkt_vld && hdr == h && tail == t, "packet captured");
      repeat ($urandom_range(3)) @(negedge clk);
      check(pkt_vld && !rdy, "packet held until pop");
      pop = 1'b1;
      @(negedge clk);
      pop = 1'b0;
      check(rdy && !pkt_vld, "empty after pop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
