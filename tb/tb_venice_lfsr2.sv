// tb_venice_lfsr2: checks the 2-bit LFSR sequence 01 -> 11 -> 10 -> 01,
// that it holds while `step` is low, and that reset returns it to 01.
module tb_venice_lfsr2;
  logic clk = 1'b0, rst_n = 1'b0, step = 1'b0;
  logic [1:0] q;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  venice_lfsr2 dut (.clk, .rst_n, .step, .q);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [1:0] expv [3] = '{2'b01, 2'b11, 2'b10};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(q == 2'b01, "seed after reset");
    step = 1'b1;
    for (int i = 1; i <= 9; i++) begin
      @(negedge clk);
      check(q == expv[i % 3], $sformatf("state %0d is %b, expected %b", i, q, expv[i % 3]));
      check(q != 2'b00, "never all-zero");
    end
    step = 1'b0;
    repeat (3) begin
      @(negedge clk);
      check(q == expv[0], "holds without step");
    end
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    check(q == 2'b01, "reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
