// tb_venice_fc_select: checks the controller choice (own row if free, else
// the nearest free row, ties to the lower index) against a reference, for
// every destination row and every free mask on the 8 x 8 array.
module tb_venice_fc_select;
  localparam int NR = 8, NC = 8;
  logic [5:0] dest;
  logic [7:0] fc_free;
  logic       any_free;
  logic [2:0] sel;
  int checks = 0, failures = 0;

  venice_fc_select dut (.*);

  initial begin
    for (int d = 0; d < NR * NC; d += 3) begin
      for (int m = 0; m < 256; m++) begin
        int row, best, bd;
        dest = 6'(d); fc_free = 8'(m);
        #1;
        row = d / NC; best = -1; bd = 99;
        for (int k = 0; k < NR; k++)
          if (m[k] && (k > row ? k - row : row - k) < bd) begin bd = (k > row ? k - row : row - k); best = k; end
        checks++;
        if (any_free !== (m != 0) || (m != 0 && int'(sel) != best)) begin
          failures++;
          if (failures < 10) $display("FAIL dest %0d free %b: sel %0d any %0d, expected %0d", d, m, sel, any_free, best);
        end
      end
    end
    dest = 6'd20; fc_free = 8'b0000_0100;  // chip 20 is on row 2
    #1; checks++; if (sel != 3'd2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
