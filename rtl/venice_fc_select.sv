// venice_fc_select: picks the flash controller that serves a request.
//
// The paper's rule: use the flash controller closest to the target chip if
// it is free, otherwise the nearest free one. Controller r is attached to
// the west end of mesh row r, so it reaches chip (row y, column x) in
// x + 1 + |y - r| hops; the closest controller is the one on the chip's own
// row and nearness is |y - r|. Ties between two equally near free
// controllers go to the lower index (this design's choice).
//
// Purely combinational: `any_free` and `sel` follow `dest` and `fc_free`.
module venice_fc_select #(
  parameter int unsigned NR = 8,
  parameter int unsigned NC = 8
) (
  input  logic [$clog2(NR*NC)-1:0] dest,
  input  logic [NR-1:0]            fc_free,
  output logic                     any_free,
  output logic [$clog2(NR)-1:0]    sel
);
  localparam int unsigned RW = $clog2(NR);
  localparam int unsigned IW = $clog2(NR*NC);

  logic [RW-1:0] row;
  logic [RW:0]   best_d, d;

  always_comb begin
    row      = RW'(dest / IW'(NC));
    any_free = 1'b0;
    sel      = '0;
    best_d   = '1;
    for (int k = 0; k < NR; k++) begin
      d = (RW+1)'(k) > {1'b0, row} ? (RW+1)'(k) - {1'b0, row} : {1'b0, row} - (RW+1)'(k);
      if (fc_free[k] && (!any_free || d < best_d)) begin
        any_free = 1'b1;
        best_d   = d;
        sel      = RW'(k);
      end
    end
  end
endmodule
