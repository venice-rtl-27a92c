// tb_venice_route_compute: checks the routing decision against a separately
// written reference of the paper's algorithm: ejection at the destination,
// minimal ports first (random pick of two by rnd[0]), then non-minimal
// ports in the order Up, Down, Right, Left picked by rnd % count, then
// backtrack. Directed cases plus 20000 random ones on the 8 x 8 mesh.
module tb_venice_route_compute;
  import venice_pkg::*;
  localparam int NR = 8, NC = 8;

  logic [2:0] cur_row, cur_col;
  logic [5:0] dest;
  logic [1:0] in_port, rnd, out_port;
  logic [3:0] free;
  logic       eject, found, minimal;
  int checks = 0, failures = 0;

  venice_route_compute dut (.*);

  // reference: returns {eject, found, minimal, out_port}
  function automatic logic [4:0] ref_route(int r, int c, int d, int inp, logic [3:0] fr, int rn);
    int dr = d / NC, dc = d % NC;
    int cand [$];
    int nm [$];
    if (dr == r && dc == c) return {1'b1, 1'b1, 1'b1, 2'(inp)};
    if (dc > c && fr[0]) cand.push_back(0);       // RIGHT
    if (dc < c && fr[3]) cand.push_back(3);       // LEFT
    if (dr > r && fr[2]) cand.push_back(2);       // DOWN (row + 1)
    if (dr < r && fr[1]) cand.push_back(1);       // UP (row - 1)
    if (cand.size() == 2) return {1'b0, 1'b1, 1'b1, 2'(cand[rn & 1])};
    if (cand.size() == 1) return {1'b0, 1'b1, 1'b1, 2'(cand[0])};
    for (int k = 0; k < 4; k++) begin
      int p;
      p = (k == 0) ? 1 : (k == 1) ? 2 : (k == 2) ? 0 : 3;   // Up, Down, Right, Left
      if (fr[p] && p != inp) nm.push_back(p);
    end
    if (nm.size() > 0) return {1'b0, 1'b1, 1'b0, 2'(nm[rn % nm.size()])};
    return {1'b0, 1'b0, 1'b0, 2'(inp)};
  endfunction

  task automatic run(int r, int c, int d, int inp, logic [3:0] fr, int rn, string tag);
    logic [4:0] e;
    cur_row = 3'(r); cur_col = 3'(c); dest = 6'(d); in_port = 2'(inp); free = fr; rnd = 2'(rn);
    #1;
    e = ref_route(r, c, d, inp, fr, rn);
    checks++;
    if ({eject, found, minimal, out_port} !== e) begin
      failures++;
      $display("FAIL %s: r%0d c%0d dest%0d in%0d free%b rnd%0d -> %b%b%b %0d, expected %b",
               tag, r, c, d, inp, fr, rn, eject, found, minimal, out_port, e);
    end
  endtask

  initial begin
    // directed
    run(3, 3, 27, 3, 4'b1111, 1, "eject");
    run(3, 3, 30, 3, 4'b0001, 1, "east only");
    checks++; if (!(found && minimal && out_port == P_RIGHT)) failures++;
    run(3, 3, 0, 0, 4'b1010, 1, "north-west, both free, rnd 1 -> UP");
    checks++; if (out_port != P_UP) failures++;
    run(3, 3, 0, 0, 4'b1010, 2, "north-west, both free, rnd 2 -> LEFT");
    checks++; if (out_port != P_LEFT) failures++;
    run(3, 3, 59, 1, 4'b1001, 1, "south busy: misroute");
    checks++; if (!(found && !minimal)) failures++;
    run(3, 3, 59, 1, 4'b0010, 3, "nothing but input: backtrack");
    run(3, 3, 59, 2, 4'b0000, 3, "nothing free: backtrack");
    checks++; if (found || out_port != 2'd2) failures++;
    // random
    for (int i = 0; i < 20000; i++)
      run($urandom_range(NR - 1), $urandom_range(NC - 1), $urandom_range(NR * NC - 1),
          $urandom_range(3), 4'($urandom_range(15)), $urandom_range(1, 3), "random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
