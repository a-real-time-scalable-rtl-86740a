// tb_cc_distance: checks the closed-form distance function.
//
// At d=5 with 4 rounds (48 vertices) every pair distance is compared with a
// breadth-first search over the decoding graph built from its edge list:
// the space-like steps x1, x2, the time-like step t and the hook steps
// h1=(-1,0,1), h2=(0,-1,1), H=(-1,-1,1), in both directions, restricted to the
// vertices that exist.  The boundary distances must be x1 and d-x1.  At the
// default d=23, random pairs are checked against the formula written out
// independently.
module tb_cc_distance;

  localparam int D = 5, R = 4;
  localparam int NPR = (D * D - 1) / 2;
  localparam int N = NPR * R;
  localparam int NX1 = D - 1, NX2 = (D + 1) / 2;

  logic [5:0] va, vb;
  logic [3:0] pd, dl, dr;
  cc_distance #(.D(D), .ROUNDS(R)) u_small (.va, .vb, .pair_dist(pd), .a_dist_logical(dl), .a_dist_other(dr));

  logic [12:0] wa, wb;
  logic [6:0]  wpd, wdl, wdr;
  cc_distance u_full (.va(wa), .vb(wb), .pair_dist(wpd), .a_dist_logical(wdl), .a_dist_other(wdr));

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int vid(int x1, int x2, int t);
    return t * NPR + x2 * NX1 + (x1 - 1);
  endfunction

  initial begin
    int steps[6][3] = '{'{1,0,0}, '{0,1,0}, '{0,0,1}, '{-1,0,1}, '{0,-1,1}, '{-1,-1,1}};
    int bfs[N];
    int q[$];
    for (int s = 0; s < N; s++) begin
      // BFS from s.
      foreach (bfs[k]) bfs[k] = -1;
      bfs[s] = 0;
      q.delete();
      q.push_back(s);
      while (q.size() > 0) begin
        automatic int u = q.pop_front();
        automatic int t = u / NPR, x2 = (u % NPR) / NX1, x1 = (u % NPR) % NX1 + 1;
        for (int e = 0; e < 6; e++) begin
          for (int sg = -1; sg <= 1; sg += 2) begin
            automatic int n1 = x1 + sg * steps[e][0], n2 = x2 + sg * steps[e][1], nt = t + sg * steps[e][2];
            if (n1 >= 1 && n1 <= NX1 && n2 >= 0 && n2 < NX2 && nt >= 0 && nt < R) begin
              automatic int w = vid(n1, n2, nt);
              if (bfs[w] < 0) begin
                bfs[w] = bfs[u] + 1;
                q.push_back(w);
              end
            end
          end
        end
      end
      for (int k = 0; k < N; k++) begin
        va = 6'(s); vb = 6'(k);
        #1;
        checks++;
        if (int'(pd) != bfs[k]) begin
          failures++;
          $display("FAIL: dist(%0d,%0d)=%0d, BFS %0d", s, k, pd, bfs[k]);
        end
      end
      checks++;
      if (int'(dl) != (s % NPR) % NX1 + 1 || int'(dr) != D - ((s % NPR) % NX1 + 1)) begin
        failures++;
        $display("FAIL: boundary distances of %0d: %0d %0d", s, dl, dr);
      end
    end
    // Default size, independent formula.
    for (int k = 0; k < 2000; k++) begin
      automatic int a = $urandom_range(6071), b = $urandom_range(6071);
      automatic int pr = 264;
      automatic int ax1 = (a % pr) % 22 + 1, ax2 = (a % pr) / 22, at = a / pr;
      automatic int bx1 = (b % pr) % 22 + 1, bx2 = (b % pr) / 22, bt = b / pr;
      automatic int s1 = ax1 - bx1, s2 = ax2 - bx2, st = at - bt;
      automatic int e = ((s1 < 0 ? -s1 : s1) + (s2 < 0 ? -s2 : s2) + (s1 + st < 0 ? -(s1 + st) : s1 + st)
              + (s2 + st < 0 ? -(s2 + st) : s2 + st)) / 2;
      wa = 13'(a); wb = 13'(b);
      #1;
      checks++;
      if (int'(wpd) != e || int'(wdl) != ax1 || int'(wdr) != 23 - ax1) begin
        failures++;
        $display("FAIL: d=23 dist(%0d,%0d)=%0d expected %0d", a, b, wpd, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
