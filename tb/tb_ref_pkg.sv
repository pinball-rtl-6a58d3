// tb_ref_pkg -- behavioural reference model of the Pinball predecoder for the
// testbenches.
//
// Written independently of the RTL's geometry helpers: vertices are addressed
// by (x,y), x the position inside a row and y the row counted from the
// bottom (y = 0 .. d), as in the coordinate labels of the paper's coverage
// drawings, where for d = 5 vertex (0,0) is the bottom-left boundary ancilla.
// Every stage is evaluated one primitive after another; because the
// primitives of a stage are conflict-free this equals the parallel hardware.
// fires[k] counts how many primitives of stage k have fired so far.
package tb_ref_pkg;

  class pinball_ref #(int D = 5);
    localparam int K = (D - 1) / 2;
    localparam int N = (D + 1) * K;
    localparam int Q = D * D;

    int fires [9];

    function new();
      foreach (fires[k]) fires[k] = 0;
    endfunction

    // vertex id of (x,y), -1 outside the graph
    function int id(int x, int y);
      if (x < 0 || x >= K || y < 0 || y > D) return -1;
      return (D - y) * K + x;
    endfunction
    // lattice column of (x,y); odd rows from the bottom start one column right
    function int col(int x, int y);
      return 2 * x + (y % 2);
    endfunction
    // lattice row (data-qubit row just below the plaquette) of row y
    function int lrow(int y);
      return D - 1 - y;
    endfunction
    function int dq(int row, int c);
      return row * D + c;
    endfunction
    // neighbour one row up, to the right / to the left
    function int up_right(int x, int y);
      return id(x + (y % 2), y + 1);
    endfunction
    function int up_left(int x, int y);
      return id(x - ((y % 2) == 0 ? 1 : 0), y + 1);
    endfunction
    function int down_right(int x, int y);
      return id(x + (y % 2), y - 1);
    endfunction

    // one stage k (0=M,1..4=B,5,6=ST,7=H,8=E) applied in place
    function void run_stage(int k, ref bit [N-1:0] sp, ref bit [N-1:0] sc, ref bit [Q-1:0] corr);
      for (int y = 0; y <= D; y++) begin
        for (int x = 0; x < K; x++) begin
          int n, m, q0, q1;
          bit yodd, use_prev;
          n = id(x, y);
          yodd = (y % 2) == 1;
          m = -1; q0 = -1; q1 = -1; use_prev = 1'b0;
          case (k)
            0: begin m = n; use_prev = 1'b1; end
            1: if (!yodd && y <= D - 1) begin m = up_right(x, y);   q0 = dq(lrow(y), col(x, y) + 1); end
            2: if (!yodd && y <= D - 1) begin m = down_right(x, y); q0 = dq(lrow(y) + 1, col(x, y) + 1); end
            3: if (yodd && y <= D - 2)  begin m = up_right(x, y);   q0 = dq(lrow(y), col(x, y) + 1); end
            4: if (yodd)                begin m = down_right(x, y); q0 = dq(lrow(y) + 1, col(x, y) + 1); end
            5: if (y <= D - 1) begin m = up_right(x, y); use_prev = 1'b1; q0 = dq(lrow(y), col(x, y) + 1); end
            6: if (y <= D - 1) begin m = up_left(x, y);  use_prev = 1'b1; q0 = dq(lrow(y), col(x, y)); end
            7: if (y <= D - 1) begin m = id(x, y + 2);   use_prev = 1'b1;
                                     q0 = dq(lrow(y) - 1, col(x, y)); q1 = dq(lrow(y), col(x, y)); end
            8: begin
                 if (col(x, y) == 0)          begin m = N; q0 = dq(lrow(y), 0); end
                 else if (col(x, y) == D - 2) begin m = N; q0 = dq(lrow(y) + 1, D - 1); end
               end
            default: ;
          endcase
          if (m < 0) continue;
          if (m == N) begin                      // artificial neighbour
            if (sc[n]) begin
              sc[n] = 1'b0; corr[q0] ^= 1'b1; fires[k]++;
            end
          end else if (use_prev) begin
            if (sc[n] && sp[m]) begin
              sc[n] = 1'b0; sp[m] = 1'b0; fires[k]++;
              if (q0 >= 0) corr[q0] ^= 1'b1;
              if (q1 >= 0) corr[q1] ^= 1'b1;
            end
          end else begin
            if (sc[n] && sc[m]) begin
              sc[n] = 1'b0; sc[m] = 1'b0; fires[k]++;
              corr[q0] ^= 1'b1;
            end
          end
        end
      end
    endfunction

    // a whole round: returns residuals, corrections and the complex flag
    function void step(input bit [N-1:0] sprev_in, input bit [N-1:0] scur_in, input bit last,
                       output bit [N-1:0] sp, output bit [N-1:0] sc,
                       output bit [Q-1:0] corr, output bit cplx);
      sp = sprev_in;
      sc = scur_in;
      corr = '0;
      for (int k = 0; k < 9; k++) run_stage(k, sp, sc, corr);
      cplx = (|sp) || (last && (|sc));
    endfunction

    // random syndrome vector with about `pct` percent of bits set
    function bit [N-1:0] rand_syn(int pct);
      bit [N-1:0] v;
      for (int i = 0; i < N; i++) v[i] = (($urandom % 100) < pct);
      return v;
    endfunction

    // syndrome vector produced by flipping data qubit (row,c): every X
    // vertex whose plaquette touches it is toggled
    function bit [N-1:0] data_error(int row, int c);
      bit [N-1:0] v;
      v = '0;
      for (int y = 0; y <= D; y++)
        for (int x = 0; x < K; x++)
          if ((lrow(y) == row || lrow(y) == row - 1) && (col(x, y) == c || col(x, y) == c - 1))
            v[id(x, y)] ^= 1'b1;
      return v;
    endfunction
  endclass

endpackage
