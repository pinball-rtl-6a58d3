// stage_b -- pipeline stages B(1)..B(4): bulk space-like errors.
//
// Primitives pair two diagonally adjacent vertices of the current round S_i
// and, when both are active, correct the data qubit the two ancillas share.
// A bulk vertex has four such edges, which must not be checked at the same
// time, so the edges are split into four conflict-free groups (GROUP):
//   1: up-right edge of every vertex in an even lattice row (r = 0,2,..)
//   2: down-right edge of every vertex in an even row
//   3: up-right edge of every vertex in an odd row (r = 1,3,..)
//   4: down-right edge of every vertex in an odd row (r = -1,1,..)
// The grouping is read off the paper's four coverage drawings for d=5 and
// generalised to any odd d. S_{i-1} passes through. Combinational.
module stage_b import pinball_pkg::*; #(
  parameter  int D     = 21,
  parameter  int GROUP = 1,
  localparam int N     = num_nodes(D),
  localparam int Q     = num_data(D)
) (
  input  logic [N-1:0] s_prev_i,
  input  logic [N-1:0] s_cur_i,
  input  logic [Q-1:0] corr_i,
  output logic [N-1:0] s_prev_o,
  output logic [N-1:0] s_cur_o,
  output logic [Q-1:0] corr_o
);

  // partner vertex of center n in this group, -1 if none
  function automatic int partner(input int n);
    int r, c;
    r = node_r(D, n);
    c = node_c(D, n);
    case (GROUP)
      1: if (r >= 0 && (r % 2) == 0) return node_at(D, r - 1, c + 1);
      2: if (r >= 0 && (r % 2) == 0) return node_at(D, r + 1, c + 1);
      3: if (r >= 1 && (r % 2) == 1) return node_at(D, r - 1, c + 1);
      4: if (r == -1 || (r % 2) == 1) return node_at(D, r + 1, c + 1);
      default: ;
    endcase
    return -1;
  endfunction

  // data qubit on the edge of center n
  function automatic int edge_data(input int n);
    int r, c;
    r = node_r(D, n);
    c = node_c(D, n);
    if (GROUP == 1 || GROUP == 3) return data_at(D, r, c + 1);
    return data_at(D, r + 1, c + 1);
  endfunction

  logic [N-1:0] cen_o, nb_o, fire;

  for (genvar n = 0; n < N; n++) begin : g_prim
    localparam int P = partner(n);
    if (P >= 0) begin : g_edge
      predecode_primitive u_prim (
        .center_in   (s_cur_i[n]),
        .neighbor_in (s_cur_i[P]),
        .center_out  (cen_o[n]),
        .neighbor_out(nb_o[n]),
        .correction  (fire[n])
      );
    end else begin : g_none
      assign cen_o[n] = s_cur_i[n];
      assign nb_o[n]  = 1'b0;
      assign fire[n]  = 1'b0;
    end
  end

  always_comb begin
    s_cur_o = s_cur_i;
    corr_o  = corr_i;
    for (int n = 0; n < N; n++) begin
      if (partner(n) >= 0) begin
        s_cur_o[n]            = cen_o[n];
        s_cur_o[partner(n)]   = nb_o[n];
        corr_o[edge_data(n)]  = corr_i[edge_data(n)] ^ fire[n];
      end
    end
  end

  assign s_prev_o = s_prev_i;

endmodule
