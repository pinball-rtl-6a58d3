// stage_st -- pipeline stages ST(1) and ST(2): single-qubit spacetime-like errors.
//
// A Z error that appears on a data qubit in the middle of a round is seen by
// one neighbouring ancilla in that round and by the other one a round later.
// Each primitive pairs vertex n=(r,c) of the current round S_i (center) with a
// vertex one lattice row higher in the previous round S_{i-1} (neighbor) and,
// if both are active, corrects the data qubit the two ancillas share:
//   GROUP 1 (ST(1)): neighbor (r-1,c+1) in S_{i-1}, data qubit (r,c+1)
//   GROUP 2 (ST(2)): neighbor (r-1,c-1) in S_{i-1}, data qubit (r,c)
// In each group every vertex of each round is used at most once, so all
// primitives run in parallel. The two groups follow the solid and dashed
// edges of the paper's coverage drawing. Combinational.
module stage_st import pinball_pkg::*; #(
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

  // S_{i-1} partner of S_i vertex n, -1 if none
  function automatic int partner(input int n);
    int r, c;
    r = node_r(D, n);
    c = node_c(D, n);
    if (GROUP == 1) return node_at(D, r - 1, c + 1);
    return node_at(D, r - 1, c - 1);
  endfunction

  function automatic int edge_data(input int n);
    int r, c;
    r = node_r(D, n);
    c = node_c(D, n);
    if (GROUP == 1) return data_at(D, r, c + 1);
    return data_at(D, r, c);
  endfunction

  logic [N-1:0] cen_o, nb_o, fire;

  for (genvar n = 0; n < N; n++) begin : g_prim
    localparam int P = partner(n);
    if (P >= 0) begin : g_edge
      predecode_primitive u_prim (
        .center_in   (s_cur_i[n]),
        .neighbor_in (s_prev_i[P]),
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
    s_cur_o  = s_cur_i;
    s_prev_o = s_prev_i;
    corr_o   = corr_i;
    for (int n = 0; n < N; n++) begin
      if (partner(n) >= 0) begin
        s_cur_o[n]           = cen_o[n];
        s_prev_o[partner(n)] = nb_o[n];
        corr_o[edge_data(n)] = corr_i[edge_data(n)] ^ fire[n];
      end
    end
  end

endmodule
