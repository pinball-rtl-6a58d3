// stage_h -- pipeline stage H: hook spacetime-like errors.
//
// A Z error on a Z ancilla part-way through its CNOT sequence spreads to two
// data qubits in one column; the X ancilla above sees it in round i-1 and the
// X ancilla two lattice rows below only in round i. Each primitive pairs vertex
// n=(r,c) of S_i (center) with vertex (r-2,c) of S_{i-1} (neighbor) and, if
// both are active, corrects the two data qubits (r-1,c) and (r,c) between them
// (the paper's d1/d4 choice; the other column differs by a stabilizer). No two
// primitives share a syndrome, so all run in parallel. Combinational.
module stage_h import pinball_pkg::*; #(
  parameter  int D = 21,
  localparam int N = num_nodes(D),
  localparam int Q = num_data(D)
) (
  input  logic [N-1:0] s_prev_i,
  input  logic [N-1:0] s_cur_i,
  input  logic [Q-1:0] corr_i,
  output logic [N-1:0] s_prev_o,
  output logic [N-1:0] s_cur_o,
  output logic [Q-1:0] corr_o
);

  function automatic int partner(input int n);
    return node_at(D, node_r(D, n) - 2, node_c(D, n));
  endfunction

  // upper (k=0) and lower (k=1) data qubit of the hook on center n
  function automatic int edge_data(input int n, input int k);
    return data_at(D, node_r(D, n) - 1 + k, node_c(D, n));
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
        s_cur_o[n]              = cen_o[n];
        s_prev_o[partner(n)]    = nb_o[n];
        corr_o[edge_data(n, 0)] = corr_i[edge_data(n, 0)] ^ fire[n];
        corr_o[edge_data(n, 1)] = corr_i[edge_data(n, 1)] ^ fire[n];
      end
    end
  end

endmodule
