// stage_e -- pipeline stage E: edge space-like errors.
//
// A data qubit on the left or right boundary is seen by a single X ancilla,
// so an error there leaves one isolated active syndrome. Each boundary vertex
// of the current round S_i is paired with an artificial neighbor that is
// always active, so the primitive fires on the boundary syndrome alone, clears
// it and corrects the boundary data qubit: (r,0) for a left-boundary vertex
// (c=0), (r+1,d-1) for a right-boundary vertex (c=d-2). The paper places this
// stage last because it explains one syndrome per error. S_{i-1} passes
// through. Combinational.
module stage_e import pinball_pkg::*; #(
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

  // boundary data qubit of vertex n, -1 for a bulk vertex
  function automatic int edge_data(input int n);
    int r, c;
    r = node_r(D, n);
    c = node_c(D, n);
    if (c == 0)     return data_at(D, r, 0);
    if (c == D - 2) return data_at(D, r + 1, D - 1);
    return -1;
  endfunction

  logic [N-1:0] cen_o, fire;

  for (genvar n = 0; n < N; n++) begin : g_prim
    if (edge_data(n) >= 0) begin : g_edge
      predecode_primitive u_prim (
        .center_in   (s_cur_i[n]),
        .neighbor_in (1'b1),
        .center_out  (cen_o[n]),
        .neighbor_out(),
        .correction  (fire[n])
      );
    end else begin : g_none
      assign cen_o[n] = s_cur_i[n];
      assign fire[n]  = 1'b0;
    end
  end

  always_comb begin
    corr_o = corr_i;
    for (int n = 0; n < N; n++) begin
      if (edge_data(n) >= 0) corr_o[edge_data(n)] = corr_i[edge_data(n)] ^ fire[n];
    end
  end

  assign s_cur_o  = cen_o;
  assign s_prev_o = s_prev_i;

endmodule
