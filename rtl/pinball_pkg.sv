// pinball_pkg -- shared types, constants and decoding-graph geometry.
//
// Geometry. The predecoder works on the Z-error decoding graph of a distance-d
// rotated surface code: one vertex per X ancilla, (d+1) rows of (d-1)/2
// vertices. Lattice coordinates: data qubit (r,c) with r,c in 0..d-1, row 0 at
// the top; the plaquette (ancilla) to the lower right of data qubit (r,c) is
// called (r,c). X plaquettes are those with r+c even; rows r=-1 and r=d-1 hold
// the two-qubit boundary X ancillas at the top and bottom edges. Vertices are
// numbered row by row from the top-left (n = (r+1)*(d-1)/2 + c/2), the same
// numbering as the d=5 drawing of the decoding graph in the paper (0 and 1 are
// the top boundary ancillas, 10 and 11 the bottom ones for d=5). Data qubits
// are numbered q = r*d + c. These numberings are this design's choice.
//
// Two X vertices are adjacent (space-like edge) when they touch diagonally;
// the edge's data qubit is the one they share:
//   up-right   (r,c)-(r-1,c+1) : data (r,  c+1)
//   down-right (r,c)-(r+1,c+1) : data (r+1,c+1)
// Boundary vertices (c=0 or c=d-2) also see a data qubit that no other X
// ancilla sees: (r,0) on the left, (r+1,d-1) on the right.
//
// Operating points. vf_point_t holds one supply / body-bias / clock setting of
// the workload-aware voltage-frequency scaling; the defaults are the paper's
// LP point (0.48 V, VBN 0.3 V, VBP -0.3 V, 12.5 MHz) and HP point (0.8 V, no
// body bias, 100 MHz). The field widths and units are this design's choice.
package pinball_pkg;

  // ---------------------------------------------------------------- geometry
  function automatic int num_nodes(input int d);
    return (d + 1) * ((d - 1) / 2);
  endfunction

  function automatic int num_data(input int d);
    return d * d;
  endfunction

  // lattice row (-1..d-1) of vertex n
  function automatic int node_r(input int d, input int n);
    return n / ((d - 1) / 2) - 1;
  endfunction

  // lattice column (0..d-2) of vertex n
  function automatic int node_c(input int d, input int n);
    int k;
    int row;
    k   = (d - 1) / 2;
    row = n / k;
    return 2 * (n % k) + (((row % 2) == 0) ? 1 : 0);
  endfunction

  // vertex at lattice position (r,c), or -1 if there is no X ancilla there
  function automatic int node_at(input int d, input int r, input int c);
    if (r < -1 || r > d - 1 || c < 0 || c > d - 2) return -1;
    if (((r + c + 2) % 2) != 0) return -1;
    return (r + 1) * ((d - 1) / 2) + c / 2;
  endfunction

  // index of data qubit (r,c)
  function automatic int data_at(input int d, input int r, input int c);
    return r * d + c;
  endfunction

  // bits needed to count 0..n-1 (at least 1)
  function automatic int cnt_bits(input int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // ------------------------------------------------------- pipeline stages
  // The nine stages in pipeline order.
  typedef enum logic [3:0] {
    STG_M   = 4'd0,
    STG_B1  = 4'd1,
    STG_B2  = 4'd2,
    STG_B3  = 4'd3,
    STG_B4  = 4'd4,
    STG_ST1 = 4'd5,
    STG_ST2 = 4'd6,
    STG_H   = 4'd7,
    STG_E   = 4'd8
  } stage_t;

  localparam int NUM_STAGES = 9;

  // ------------------------------------------------- power / clock modes
  typedef enum logic {
    MODE_LP = 1'b0,
    MODE_HP = 1'b1
  } pmode_t;

  typedef struct packed {
    logic        [11:0] vdd_mv;       // supply, mV
    logic signed [11:0] vbn_mv;       // NMOS body bias, mV
    logic signed [11:0] vbp_mv;       // PMOS body bias, mV
    logic        [11:0] freq_100khz;  // clock, units of 100 kHz
  } vf_point_t;

  localparam vf_point_t VF_LP_DEFAULT = '{vdd_mv: 12'd480, vbn_mv: 12'sd300,
                                          vbp_mv: -12'sd300, freq_100khz: 12'd125};
  localparam vf_point_t VF_HP_DEFAULT = '{vdd_mv: 12'd800, vbn_mv: 12'sd0,
                                          vbp_mv: 12'sd0, freq_100khz: 12'd1000};

endpackage
