// qec_pkg: constants, types and arithmetic shared by the central feedback
// module (CFM) of a distance-3 rotated surface-code memory.
//
// Qubit numbering follows the device layout: data qubits D1..D9 are bits
// 0..8 of a data vector, ancillas A1..A8 are bits 0..7 of an ancilla vector.
// Z-type stabilizers are measured by A2, A4, A5, A7 and X-type ones by A1,
// A3, A6, A8, as the paper states. The data qubits that each ancilla checks
// are this design's reading of the printed layout (A1 above D1/D2, A4 right
// of D3/D6, ...); the paper's text confirms A2 = D1 D2 D4 D5 and
// A4*A7 = D3 D5 D8 D9. Z_L = Z1 Z2 Z3 (text) and X_L = X3 X6 X9 (layout).
//
// The neural-network arithmetic is fixed point. Weights are 6-bit signed
// integers (paper); their scale (WF = 4 fractional bits) is this design's
// choice. Gate outputs and hidden states lie in [0,1] (paper) and are kept
// unsigned with AF = 7 fractional bits, so 1.0 = 128. Pre-activations carry
// WF+AF = 11 fractional bits. The cell state is unsigned (all its terms are
// non-negative) and saturates at CW bits.
package qec_pkg;

  // ---------------- code geometry ----------------
  localparam int unsigned N_ANC  = 8;
  localparam int unsigned N_DATA = 9;
  localparam int unsigned N_QUBITS = N_ANC + N_DATA;   // 17
  localparam int unsigned N_SYN  = 4;                  // stabilizers per type

  typedef logic [N_ANC-1:0]    anc_vec_t;
  typedef logic [N_DATA-1:0]   data_vec_t;
  typedef logic [N_QUBITS-1:0] qubit_vec_t;   // [7:0] ancillas, [16:8] data
  typedef logic [N_SYN-1:0]    syn_vec_t;

  // logical basis of preparation and final measurement
  typedef enum logic {BASIS_Z = 1'b0, BASIS_X = 1'b1} basis_e;

  // kind of a measurement event
  typedef enum logic {EV_ROUND = 1'b0, EV_FINAL = 1'b1} event_e;

  // data qubits checked by each ancilla, bit d-1 for Dd
  localparam data_vec_t STAB_SUPPORT [N_ANC] = '{
    9'b0_0000_0011,   // A1: D1 D2          (X)
    9'b0_0001_1011,   // A2: D1 D2 D4 D5    (Z)
    9'b0_0011_0110,   // A3: D2 D3 D5 D6    (X)
    9'b0_0010_0100,   // A4: D3 D6          (Z)
    9'b0_0100_1000,   // A5: D4 D7          (Z)
    9'b0_1101_1000,   // A6: D4 D5 D7 D8    (X)
    9'b1_1011_0000,   // A7: D5 D6 D8 D9    (Z)
    9'b1_1000_0000    // A8: D8 D9          (X)
  };

  localparam anc_vec_t Z_TYPE_MASK = 8'b0101_1010;  // A2 A4 A5 A7
  localparam anc_vec_t X_TYPE_MASK = 8'b1010_0101;  // A1 A3 A6 A8

  // decoder input order: ascending ancilla number
  localparam int unsigned Z_SYN_IDX [N_SYN] = '{1, 3, 4, 6};
  localparam int unsigned X_SYN_IDX [N_SYN] = '{0, 2, 5, 7};

  localparam data_vec_t ZL_SUPPORT = 9'b0_0000_0111;  // Z_L = Z1 Z2 Z3
  localparam data_vec_t XL_SUPPORT = 9'b1_0010_0100;  // X_L = X3 X6 X9

  // ancillas whose next syndrome is flipped by a feedback correction
  localparam int unsigned ANC_FLIPPED_BY_X_D1 = 1;    // A2
  localparam int unsigned ANC_FLIPPED_BY_Z_D9 = 7;    // A8

  // branch-control word for the AWG backplanes
  typedef struct packed {
    logic x_on_d1;   // apply X on D1: flips Z_L
    logic z_on_d9;   // apply Z on D9: flips X_L
  } branch_ctrl_t;

  // ---------------- neural network ----------------
  localparam int unsigned NX = 4;           // inputs per round
  localparam int unsigned NH = 32;          // LSTM hidden units
  localparam int unsigned NG = 4 * NH;      // gate columns i,f,c,o = 128
  localparam int unsigned WW = 6;           // weight width
  localparam int unsigned WF = 4;           // weight fractional bits
  localparam int unsigned AW = 8;           // activation width, 0..128
  localparam int unsigned AF = 7;           // activation fractional bits
  localparam int unsigned CW = 12;          // cell-state width (frac AF)
  localparam int unsigned ZW = 20;          // pre-activation width (frac WF+AF)

  localparam int unsigned ACT_ONE = 1 << AF;          // 1.0 in activation units
  localparam int unsigned ACT_HALF = 1 << (AF - 1);   // 0.5

  typedef logic signed [WW-1:0] w_t;
  typedef logic [AW-1:0]        act_t;
  typedef logic [CW-1:0]        cell_t;
  typedef logic signed [ZW-1:0] z_t;

  // gate column blocks (Keras order)
  localparam int unsigned GATE_I = 0;
  localparam int unsigned GATE_F = 1;
  localparam int unsigned GATE_C = 2;
  localparam int unsigned GATE_O = 3;

  // weight address map of one decoder
  localparam int unsigned ADDR_WX = 0;                  // kernel [NX][NG]
  localparam int unsigned ADDR_WH = ADDR_WX + NX * NG;  // recurrent kernel [NH][NG]
  localparam int unsigned ADDR_B  = ADDR_WH + NH * NG;  // bias [NG]
  localparam int unsigned ADDR_WD = ADDR_B + NG;        // dense kernel [NH]
  localparam int unsigned ADDR_BD = ADDR_WD + NH;       // dense bias
  localparam int unsigned N_WEIGHTS = ADDR_BD + 1;      // 4769
  localparam int unsigned WADDR_W = $clog2(N_WEIGHTS);  // 13

  // piecewise-linear sigmoid clip(0.5 z + 0.5, 0, 1), z with WF+AF fraction bits
  function automatic act_t sigmoid_q(input z_t z);
    z_t t;
    t = (z >>> 1) + z_t'(1 << (WF + AF - 1));
    if (t < 0) return '0;
    if (t > z_t'(1 << (WF + AF))) return act_t'(ACT_ONE);
    return act_t'(t >>> WF);
  endfunction

  // clipped ReLU clip(z, 0, 1)
  function automatic act_t relu_q(input z_t z);
    if (z < 0) return '0;
    if (z > z_t'(1 << (WF + AF))) return act_t'(ACT_ONE);
    return act_t'(z >>> WF);
  endfunction

endpackage
