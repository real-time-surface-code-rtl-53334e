// nn_decoder: one FPGA neural-network decoder (X-type or Z-type) -- weight
// store, LSTM layer and dense layer.
//
// Each round the decoder takes the 4 error syndromes of its stabilizer type
// and, 124 ns (31 cycles at 250 MHz) later, reports whether it judges the
// logical observable to have flipped since the start of the shot. Latency
// per stage (8 + 4 + 6 + 13 cycles) and the 184 ns (46-cycle) minimum input
// period follow the paper; see lstm_layer for how the period arises here.
// Port names follow the paper's simulation trace: input_data, input_valid,
// stage2_valid .. stage4_valid, output_valid, output_logic_flip.
// input_ready is low while a previous round still occupies the core; a round
// offered then is not taken. The weight port writes one 6-bit word of the
// store (address map in qec_pkg) per cycle and may be used at any time.
module nn_decoder
  import qec_pkg::*;
#(
  parameter int unsigned S1_CYC = 8,
  parameter int unsigned S2_CYC = 4,
  parameter int unsigned S3_CYC = 6,
  parameter int unsigned S4_CYC = 13
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               input_valid,
  input  logic               input_first,
  input  logic [NX-1:0]      input_data,
  output logic               input_ready,
  output logic               stage2_valid,
  output logic               stage3_valid,
  output logic               stage4_valid,
  output logic               output_valid,
  output logic               output_logic_flip,
  output act_t               y_out,
  input  logic               w_we,
  input  logic [WADDR_W-1:0] w_addr,
  input  w_t                 w_data,
  input  logic [WADDR_W-1:0] w_raddr,
  output w_t                 w_rdata
);

  w_t   wx [NX][NG];
  w_t   wh [NH][NG];
  w_t   b  [NG];
  w_t   wd [NH];
  w_t   bd;
  act_t h  [NH];

  weight_store u_weights (
    .clk, .rst_n,
    .we(w_we), .waddr(w_addr), .wdata(w_data), .raddr(w_raddr), .rdata(w_rdata),
    .wx, .wh, .b, .wd, .bd
  );

  lstm_layer #(.S1_CYC(S1_CYC), .S2_CYC(S2_CYC), .S3_CYC(S3_CYC)) u_lstm (
    .clk, .rst_n,
    .input_valid, .input_first, .input_data, .input_ready,
    .wx, .wh, .b,
    .stage2_valid, .stage3_valid, .stage4_valid,
    .h_out(h)
  );

  dense_layer #(.S4_CYC(S4_CYC)) u_dense (
    .clk, .rst_n,
    .in_valid(stage4_valid), .h_in(h), .wd, .bd,
    .output_valid, .output_logic_flip, .y_out
  );

endmodule
