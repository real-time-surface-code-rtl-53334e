// dense_layer: the decoder's single-neuron output layer (paper stage 4).
//
// y_n = sigmoid_q(W_d h_n + b_d), with the same piecewise-linear sigmoid as
// the LSTM gates, and a logical flip is declared when y_n > 0.5 -- both as
// in the paper. The paper gives stage 4 as 52 ns = 13 cycles at 250 MHz. The
// dot product is taken at the edge that closes the in_valid cycle and the
// result is presented, with output_valid high for one cycle, S4_CYC cycles
// after in_valid. output_logic_flip and y_out hold until the next result.
module dense_layer
  import qec_pkg::*;
#(
  parameter int unsigned S4_CYC = 13    // stage 4 latency (paper: 52 ns)
)(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t h_in [NH],
  input  w_t   wd [NH],
  input  w_t   bd,
  output logic output_valid,
  output logic output_logic_flip,
  output act_t y_out
);

  logic [S4_CYC-1:0] tok;
  act_t y_calc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok <= '0;
      output_logic_flip <= 1'b0;
      y_out <= '0;
    end else begin
      tok <= {tok[S4_CYC-2:0], in_valid};
      if (tok[S4_CYC-2]) begin
        y_out <= y_calc;
        output_logic_flip <= (y_calc > act_t'(ACT_HALF));
      end
    end
  end
  assign output_valid = tok[S4_CYC-1];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      z_t acc;
      acc = z_t'(bd) <<< AF;
      for (int k = 0; k < NH; k++)
        acc = acc + z_t'(wd[k]) * z_t'({1'b0, h_in[k]});
      y_calc <= sigmoid_q(acc);
    end
  end

endmodule
