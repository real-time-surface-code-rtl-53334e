// logical_meas_result: corrected result of the final logical measurement.
//
// The raw logical outcome is the parity of the data-qubit readout over the
// logical operator of the measured basis (Z_L = Z1 Z2 Z3 or X_L = X3 X6 X9).
// When the final Pauli-frame update (final PFU) is enabled the frame bit of
// that observable, updated with the decoder's verdict on the final
// syndromes, is XORed in; disabled, the raw outcome -- which already carries
// any physical feedback -- is reported. The paper states that the CFM
// combines the readout with the Pauli frame and can run with or without the
// final PFU; the parity formulation is the standard one. The raw parity is
// captured with the measurement event; result_valid pulses one cycle after
// final_done.
module logical_meas_result
  import qec_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ev_valid,
  input  event_e    ev_kind,
  input  basis_e    basis,
  input  data_vec_t data,
  input  logic      final_pfu_en,
  input  logic      final_done,
  input  logic      frame_zl,
  input  logic      frame_xl,
  output logic      result_valid,
  output logic      result_raw,
  output logic      result_corrected
);

  logic   raw_q;
  basis_e basis_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_q <= 1'b0;
      basis_q <= BASIS_Z;
      result_valid <= 1'b0;
      result_raw <= 1'b0;
      result_corrected <= 1'b0;
    end else begin
      if (ev_valid && ev_kind == EV_FINAL) begin
        raw_q   <= ^(data & ((basis == BASIS_Z) ? ZL_SUPPORT : XL_SUPPORT));
        basis_q <= basis;
      end
      result_valid <= final_done;
      if (final_done) begin
        result_raw       <= raw_q;
        result_corrected <= raw_q ^ (final_pfu_en &&
                            ((basis_q == BASIS_Z) ? frame_zl : frame_xl));
      end
    end
  end

endmodule
