// qubit_state_aggregator: gathers the qubit-state bits that the DAQ links
// deliver for one measurement event into one 17-bit state vector.
//
// The paper has 12 DAQ links into the central feedback module and says the
// outcomes are aggregated before syndrome calculation; how is not given.
// Here each link delivers, with a one-cycle valid, a 17-bit word whose bits
// sit at their qubit positions ([7:0] ancillas A1..A8, [16:8] data D1..D9),
// and a per-link mask (configuration) says which qubits that link's DAQ
// reads; a link with an empty mask is unused. Bits are collected until every
// used link has reported once; out_valid then pulses in the cycle of the
// last report (no added register, so the 20 ns syndrome budget starts
// there) with the merged vector, and collection restarts. A link that
// reports twice in one event raises the sticky dup_error flag; its later
// word replaces the earlier.
module qubit_state_aggregator
  import qec_pkg::*;
#(
  parameter int unsigned N_LINKS = 12
)(
  input  logic       clk,
  input  logic       rst_n,
  input  qubit_vec_t link_mask  [N_LINKS],
  input  logic       link_valid [N_LINKS],
  input  qubit_vec_t link_data  [N_LINKS],
  output logic       out_valid,
  output qubit_vec_t out_state,
  output logic       dup_error
);

  logic [N_LINKS-1:0] used, got, got_next;
  qubit_vec_t         acc, acc_next;

  always_comb begin
    got_next = got;
    acc_next = acc;
    for (int l = 0; l < N_LINKS; l++) begin
      used[l] = |link_mask[l];
      if (link_valid[l] && used[l]) begin
        got_next[l] = 1'b1;
        acc_next = (acc_next & ~link_mask[l]) | (link_data[l] & link_mask[l]);
      end
    end
    out_valid = (used != '0) && ((got_next & used) == used);
    out_state = acc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0;
      acc <= '0;
      dup_error <= 1'b0;
    end else begin
      for (int l = 0; l < N_LINKS; l++)
        if (link_valid[l] && used[l] && got[l]) dup_error <= 1'b1;
      if (out_valid) begin
        got <= '0;
        acc <= '0;
      end else begin
        got <= got_next;
        acc <= acc_next;
      end
    end
  end

endmodule
