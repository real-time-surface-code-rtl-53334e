// cfm_top: decoding and feedback logic of the central feedback module (CFM)
// for real-time error correction of a distance-3 surface-code logical qubit.
//
// Dataflow per measurement event (stabilizer round or final logical
// measurement), 250 MHz clock:
//   DAQ links -> qubit_state_aggregator -> syndrome_calc (5 cycles, 20 ns)
//     -> Z-type and X-type nn_decoder in parallel (31 cycles, 124 ns)
//     -> pauli_frame_unit (1 cycle, 4 ns) -> branch control to the AWGs
//     -> logical_meas_result (final measurement only).
// The event that completes aggregation in cycle t produces branch_valid in
// cycle t + 37 (148 ns, the paper's decoder subtotal). round_controller
// tags events with the schedule (first round, feedback round, final
// measurement). This structure and the latencies are the paper's; the DAQ
// and backplane links themselves are outside this module: their payloads
// appear as plain ports (link_* in, branch_* out).
//
// Weights: w_sel chooses the decoder (0: Z-type, 1: X-type) that w_we
// writes; both may be rewritten between or during shots.
// Status: overrun is set, and stays set, when syndromes arrive while a
// decoder is still busy (events closer than 184 ns); dup_error comes from
// the aggregator.
module cfm_top
  import qec_pkg::*;
#(
  parameter int unsigned N_LINKS = 12,   // DAQ links (paper: 12)
  parameter int unsigned RW      = 8     // round-counter width
)(
  input  logic               clk,
  input  logic               rst_n,
  // DAQ links
  input  qubit_vec_t         link_mask  [N_LINKS],
  input  logic               link_valid [N_LINKS],
  input  qubit_vec_t         link_data  [N_LINKS],
  // schedule configuration
  input  logic               shot_start,
  input  basis_e             basis,
  input  logic [RW-1:0]      n_rounds,
  input  logic [RW-1:0]      fb_period,
  input  logic               fb_final_en,
  input  logic               final_pfu_en,
  // weight update port
  input  logic               w_we,
  input  logic               w_sel,
  input  logic [WADDR_W-1:0] w_addr,
  input  w_t                 w_data,
  input  logic [WADDR_W-1:0] w_raddr,
  output w_t                 w_rdata,
  // branch control to the AWG backplanes
  output logic               branch_valid,
  output branch_ctrl_t       branch,
  // logical measurement result
  output logic               result_valid,
  output logic               result_raw,
  output logic               result_corrected,
  // detection events and decoder outputs, for recording
  output logic               det_valid,
  output anc_vec_t           det_events,
  output logic               dec_z_valid,
  output logic               dec_z_flip,
  output logic               dec_x_valid,
  output logic               dec_x_flip,
  // status
  output logic               overrun,
  output logic               dup_error
);

  // aggregation and schedule
  logic       ev_valid, ev_first, ev_fb;
  event_e     ev_kind;
  qubit_vec_t ev_state;
  logic [RW-1:0] round_idx;

  qubit_state_aggregator #(.N_LINKS(N_LINKS)) u_agg (
    .clk, .rst_n, .link_mask, .link_valid, .link_data,
    .out_valid(ev_valid), .out_state(ev_state), .dup_error
  );

  round_controller #(.RW(RW)) u_sched (
    .clk, .rst_n, .shot_start, .n_rounds, .fb_period, .fb_final_en,
    .ev_valid, .ev_kind, .ev_first, .ev_fb_round(ev_fb), .round_idx
  );

  // syndrome calculation
  logic     cancel_x_d1, cancel_z_d9, cancel_taken;
  logic     syn_z_valid, syn_x_valid, syn_first, syn_final, syn_fb;
  syn_vec_t syn_z, syn_x;

  syndrome_calc u_syn (
    .clk, .rst_n,
    .in_valid(ev_valid), .in_kind(ev_kind), .in_first(ev_first), .in_fb_round(ev_fb),
    .basis, .anc(ev_state[N_ANC-1:0]), .data(ev_state[N_QUBITS-1:N_ANC]),
    .cancel_x_d1, .cancel_z_d9, .cancel_taken,
    .syn_z_valid, .syn_z, .syn_x_valid, .syn_x,
    .syn_first, .syn_final, .syn_fb_round(syn_fb), .det_events
  );
  assign det_valid = syn_z_valid || syn_x_valid;

  // decoders
  logic z_ready, x_ready;
  logic z_s2, z_s3, z_s4, x_s2, x_s3, x_s4;
  act_t z_y, x_y;
  w_t   z_rdata, x_rdata;

  nn_decoder u_dec_z (
    .clk, .rst_n,
    .input_valid(syn_z_valid), .input_first(syn_first), .input_data(syn_z),
    .input_ready(z_ready),
    .stage2_valid(z_s2), .stage3_valid(z_s3), .stage4_valid(z_s4),
    .output_valid(dec_z_valid), .output_logic_flip(dec_z_flip), .y_out(z_y),
    .w_we(w_we && !w_sel), .w_addr, .w_data, .w_raddr, .w_rdata(z_rdata)
  );

  nn_decoder u_dec_x (
    .clk, .rst_n,
    .input_valid(syn_x_valid), .input_first(syn_first), .input_data(syn_x),
    .input_ready(x_ready),
    .stage2_valid(x_s2), .stage3_valid(x_s3), .stage4_valid(x_s4),
    .output_valid(dec_x_valid), .output_logic_flip(dec_x_flip), .y_out(x_y),
    .w_we(w_we && w_sel), .w_addr, .w_data, .w_raddr, .w_rdata(x_rdata)
  );

  assign w_rdata = w_sel ? x_rdata : z_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) overrun <= 1'b0;
    else if ((syn_z_valid && !z_ready) || (syn_x_valid && !x_ready)) overrun <= 1'b1;
  end

  // Pauli frame and branch control
  logic frame_zl, frame_xl, final_done;

  pauli_frame_unit u_pfu (
    .clk, .rst_n,
    .syn_valid(det_valid), .syn_first, .syn_final, .syn_fb_round(syn_fb),
    .dec_z_valid, .dec_z_flip, .dec_x_valid, .dec_x_flip,
    .branch_valid, .branch,
    .frame_zl, .frame_xl, .final_done,
    .cancel_x_d1, .cancel_z_d9, .cancel_taken
  );

  logical_meas_result u_result (
    .clk, .rst_n,
    .ev_valid, .ev_kind, .basis, .data(ev_state[N_QUBITS-1:N_ANC]),
    .final_pfu_en, .final_done, .frame_zl, .frame_xl,
    .result_valid, .result_raw, .result_corrected
  );

endmodule
