// syndrome_calc: turns one measurement event into error syndromes for the
// X-type and Z-type decoders, in a fixed 5-cycle (20 ns) pipeline.
//
// Stabilizer rounds (the circuit has no ancilla reset, as in the paper):
//   s_n = a_n XOR a_{n-1},   x_n = s_n XOR s_{n-1},   a_0 = 0.
// In round 1 the stabilizers of the prepared basis start from s_0 = 0 and
// the complementary ones from s_0 = s_1 (their first syndrome is 0).
// Final logical measurement: the data-qubit outcomes give s_m of every
// stabilizer of the measured basis (parity of its data qubits) and
// x_m = s_n XOR s_m against the last ancilla round; only the decoder of that
// type gets a syndrome. A feedback correction (X on D1, Z on D9) flips the
// next syndrome of A2 or A8; cancel_x_d1 / cancel_z_d9, sampled with the
// event, XOR it away and cancel_taken acknowledges them. All this is the
// paper's; the flip of A8 by the Z on D9 is this design's extension of the
// paper's A2 example to the other correction.
//
// Pipeline (registers): 1 capture, 2 stabilizers, 3 syndromes, 4 feedback
// cancellation, 5 split per decoder. Outputs are valid for one cycle,
// 5 cycles after in_valid. det_events (all 8 syndromes) is for recording
// detection events. fb_round is a tag carried alongside the event.
module syndrome_calc
  import qec_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  event_e    in_kind,
  input  logic      in_first,
  input  logic      in_fb_round,
  input  basis_e    basis,
  input  anc_vec_t  anc,
  input  data_vec_t data,
  input  logic      cancel_x_d1,
  input  logic      cancel_z_d9,
  output logic      cancel_taken,
  // to the decoders
  output logic      syn_z_valid,
  output syn_vec_t  syn_z,
  output logic      syn_x_valid,
  output syn_vec_t  syn_x,
  output logic      syn_first,
  output logic      syn_final,
  output logic      syn_fb_round,
  output anc_vec_t  det_events
);

  typedef struct packed {
    logic      v;
    event_e    kind;
    logic      first;
    logic      fb;
    basis_e    basis;
    logic      c_a2;
    logic      c_a8;
  } tag_t;

  tag_t      t1, t2, t3, t4;
  anc_vec_t  anc1;
  data_vec_t data1;
  anc_vec_t  s2, x3, x4;
  anc_vec_t  a_prev, s_prev;   // state across rounds

  function automatic anc_vec_t basis_mask(input basis_e bs);
    return (bs == BASIS_Z) ? Z_TYPE_MASK : X_TYPE_MASK;
  endfunction

  assign cancel_taken = in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0;
      a_prev <= '0; s_prev <= '0;
      syn_z_valid <= 1'b0; syn_x_valid <= 1'b0;
      syn_z <= '0; syn_x <= '0;
      syn_first <= 1'b0; syn_final <= 1'b0; syn_fb_round <= 1'b0;
      det_events <= '0;
      anc1 <= '0; data1 <= '0; s2 <= '0; x3 <= '0; x4 <= '0;
    end else begin
      // 1: capture
      t1 <= '{v: in_valid, kind: in_kind, first: in_first, fb: in_fb_round,
              basis: basis, c_a2: cancel_x_d1, c_a8: cancel_z_d9};
      if (in_valid) begin
        anc1  <= anc;
        data1 <= data;
      end

      // 2: stabilizer values
      t2 <= t1;
      if (t1.v) begin
        if (t1.kind == EV_ROUND) begin
          s2     <= anc1 ^ (t1.first ? anc_vec_t'(0) : a_prev);
          a_prev <= anc1;
        end else begin
          for (int i = 0; i < N_ANC; i++)
            s2[i] <= basis_mask(t1.basis)[i] & (^(data1 & STAB_SUPPORT[i]));
        end
      end

      // 3: syndromes
      t3 <= t2;
      if (t2.v) begin
        if (t2.kind == EV_ROUND) begin
          if (t2.first)
            x3 <= s2 & basis_mask(t2.basis);       // s_0 = 0 or s_0 = s_1
          else
            x3 <= s2 ^ s_prev;
          s_prev <= s2;
        end else begin
          x3 <= (s2 ^ s_prev) & basis_mask(t2.basis);
        end
      end

      // 4: cancel syndromes caused by feedback corrections
      t4 <= t3;
      if (t3.v) begin
        anc_vec_t x;
        x = x3;
        x[ANC_FLIPPED_BY_X_D1] = x[ANC_FLIPPED_BY_X_D1] ^ t3.c_a2;
        x[ANC_FLIPPED_BY_Z_D9] = x[ANC_FLIPPED_BY_Z_D9] ^ t3.c_a8;
        if (t3.kind == EV_FINAL) x = x & basis_mask(t3.basis);
        x4 <= x;
      end

      // 5: split per decoder
      syn_z_valid  <= t4.v && (t4.kind == EV_ROUND || t4.basis == BASIS_Z);
      syn_x_valid  <= t4.v && (t4.kind == EV_ROUND || t4.basis == BASIS_X);
      syn_first    <= t4.v && t4.first;
      syn_final    <= t4.v && (t4.kind == EV_FINAL);
      syn_fb_round <= t4.v && t4.fb;
      if (t4.v) begin
        for (int k = 0; k < N_SYN; k++) begin
          syn_z[k] <= x4[Z_SYN_IDX[k]];
          syn_x[k] <= x4[X_SYN_IDX[k]];
        end
        det_events <= x4;
      end
    end
  end

endmodule
