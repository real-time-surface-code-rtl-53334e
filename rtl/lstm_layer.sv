// lstm_layer: quantized single-layer LSTM (4 inputs, 32 hidden units) of
// one surface-code decoder, pipelined in the paper's first three stages.
//
// Per round n it computes, for every gate column,
//   z = W_x x_n + b + W_h h_{n-1}
//   i, f, o = sigmoid_q(z)   (clip(0.5 z + 0.5, 0, 1))
//   c~      = relu_q(z)      (clip(z, 0, 1))
//   c_n = f * c_{n-1} + i * c~,   h_n = o * clip(c_n, 0, 1)
// which is the paper's cell. The paper gives the stage latencies at 250 MHz:
// stage 1 (W_x x + b) 32 ns = 8 cycles, stage 2 (sum and activations) 16 ns
// = 4 cycles, stage 3 (state update) 24 ns = 6 cycles. Each stage here
// computes its result at its first clock edge and holds it while a valid
// token travels the rest of the stage, so the cycle counts match the paper;
// how the original spreads its DSP pipeline over those cycles is not given.
//
// Recurrent product ("memory update", runs beside the dense layer): after
// h_n leaves stage 3, W_h h_n is computed by a time-multiplexed MAC array of
// REC_COLS gate columns per cycle (128/4 = 32 cycles) followed by REC_PIPE
// register stages, so W_h h_n is complete 1 + 32 + 3 = 36 cycles after h_n
// enters stage 4 and the next round may enter 18 + 36 - 8 = 46 cycles after
// the previous one. The paper gives the resulting minimum input period, 184 ns
// = 46 cycles, but not how it arises; this schedule is this design's own and
// is sized to reproduce it: input_ready rises when W_h h_n will be complete
// by the time the next round leaves stage 1.
//
// Interface: input_valid/input_ready handshake, one round per transfer;
// input_first marks round 1 of a shot and starts from h = c = 0.
// stage2_valid, stage3_valid and stage4_valid pulse for one cycle when a
// round enters stage 2, 3 and 4 (names as in the paper's simulation trace);
// h_out holds h_n from the stage4_valid pulse until the next round's.
module lstm_layer
  import qec_pkg::*;
#(
  parameter int unsigned S1_CYC   = 8,   // stage 1 latency (paper: 32 ns)
  parameter int unsigned S2_CYC   = 4,   // stage 2 latency (paper: 16 ns)
  parameter int unsigned S3_CYC   = 6,   // stage 3 latency (paper: 24 ns)
  parameter int unsigned REC_COLS = 4,   // gate columns of W_h h per cycle
  parameter int unsigned REC_PIPE = 3    // register stages after the MACs
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           input_valid,
  input  logic           input_first,
  input  logic [NX-1:0]  input_data,
  output logic           input_ready,
  input  w_t             wx [NX][NG],
  input  w_t             wh [NH][NG],
  input  w_t             b  [NG],
  output logic           stage2_valid,
  output logic           stage3_valid,
  output logic           stage4_valid,
  output act_t           h_out [NH]
);

  localparam int unsigned N_GROUPS = NG / REC_COLS;
  localparam int unsigned REC_CYC  = N_GROUPS + REC_PIPE;   // W_h h latency
  localparam int unsigned GW = $clog2(N_GROUPS);

  logic accept;
  assign accept = input_valid && input_ready;

  // ---------------- valid tokens ----------------
  logic [S1_CYC-1:0] tok1;
  logic [S2_CYC-1:0] tok2;
  logic [S3_CYC-1:0] tok3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok1 <= '0; tok2 <= '0; tok3 <= '0;
    end else begin
      tok1 <= {tok1[S1_CYC-2:0], accept};
      tok2 <= {tok2[S2_CYC-2:0], stage2_valid};
      tok3 <= {tok3[S3_CYC-2:0], stage3_valid};
    end
  end
  assign stage2_valid = tok1[S1_CYC-1];
  assign stage3_valid = tok2[S2_CYC-1];
  assign stage4_valid = tok3[S3_CYC-1];

  // ---------------- stage 1: W_x x + b ----------------
  z_t   s1_z [NG];
  logic s1_first;
  always_ff @(posedge clk) begin
    if (accept) begin
      for (int g = 0; g < NG; g++) begin
        z_t acc;
        acc = z_t'(b[g]) <<< AF;
        for (int k = 0; k < NX; k++)
          if (input_data[k]) acc = acc + (z_t'(wx[k][g]) <<< AF);
        s1_z[g] <= acc;
      end
      s1_first <= input_first;
    end
  end

  // ---------------- recurrent product W_h h ----------------
  act_t rec_h [NH];                 // h_{n-1} held for the MAC array
  z_t   rec_z [NG];                 // W_h h_{n-1}
  logic           rec_run;
  logic [GW-1:0]  rec_grp;
  logic [REC_PIPE-1:0] rp_v;
  logic [GW-1:0]  rp_grp [REC_PIPE];
  z_t             rp_z   [REC_PIPE][REC_COLS];
  logic [$clog2(REC_CYC+1)-1:0] rec_left;   // cycles until rec_z is complete

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rec_run  <= 1'b0;
      rec_grp  <= '0;
      rp_v     <= '0;
      rec_left <= '0;
    end else begin
      if (stage4_valid) begin
        rec_run  <= 1'b1;
        rec_grp  <= '0;
        rec_left <= ($bits(rec_left))'(REC_CYC);
      end else begin
        if (rec_left != 0) rec_left <= rec_left - 1'b1;
        if (rec_run) begin
          rec_grp <= rec_grp + 1'b1;
          if (rec_grp == GW'(N_GROUPS - 1)) rec_run <= 1'b0;
        end
      end
      rp_v <= {rp_v[REC_PIPE-2:0], rec_run};
    end
  end

  always_ff @(posedge clk) begin
    if (stage4_valid) rec_h <= h_out;
    // MAC array: REC_COLS dot products of length NH per cycle
    for (int j = 0; j < REC_COLS; j++) begin
      z_t acc;
      acc = '0;
      for (int k = 0; k < NH; k++)
        acc = acc + z_t'(wh[k][int'(rec_grp) * REC_COLS + j]) * z_t'({1'b0, rec_h[k]});
      rp_z[0][j] <= acc;
    end
    rp_grp[0] <= rec_grp;
    for (int p = 1; p < REC_PIPE; p++) begin
      rp_z[p]   <= rp_z[p-1];
      rp_grp[p] <= rp_grp[p-1];
    end
    if (rp_v[REC_PIPE-1])
      for (int j = 0; j < REC_COLS; j++)
        rec_z[int'(rp_grp[REC_PIPE-1]) * REC_COLS + j] <= rp_z[REC_PIPE-1][j];
  end

  // ---------------- stage 2: sum and activations ----------------
  act_t gate [4][NH];
  always_ff @(posedge clk) begin
    if (stage2_valid) begin
      for (int q = 0; q < 4; q++)
        for (int u = 0; u < NH; u++) begin
          z_t z;
          z = s1_z[q*NH + u] + (s1_first ? z_t'(0) : rec_z[q*NH + u]);
          gate[q][u] <= (q == GATE_C) ? relu_q(z) : sigmoid_q(z);
        end
    end
  end

  // ---------------- stage 3: cell and hidden state ----------------
  logic  s2_first;
  cell_t c_state [NH];
  always_ff @(posedge clk) begin
    if (stage2_valid) s2_first <= s1_first;
    if (stage3_valid) begin
      for (int u = 0; u < NH; u++) begin
        logic [AW+CW:0] sum;
        cell_t c_prev, c_new;
        act_t  c_clip;
        c_prev = s2_first ? cell_t'(0) : c_state[u];
        sum = ((AW+CW+1)'(gate[GATE_F][u]) * (AW+CW+1)'(c_prev)
             + (AW+CW+1)'(gate[GATE_I][u]) * (AW+CW+1)'(gate[GATE_C][u])) >> AF;
        c_new = (sum > (AW+CW+1)'({CW{1'b1}})) ? {CW{1'b1}} : cell_t'(sum);
        c_clip = (c_new > cell_t'(ACT_ONE)) ? act_t'(ACT_ONE) : act_t'(c_new);
        c_state[u] <= c_new;
        h_out[u]   <= act_t'(((2*AW)'(gate[GATE_O][u]) * (2*AW)'(c_clip)) >> AF);
      end
    end
  end

  // ---------------- input handshake ----------------
  // Free when no round is in stages 1-3 and W_h h will be ready by the time
  // a round accepted now reaches stage 2.
  assign input_ready = (tok1 == '0) && (tok2 == '0) && (tok3 == '0)
                       && !stage4_valid && (rec_left <= ($bits(rec_left))'(S1_CYC));

endmodule
