// tb_lstm_layer: drives the LSTM layer with random weights and syndromes and
// compares h_n of every round with the integer reference model; checks the
// stage timing (8/12/18 cycles) and the 46-cycle input period.
module tb_lstm_layer;
  import qec_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic input_valid = 0, input_first = 0, input_ready;
  logic [NX-1:0] input_data = '0;
  logic stage2_valid, stage3_valid, stage4_valid;
  w_t wx [NX][NG];
  w_t wh [NH][NG];
  w_t b  [NG];
  act_t h_out [NH];

  lstm_layer dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  weights_t w;
  state_t st;

  task automatic apply_weights(input int lim);
    ref_random(w, lim);
    for (int k = 0; k < NX; k++) for (int g = 0; g < NG; g++) wx[k][g] = w_t'(w.wx[k][g]);
    for (int k = 0; k < NH; k++) for (int g = 0; g < NG; g++) wh[k][g] = w_t'(w.wh[k][g]);
    for (int g = 0; g < NG; g++) b[g] = w_t'(w.b[g]);
  endtask

  int nz = 0, nsat = 0;
  initial begin
    apply_weights(6);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int shot = 0; shot < 3; shot++) begin
      if (shot == 2) apply_weights(32);
      for (int r = 0; r < 10; r++) begin
        int t0, t4, tr;
        logic [NX-1:0] x;
        bit ok;
        x = NX'($urandom);
        @(negedge clk);
        while (!input_ready) @(negedge clk);
        input_valid = 1; input_data = x; input_first = (r == 0);
        t0 = cyc;
        @(negedge clk) input_valid = 0;
        t4 = -1; tr = -1;
        for (int k = 1; k <= 50; k++) begin
          if (stage4_valid && t4 < 0) t4 = cyc - t0;
          if (input_ready && tr < 0) tr = cyc - t0;
          @(negedge clk);
        end
        st = ref_step(w, x, r == 0, st);
        ok = 1;
        for (int u = 0; u < NH; u++) begin
          if (int'(h_out[u]) != st.h[u]) ok = 0;
          if (st.h[u] == 0) nz++;
          if (st.h[u] == 128) nsat++;
        end
        check(ok, $sformatf("h_n shot %0d round %0d", shot, r));
        check(t4 == 18, $sformatf("h_n out at cycle %0d", t4));
        check(tr == 46, $sformatf("input_ready again at %0d", tr));
      end
    end
    check(nz < 30 * NH, "hidden state not all zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
