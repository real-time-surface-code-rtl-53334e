// tb_dense_layer: random hidden states and dense weights; checks y_n, the
// y_n > 0.5 decision (including values right at 0.5) and the 13-cycle
// (52 ns) latency against the reference model.
module tb_dense_layer;
  import qec_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic in_valid = 0, output_valid, output_logic_flip;
  act_t h_in [NH];
  w_t wd [NH];
  w_t bd;
  act_t y_out;

  dense_layer dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  weights_t w;
  state_t st;
  int nhalf = 0, nflip = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int t0, to, yref;
      ref_random(w, (n % 3 == 0) ? 32 : 4);
      for (int k = 0; k < NH; k++) begin
        st.h[k] = (n % 5 == 0) ? 0 : int'($urandom_range(128));
        h_in[k] = act_t'(st.h[k]);
        wd[k] = w_t'(w.wd[k]);
      end
      if (n % 5 == 0) w.bd = int'($urandom_range(2)) - 1;   // y at or near 0.5
      bd = w_t'(w.bd);
      @(negedge clk) in_valid = 1; t0 = cyc;
      @(negedge clk) in_valid = 0;
      to = -1;
      for (int k = 1; k <= 20; k++) begin
        if (output_valid && to < 0) to = cyc - t0;
        @(negedge clk);
      end
      yref = ref_dense(w, st);
      if (yref == 64) nhalf++;
      if (yref > 64) nflip++;
      check(to == 13, $sformatf("output_valid at %0d", to));
      check(int'(y_out) == yref, $sformatf("y %0d vs %0d", y_out, yref));
      check(output_logic_flip == (yref > 64), "flip decision");
    end
    check(nhalf > 0 && nflip > 0, "threshold cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
