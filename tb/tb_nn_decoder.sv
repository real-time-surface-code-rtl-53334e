// tb_nn_decoder: self-checking test of one NN decoder.
// Loads random weights through the write port (and reads some back), then
// runs shots of random syndromes and compares y_n and the flip decision of
// every round with the integer reference model. Checks the paper's timing:
// stage2/3/4_valid 8/12/18 cycles and output_valid 31 cycles (124 ns) after
// input_valid, and input_ready returning exactly 46 cycles (184 ns) after
// an accepted round; a round offered earlier must be refused.
module tb_nn_decoder;
  import qec_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;   // 250 MHz

  logic input_valid = 0, input_first = 0;
  logic [NX-1:0] input_data = '0;
  logic input_ready, stage2_valid, stage3_valid, stage4_valid, output_valid, output_logic_flip;
  act_t y_out;
  logic w_we = 0;
  logic [WADDR_W-1:0] w_addr = '0, w_raddr = '0;
  w_t w_data = '0, w_rdata;

  nn_decoder dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  weights_t w;
  state_t st;

  task automatic load_weights(input int lim);
    ref_random(w, lim);
    for (int a = 0; a < N_WEIGHTS; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = WADDR_W'(a); w_data = w_t'(ref_weight_at(w, a));
    end
    @(negedge clk) w_we = 0;
    for (int n = 0; n < 40; n++) begin
      int a;
      a = (n < 5) ? N_WEIGHTS - 1 - n : int'($urandom_range(N_WEIGHTS - 1));
      w_raddr = WADDR_W'(a);
      #1 check(int'(w_rdata) == ref_weight_at(w, a), $sformatf("readback addr %0d", a));
    end
  endtask

  // run one round: offer x, check handshake, timing and result
  task automatic run_round(input logic [NX-1:0] x, input bit first);
    int t0, t2, t3, t4, to, tr;
    int y_ref;
    bit flip_seen;
    @(negedge clk);
    while (!input_ready) @(negedge clk);
    input_valid = 1; input_data = x; input_first = first;
    t0 = cyc;
    @(negedge clk);
    input_valid = 0;
    t2 = -1; t3 = -1; t4 = -1; to = -1; tr = -1;
    // offer a round too early: must be refused
    repeat (5) @(negedge clk);
    check(!input_ready, "input_ready low while busy");
    for (int k = 6; k <= 60; k++) begin
      if (stage2_valid && t2 < 0) t2 = cyc - t0;
      if (stage3_valid && t3 < 0) t3 = cyc - t0;
      if (stage4_valid && t4 < 0) t4 = cyc - t0;
      if (output_valid && to < 0) begin to = cyc - t0; flip_seen = output_logic_flip; end
      if (input_ready && tr < 0) tr = cyc - t0;
      @(negedge clk);
    end
    st = ref_step(w, x, first, st);
    y_ref = ref_dense(w, st);
    check(t2 == 8,  $sformatf("stage2_valid at %0d", t2));
    check(t3 == 12, $sformatf("stage3_valid at %0d", t3));
    check(t4 == 18, $sformatf("stage4_valid at %0d", t4));
    check(to == 31, $sformatf("output_valid at %0d (124 ns)", to));
    check(tr == 46, $sformatf("input_ready again at %0d (184 ns)", tr));
    check(int'(y_out) == y_ref, $sformatf("y %0d vs ref %0d", y_out, y_ref));
    check(flip_seen == (y_ref > 64), "logical flip decision");
  endtask

  int nflip = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int shot = 0; shot < 4; shot++) begin
      load_weights(shot == 3 ? 32 : 6);
      for (int r = 0; r < 12; r++) begin
        run_round(NX'($urandom), r == 0);
        if (output_logic_flip) nflip++;
      end
    end
    check(nflip > 0 && nflip < 48, $sformatf("both decisions seen (%0d flips)", nflip));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
