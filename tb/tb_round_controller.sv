// tb_round_controller: random schedules (rounds per shot, feedback period,
// final-round feedback); checks the tags of every event against the
// schedule, including restart after the final measurement and shot_start.
module tb_round_controller;
  import qec_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic shot_start = 0, fb_final_en = 0, ev_valid = 0;
  logic [7:0] n_rounds = 8'd1, fb_period = '0, round_idx;
  event_e ev_kind;
  logic ev_first, ev_fb_round;

  round_controller dut (.*);

  int checks = 0, failures = 0, nfb = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int shot = 0; shot < 60; shot++) begin
      int nr, m;
      bit ff, abort;
      nr = 1 + int'($urandom_range(12)); m = int'($urandom_range(4)); ff = $urandom;
      abort = (shot % 7 == 3);
      @(negedge clk);
      n_rounds = 8'(nr); fb_period = 8'(m); fb_final_en = ff;
      shot_start = 1;
      @(negedge clk) shot_start = 0;
      for (int e = 0; e <= nr; e++) begin
        bit fb_exp;
        fb_exp = (e < nr) && ((m != 0 && (e + 1) % m == 0) || (ff && e == nr - 1));
        #1;
        check(ev_kind == ((e == nr) ? EV_FINAL : EV_ROUND), $sformatf("kind of event %0d", e));
        check(ev_first == (e == 0), "first tag");
        check(ev_fb_round == fb_exp, $sformatf("fb tag event %0d (m=%0d)", e, m));
        if (fb_exp) nfb++;
        ev_valid = 1;
        @(negedge clk) ev_valid = 0;
        repeat (2) @(negedge clk);
        if (abort && e == nr / 2) break;   // shot_start must restart mid-shot
      end
    end
    check(nfb > 20, "feedback rounds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
