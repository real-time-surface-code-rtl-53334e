// tb_weight_store: writes random words to every address, checks read-back
// and that each word appears at its place in the parallel outputs, then
// rewrites a few words (hot update) and checks them again.
module tb_weight_store;
  import qec_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic we = 0;
  logic [WADDR_W-1:0] waddr = '0, raddr = '0;
  w_t wdata = '0, rdata;
  w_t wx [NX][NG];
  w_t wh [NH][NG];
  w_t b  [NG];
  w_t wd [NH];
  w_t bd;

  weight_store dut (.*);

  int checks = 0, failures = 0;
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

  weights_t w;

  task automatic compare_all(input string when);
    int bad;
    bad = 0;
    for (int k = 0; k < NX; k++) for (int g = 0; g < NG; g++) if (int'(wx[k][g]) != w.wx[k][g]) bad++;
    check(bad == 0, {when, " W_x"});
    bad = 0;
    for (int k = 0; k < NH; k++) for (int g = 0; g < NG; g++) if (int'(wh[k][g]) != w.wh[k][g]) bad++;
    check(bad == 0, {when, " W_h"});
    bad = 0;
    for (int g = 0; g < NG; g++) if (int'(b[g]) != w.b[g]) bad++;
    check(bad == 0, {when, " b"});
    bad = 0;
    for (int k = 0; k < NH; k++) if (int'(wd[k]) != w.wd[k]) bad++;
    check(bad == 0, {when, " W_d"});
    check(int'(bd) == w.bd, {when, " b_d"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(wh[5][7] == '0 && bd == '0, "cleared by reset");
    ref_random(w, 32);
    for (int a = 0; a < N_WEIGHTS; a++) begin
      @(negedge clk) we = 1; waddr = WADDR_W'(a); wdata = w_t'(ref_weight_at(w, a));
    end
    @(negedge clk) we = 0;
    compare_all("after load");
    for (int a = 0; a < N_WEIGHTS; a += 7) begin
      raddr = WADDR_W'(a);
      #1 check(int'(rdata) == ref_weight_at(w, a), $sformatf("readback %0d", a));
    end
    // hot update of a few words
    for (int n = 0; n < 20; n++) begin
      int a, v;
      a = int'($urandom_range(N_WEIGHTS - 1));
      v = int'($urandom_range(63)) - 32;
      if (a < 512) w.wx[a / NG][a % NG] = v;
      else if (a < 4608) w.wh[(a - 512) / NG][(a - 512) % NG] = v;
      else if (a < 4736) w.b[a - 4608] = v;
      else if (a < 4768) w.wd[a - 4736] = v;
      else w.bd = v;
      @(negedge clk) we = 1; waddr = WADDR_W'(a); wdata = w_t'(v);
    end
    @(negedge clk) we = 0;
    compare_all("after hot update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
