// tb_syndrome_calc: random shots in both bases. A model kept in the
// testbench (stabilizer of each ancilla from its listed data qubits) gives
// the expected syndromes; checks the 5-cycle (20 ns) latency, the first-round
// rule, the final-measurement syndromes, which decoder gets a syndrome, and
// the cancellation of syndromes flipped by feedback corrections.
module tb_syndrome_calc;
  import qec_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic in_valid = 0, in_first = 0, in_fb_round = 0;
  event_e in_kind = EV_ROUND;
  basis_e basis = BASIS_Z;
  anc_vec_t anc = '0;
  data_vec_t data = '0;
  logic cancel_x_d1 = 0, cancel_z_d9 = 0, cancel_taken;
  logic syn_z_valid, syn_x_valid, syn_first, syn_final, syn_fb_round;
  syn_vec_t syn_z, syn_x;
  anc_vec_t det_events;

  syndrome_calc dut (.*);

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

  // data qubits (1-based) checked by ancilla A1..A8
  int supp [8][4] = '{'{1,2,0,0}, '{1,2,4,5}, '{2,3,5,6}, '{3,6,0,0},
                      '{4,7,0,0}, '{4,5,7,8}, '{5,6,8,9}, '{8,9,0,0}};
  bit is_z [8] = '{0,1,0,1,1,0,1,0};

  bit a_p [8], s_p [8];
  int ncancel = 0;

  task automatic event_check(input bit final_ev, input bit first, input basis_e bs,
                             input bit c1, input bit c8);
    bit s [8], x [8], a [8], d [9], want_z, want_x;
    int t0, tv;
    anc_vec_t av; data_vec_t dv;
    av = anc_vec_t'($urandom); dv = data_vec_t'($urandom);
    for (int i = 0; i < 8; i++) a[i] = av[i];
    for (int i = 0; i < 9; i++) d[i] = dv[i];
    for (int i = 0; i < 8; i++) begin
      bit mine;
      mine = (is_z[i] == (bs == BASIS_Z));
      if (!final_ev) begin
        s[i] = a[i] ^ (first ? 1'b0 : a_p[i]);
        x[i] = (first && !mine) ? 1'b0 : s[i] ^ (first ? 1'b0 : s_p[i]);
      end else begin
        bit sm;
        sm = 0;
        for (int k = 0; k < 4; k++) if (supp[i][k] != 0) sm ^= d[supp[i][k] - 1];
        x[i] = mine ? (sm ^ s_p[i]) : 1'b0;
      end
    end
    if (c1 && (!final_ev || bs == BASIS_Z)) x[1] ^= 1;
    if (c8 && (!final_ev || bs == BASIS_X)) x[7] ^= 1;
    if (!final_ev) begin a_p = a; for (int i = 0; i < 8; i++) s_p[i] = s[i]; end
    want_z = !final_ev || bs == BASIS_Z;
    want_x = !final_ev || bs == BASIS_X;
    @(negedge clk);
    in_valid = 1; in_kind = final_ev ? EV_FINAL : EV_ROUND; in_first = first;
    in_fb_round = c1; basis = bs; anc = av; data = dv;
    cancel_x_d1 = c1; cancel_z_d9 = c8;
    t0 = cyc;
    #1 check(cancel_taken, "cancel_taken with the event");
    @(negedge clk);
    in_valid = 0; cancel_x_d1 = 0; cancel_z_d9 = 0;
    tv = -1;
    for (int k = 1; k <= 8; k++) begin
      if ((syn_z_valid || syn_x_valid) && tv < 0) begin
        tv = cyc - t0;
        check(syn_z_valid == want_z && syn_x_valid == want_x, "decoder selection");
        check(syn_final == final_ev && syn_first == first, "tags");
        check(syn_fb_round == c1, "fb tag carried");
        check(syn_z == {x[6], x[4], x[3], x[1]}, $sformatf("Z syndromes %b", syn_z));
        check(syn_x == {x[7], x[5], x[2], x[0]}, $sformatf("X syndromes %b", syn_x));
      end
      @(negedge clk);
    end
    check(tv == 5, $sformatf("latency %0d cycles", tv));
    if (c1 || c8) ncancel++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int shot = 0; shot < 40; shot++) begin
      basis_e bs;
      int nr;
      bs = basis_e'(shot % 2);
      nr = 1 + int'($urandom_range(6));
      for (int r = 0; r < nr; r++)
        event_check(0, r == 0, bs, ($urandom_range(3) == 0), ($urandom_range(3) == 0));
      event_check(1, 0, bs, ($urandom_range(3) == 0), ($urandom_range(3) == 0));
    end
    check(ncancel > 0, "cancellations exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
