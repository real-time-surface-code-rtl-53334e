// tb_cfm_top: end-to-end test of the central feedback module at its default
// parameters. Random weights are loaded into both decoders; shots of random
// ancilla outcomes, delivered over all 12 DAQ links in random order, run in
// both bases with final-round feedback, periodic feedback every m rounds,
// and with and without the final Pauli-frame update. A model in the
// testbench (syndrome rules, integer LSTM reference, frame bookkeeping)
// predicts every decoder output, branch-control word and logical result.
// Checks: branch_valid 37 cycles (148 ns) after the last link report; the
// mechanisms -- feedback correction issued, artificial-syndrome
// cancellation, final PFU on and off, both bases, weight hot update,
// decoder overrun -- each happen at least once.
module tb_cfm_top;
  import qec_pkg::*;
  import nn_ref_pkg::*;

  localparam int L = 12;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  qubit_vec_t link_mask [L];
  logic       link_valid [L];
  qubit_vec_t link_data [L];
  logic shot_start = 0, fb_final_en = 0, final_pfu_en = 0;
  basis_e basis = BASIS_Z;
  logic [7:0] n_rounds = 8'd1, fb_period = '0;
  logic w_we = 0, w_sel = 0;
  logic [WADDR_W-1:0] w_addr = '0, w_raddr = '0;
  w_t w_data = '0, w_rdata;
  logic branch_valid, result_valid, result_raw, result_corrected, det_valid;
  branch_ctrl_t branch;
  anc_vec_t det_events;
  logic dec_z_valid, dec_z_flip, dec_x_valid, dec_x_flip, overrun, dup_error;

  cfm_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- model ----------------
  weights_t wz, wx;           // Z-type and X-type decoder weights
  state_t   stz, stx;
  int supp [8][4] = '{'{1,2,0,0}, '{1,2,4,5}, '{2,3,5,6}, '{3,6,0,0},
                      '{4,7,0,0}, '{4,5,7,8}, '{5,6,8,9}, '{8,9,0,0}};
  bit is_z [8] = '{0,1,0,1,1,0,1,0};
  bit a_p [8], s_p [8];
  bit est_z, est_x, app_z, app_x, pend_z, pend_x;

  int n_fire = 0, n_cancel = 0, n_pfu_on = 0, n_pfu_off = 0, n_basis_x = 0, n_basis_z = 0;
  int n_hot = 0, n_overrun = 0, n_periodic = 0, n_events = 0;

  task automatic load(input bit sel, ref weights_t w, input int lim);
    ref_random(w, lim);
    for (int a = 0; a < N_WEIGHTS; a++) begin
      @(negedge clk) w_we = 1; w_sel = sel; w_addr = WADDR_W'(a); w_data = w_t'(ref_weight_at(w, a));
    end
    @(negedge clk) w_we = 0;
  endtask

  // deliver one event over the links, in random order; returns the cycle of the last report
  task automatic deliver(input qubit_vec_t st, output int t_last);
    bit done [L];
    int left;
    left = 0;
    for (int l = 0; l < L; l++) begin done[l] = (link_mask[l] == '0); if (!done[l]) left++; end
    while (left > 0) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        link_valid[l] = 0;
        if (!done[l] && $urandom_range(2) == 0) begin
          link_valid[l] = 1; link_data[l] = st & link_mask[l]; done[l] = 1; left--;
        end
      end
      t_last = cyc;
    end
    @(negedge clk);
    for (int l = 0; l < L; l++) link_valid[l] = 0;
  endtask

  task automatic run_event(input bit fin, input bit first, input bit fb, input basis_e bs);
    bit a [8], d [9], s [8], x [8], yz, yx, runz, runx, fz, fx;
    qubit_vec_t st;
    int t_last, tb_v, tr;
    logic [3:0] xz, xx;
    st = qubit_vec_t'($urandom);
    for (int i = 0; i < 8; i++) a[i] = st[i];
    for (int i = 0; i < 9; i++) d[i] = st[8 + i];
    for (int i = 0; i < 8; i++) begin
      bit mine;
      mine = (is_z[i] == (bs == BASIS_Z));
      if (!fin) begin
        s[i] = a[i] ^ (first ? 1'b0 : a_p[i]);
        x[i] = (first && !mine) ? 1'b0 : s[i] ^ (first ? 1'b0 : s_p[i]);
      end else begin
        bit sm;
        sm = 0;
        for (int k = 0; k < 4; k++) if (supp[i][k] != 0) sm ^= d[supp[i][k] - 1];
        x[i] = mine ? (sm ^ s_p[i]) : 1'b0;
      end
    end
    if (pend_z && (!fin || bs == BASIS_Z)) begin x[1] ^= 1; n_cancel++; end
    if (pend_x && (!fin || bs == BASIS_X)) begin x[7] ^= 1; n_cancel++; end
    pend_z = 0; pend_x = 0;
    if (!fin) begin a_p = a; for (int i = 0; i < 8; i++) s_p[i] = s[i]; end
    runz = !fin || bs == BASIS_Z;
    runx = !fin || bs == BASIS_X;
    xz = {x[6], x[4], x[3], x[1]};
    xx = {x[7], x[5], x[2], x[0]};
    if (first) begin est_z = 0; est_x = 0; app_z = 0; app_x = 0; end
    if (runz) begin stz = ref_step(wz, xz, first, stz); est_z = (ref_dense(wz, stz) > 64); end
    if (runx) begin stx = ref_step(wx, xx, first, stx); est_x = (ref_dense(wx, stx) > 64); end
    fz = fb && (est_z ^ app_z);
    fx = fb && (est_x ^ app_x);

    deliver(st, t_last);
    tb_v = -1; tr = -1;
    for (int k = 0; k < 60; k++) begin
      if (dec_z_valid) check(runz && dec_z_flip == est_z, "Z decoder output");
      if (dec_x_valid) check(runx && dec_x_flip == est_x, "X decoder output");
      if (branch_valid && tb_v < 0) begin
        tb_v = cyc - t_last;
        check(branch.x_on_d1 == fz && branch.z_on_d9 == fx,
              $sformatf("branch word %b%b vs %b%b", branch.x_on_d1, branch.z_on_d9, fz, fx));
      end
      if (result_valid) begin
        bit raw;
        raw = (bs == BASIS_Z) ? (d[0] ^ d[1] ^ d[2]) : (d[2] ^ d[5] ^ d[8]);
        tr = cyc - t_last;
        check(result_raw == raw, "raw logical result");
        check(result_corrected == (raw ^ (final_pfu_en &&
              ((bs == BASIS_Z) ? (est_z ^ app_z) : (est_x ^ app_x)))), "corrected logical result");
      end
      @(negedge clk);
    end
    if (fb) check(tb_v == 37, $sformatf("branch control %0d cycles after the last report (148 ns)", tb_v));
    else    check(tb_v < 0, "no branch control outside feedback rounds");
    if (fin) check(tr == 38, $sformatf("logical result at %0d", tr));
    app_z ^= fz; app_x ^= fx;
    pend_z = fz; pend_x = fx;
    if (fz || fx) n_fire++;
    n_events++;
    repeat (int'($urandom_range(20))) @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < L; l++) begin link_valid[l] = 0; link_data[l] = '0; link_mask[l] = '0; end
    // qubits spread over the 12 links: link l reads qubits l and l+12
    for (int q = 0; q < N_QUBITS; q++) link_mask[q % L][q] = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(0, wz, 32);
    load(1, wx, 32);
    for (int shot = 0; shot < 24; shot++) begin
      basis_e bs;
      int nr;
      bs = basis_e'(shot % 2);
      nr = 1 + int'($urandom_range(9));
      @(negedge clk);
      basis = bs; n_rounds = 8'(nr);
      fb_period = (shot % 3 == 1) ? 8'(1 + $urandom_range(2)) : 8'd0;
      fb_final_en = (shot % 3 != 2);
      final_pfu_en = (shot % 4 < 2);
      if (fb_period != 0) n_periodic++;
      if (final_pfu_en) n_pfu_on++; else n_pfu_off++;
      if (bs == BASIS_X) n_basis_x++; else n_basis_z++;
      shot_start = 1;
      @(negedge clk) shot_start = 0;
      if (shot == 12) begin
        // hot update: new Z-decoder weights between shots
        load(0, wz, 32);
        n_hot++;
      end
      for (int r = 0; r <= nr; r++) begin
        bit fb;
        fb = (r < nr) && ((fb_period != 0 && (r + 1) % fb_period == 0) ||
                          (fb_final_en && r == nr - 1));
        run_event(r == nr, r == 0, fb, bs);
      end
      check(!overrun && !dup_error, "no overrun or duplicate in normal operation");
    end
    // overrun: two events closer than the decoder period
    begin
      int t;
      @(negedge clk) n_rounds = 8'd5; fb_period = '0; fb_final_en = 0; shot_start = 1;
      @(negedge clk) shot_start = 0;
      deliver(qubit_vec_t'($urandom), t);
      repeat (10) @(negedge clk);
      deliver(qubit_vec_t'($urandom), t);
      repeat (60) @(negedge clk);
      check(overrun, "overrun flagged");
      if (overrun) n_overrun++;
    end
    $display("events %0d, corrections %0d, cancellations %0d, periodic-feedback shots %0d, final PFU on/off %0d/%0d, bases Z/X %0d/%0d, hot updates %0d, overruns %0d",
             n_events, n_fire, n_cancel, n_periodic, n_pfu_on, n_pfu_off, n_basis_z, n_basis_x, n_hot, n_overrun);
    check(n_fire > 0, "feedback correction issued");
    check(n_cancel > 0, "artificial syndrome cancelled");
    check(n_periodic > 0, "periodic feedback schedule");
    check(n_pfu_on > 0 && n_pfu_off > 0, "final PFU on and off");
    check(n_basis_z > 0 && n_basis_x > 0, "both bases");
    check(n_hot > 0, "weight hot update");
    check(n_overrun > 0, "decoder overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
