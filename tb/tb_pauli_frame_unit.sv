// tb_pauli_frame_unit: random sequences of decoder outputs and schedule
// tags against a testbench model of the frame: checks frame bits, the
// branch-control words issued on feedback rounds (one cycle, 4 ns, after
// the decoder output), the applied-correction bookkeeping, cancel requests
// until taken, final_done and the clearing at the start of a shot.
module tb_pauli_frame_unit;
  import qec_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic syn_valid = 0, syn_first = 0, syn_final = 0, syn_fb_round = 0;
  logic dec_z_valid = 0, dec_z_flip = 0, dec_x_valid = 0, dec_x_flip = 0;
  logic branch_valid, frame_zl, frame_xl, final_done, cancel_x_d1, cancel_z_d9;
  logic cancel_taken = 0;
  branch_ctrl_t branch;

  pauli_frame_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit app_z, app_x, pend_z, pend_x;
  int nfire = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int shot = 0; shot < 60; shot++) begin
      int nr;
      nr = 1 + int'($urandom_range(8));
      for (int r = 0; r <= nr; r++) begin
        bit fin, fb, yz, yx, fz, fx, basis_x;
        fin = (r == nr);
        fb = !fin && ($urandom_range(2) == 0);
        basis_x = shot % 2;
        yz = $urandom; yx = $urandom;
        // syndromes leave syndrome calculation; next event takes cancels
        @(negedge clk);
        syn_valid = 1; syn_first = (r == 0); syn_final = fin; syn_fb_round = fb;
        cancel_taken = 1;
        if (r == 0) begin app_z = 0; app_x = 0; end
        pend_z = 0; pend_x = 0;
        @(negedge clk);
        syn_valid = 0; cancel_taken = 0;
        check(!cancel_x_d1 && !cancel_z_d9, "cancel cleared when taken");
        repeat (30) @(negedge clk);
        dec_z_valid = !fin || !basis_x; dec_z_flip = yz;
        dec_x_valid = !fin || basis_x;  dec_x_flip = yx;
        @(negedge clk);
        dec_z_valid = 0; dec_x_valid = 0;
        fz = fb && (yz ^ app_z);
        fx = fb && (yx ^ app_x);
        check(branch_valid == fb, "branch_valid on feedback rounds only");
        if (fb) check(branch.x_on_d1 == fz && branch.z_on_d9 == fx, "branch word");
        check(final_done == fin, "final_done");
        app_z ^= fz; app_x ^= fx;
        if (!fin || !basis_x) check(frame_zl == (yz ^ app_z), "Z_L frame");
        if (!fin || basis_x)  check(frame_xl == (yx ^ app_x), "X_L frame");
        check(cancel_x_d1 == fz && cancel_z_d9 == fx, "cancel requests");
        if (fz || fx) nfire++;
        repeat (3) @(negedge clk);
        check(cancel_x_d1 == fz && cancel_z_d9 == fx, "cancel held");
      end
    end
    check(nfire > 10, "corrections issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
