// tb_logical_meas_result: random data-qubit readouts in both bases; checks
// the raw logical parity (Z1 Z2 Z3 or X3 X6 X9) and the corrected result
// with the final Pauli-frame update enabled and disabled, one cycle after
// final_done.
module tb_logical_meas_result;
  import qec_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic ev_valid = 0, final_pfu_en = 0, final_done = 0, frame_zl = 0, frame_xl = 0;
  event_e ev_kind = EV_ROUND;
  basis_e basis = BASIS_Z;
  data_vec_t data = '0;
  logic result_valid, result_raw, result_corrected;

  logical_meas_result dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      bit raw, fr, en;
      data_vec_t d;
      basis_e bs;
      d = data_vec_t'($urandom); bs = basis_e'($urandom_range(1));
      en = $urandom; fr = $urandom;
      raw = (bs == BASIS_Z) ? (d[0] ^ d[1] ^ d[2]) : (d[2] ^ d[5] ^ d[8]);
      @(negedge clk);
      ev_valid = 1; ev_kind = EV_FINAL; basis = bs; data = d;
      @(negedge clk);
      ev_valid = 1; ev_kind = EV_ROUND; data = ~d;     // a round event must not disturb it
      @(negedge clk);
      ev_valid = 0;
      repeat (5) @(negedge clk);
      final_pfu_en = en;
      if (bs == BASIS_Z) begin frame_zl = fr; frame_xl = !fr; end
      else               begin frame_xl = fr; frame_zl = !fr; end
      final_done = 1;
      @(negedge clk);
      final_done = 0;
      check(result_valid, "result_valid one cycle after final_done");
      check(result_raw == raw, "raw logical parity");
      check(result_corrected == (raw ^ (en & fr)), "corrected result");
      @(negedge clk);
      check(!result_valid, "single-cycle pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
