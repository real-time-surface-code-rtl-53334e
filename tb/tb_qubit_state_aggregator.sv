// tb_qubit_state_aggregator: 12 links with random qubit masks report in
// random order and at random times; checks that out_valid pulses in the
// cycle of the last report with the merged state, only then, and that a
// duplicate report sets dup_error.
module tb_qubit_state_aggregator;
  import qec_pkg::*;

  localparam int L = 12;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  qubit_vec_t link_mask [L];
  logic       link_valid [L];
  qubit_vec_t link_data [L];
  logic out_valid, dup_error;
  qubit_vec_t out_state;

  qubit_state_aggregator dut (.*);

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

  initial begin
    for (int l = 0; l < L; l++) begin link_valid[l] = 0; link_data[l] = '0; link_mask[l] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      qubit_vec_t truth;
      int order [L], nused;
      bit done [L];
      // random partition of the 17 qubits over the links, some links unused
      for (int l = 0; l < L; l++) link_mask[l] = '0;
      for (int q = 0; q < N_QUBITS; q++) begin
        int l;
        l = int'($urandom_range((n % 2) ? L - 1 : 4));
        link_mask[l][q] = 1'b1;
      end
      truth = qubit_vec_t'($urandom);
      nused = 0;
      for (int l = 0; l < L; l++) begin done[l] = (link_mask[l] == '0); if (!done[l]) nused++; end
      while (nused > 0) begin
        @(negedge clk);
        for (int l = 0; l < L; l++) begin
          link_valid[l] = 0;
          if (!done[l] && $urandom_range(3) == 0) begin
            link_valid[l] = 1; link_data[l] = (truth & link_mask[l]) | (qubit_vec_t'($urandom) & ~link_mask[l]);
            done[l] = 1; nused--;
          end
        end
        #1;
        check(out_valid == (nused == 0), "out_valid only with the last report");
        if (out_valid) check(out_state == truth, "merged state");
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) link_valid[l] = 0;
      #1 check(!out_valid, "pulse");
    end
    check(!dup_error, "no duplicate so far");
    begin
      int l0;
      l0 = 0;
      while (link_mask[l0] == '0) l0++;
      @(negedge clk) link_valid[l0] = 1;
      @(negedge clk) link_valid[l0] = 1;
      @(negedge clk) link_valid[l0] = 0;
      #1 check(dup_error, "dup_error on a second report");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
