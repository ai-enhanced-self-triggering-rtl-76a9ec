// tb_mac_array: drives random windows and weight sets into the MAC array,
// with runs of 1 to 3 accumulation steps, and compares each accumulator one
// clock after a step with a sum of products computed here in 64-bit
// integers. Also checks that a cycle with valid = 0 leaves the sums alone.
module tb_mac_array;
  import aitrig_pkg::*;
  localparam int OCL = 8, ICL = 4;
  logic clk = 1'b0, rst_n = 1'b0, valid = 1'b0, first = 1'b0;
  fx_t  x [KMAX][ICL];
  fx_t  w [OCL][KMAX][ICL];
  acc_t acc [OCL];
  longint expv [OCL];
  int checks = 0, failures = 0;

  mac_array #(.OCL(OCL), .ICL(ICL)) dut (.clk, .rst_n, .valid, .first, .x, .w, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sx(input fx_t v);
    int t = v;
    return longint'(t);
  endfunction

  task automatic randomise();
    for (int k = 0; k < KMAX; k++)
      for (int i = 0; i < ICL; i++) begin
        x[k][i] = fx_t'($urandom_range(0, 8191));
        for (int o = 0; o < OCL; o++) w[o][k][i] = fx_t'($urandom_range(0, 8191));
      end
  endtask

  initial begin
    foreach (expv[o]) expv[o] = 0;
    randomise();
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int run = 0; run < 200; run++) begin
      int steps;
      steps = $urandom_range(1, 3);
      for (int s = 0; s < steps; s++) begin
        @(negedge clk);
        randomise();
        valid = 1'b1;
        first = (s == 0);
        for (int o = 0; o < OCL; o++) begin
          longint d;
          d = 0;
          for (int k = 0; k < KMAX; k++)
            for (int i = 0; i < ICL; i++) d += sx(x[k][i]) * sx(w[o][k][i]);
          expv[o] = (first ? 0 : expv[o]) + d;
        end
        @(negedge clk);
        valid = 1'b0;
        for (int o = 0; o < OCL; o++) begin
          checks++;
          if (acc[o] != acc_t'(expv[o])) begin
            failures++;
            $display("FAIL run %0d lane %0d: %0d vs %0d", run, o, acc[o], expv[o]);
          end
        end
      end
      // idle cycle: nothing may change
      randomise();
      @(negedge clk);
      for (int o = 0; o < OCL; o++) begin
        checks++;
        if (acc[o] != acc_t'(expv[o])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
