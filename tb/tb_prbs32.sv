// tb_prbs32: checks the 32-bit LFSR against a bit-serial model built from the
// polynomial's exponent list {32, 22, 2, 1}: after reset the state equals
// the seed, each enabled step appends the XOR of the bits at those exponents
// minus one, a disabled cycle holds the state, and the state never becomes
// zero. Ends with a TB_RESULT line; a watchdog stops a hung run.
module tb_prbs32;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [31:0] state;
  int checks = 0, failures = 0;
  bit [31:0] model;
  int taps [4] = '{32, 22, 2, 1};

  prbs32 #(.SEED(32'hACE1_0001)) dut (.clk, .rst_n, .en, .state);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s: dut=%h model=%h", what, state, model); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    model = 32'hACE1_0001;
    check(state == model, "seed");
    for (int n = 0; n < 3000; n++) begin
      bit b;
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) begin
        b = 1'b0;
        foreach (taps[t]) b ^= model[taps[t] - 1];
        model = {model[30:0], b};
      end
      check(state == model, "step");
      check(state != 0, "nonzero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
