// tb_trace_buffer: streams samples, two per clock, whose value is their own
// index (mod 2^13) with random gaps, and plays a slow consumer that holds each trace for a
// random 100..400 clocks before releasing it. For each trace it checks all
// 128 samples against the window number it reports, that window numbers
// increase, and at the end that every window was either delivered, still
// held, or counted as dropped. The run must see drops to be meaningful.
module tb_trace_buffer;
  import aitrig_pkg::*;
  localparam int LEN = 128, SPC = 2;
  logic clk = 1'b0, rst_n = 1'b0, s_valid = 1'b0, release_trace = 1'b0;
  fx_t s_data [SPC];
  logic [6:0] rd_addr [3];
  fx_t rd_data [3];
  logic trace_valid;
  logic [31:0] trace_id, dropped;
  int checks = 0, failures = 0;
  int sent = 0, delivered = 0;
  longint last_id = -1;
  bit stop_stream = 0;

  trace_buffer #(.LEN(LEN), .SPC(SPC)) dut (.clk, .rst_n, .s_valid, .s_data, .rd_addr, .rd_data,
                                 .trace_valid, .trace_id, .release_trace, .dropped);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  always @(negedge clk) begin
    if (rst_n && !stop_stream && $urandom_range(0, 7) != 0) begin
      s_valid = 1'b1;
      for (int j = 0; j < SPC; j++) s_data[j] = fx_t'(sent + j);
      sent += SPC;
    end else begin
      s_valid = 1'b0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    while (delivered < 20) begin
      @(negedge clk);
      #1;
      if (trace_valid) begin
        checks++;
        if (longint'(trace_id) <= last_id) begin failures++; $display("FAIL id order"); end
        last_id = trace_id;
        for (int a = 0; a < LEN; a += 3) begin
          for (int p = 0; p < 3; p++) rd_addr[p] = 7'((a + p) % LEN);
          #1;
          for (int p = 0; p < 3; p++) begin
            checks++;
            if (rd_data[p] != fx_t'(trace_id * LEN + (a + p) % LEN)) begin
              failures++;
              if (failures < 10) $display("FAIL trace %0d addr %0d: %0d", trace_id, a + p, rd_data[p]);
            end
          end
        end
        repeat ($urandom_range(100, 400)) @(negedge clk);
        release_trace = 1'b1;
        @(negedge clk);
        release_trace = 1'b0;
        delivered++;
      end
    end
    stop_stream = 1;
    repeat (5) @(negedge clk);
    begin
      int windows, held;
      windows = sent / LEN;
      held = 0;
      // drain the banks still holding traces
      while (trace_valid) begin
        held++;
        release_trace = 1'b1; @(negedge clk); release_trace = 1'b0; @(negedge clk);
      end
      checks++;
      if (windows != delivered + held + int'(dropped)) begin
        failures++;
        $display("FAIL accounting: windows %0d delivered %0d held %0d dropped %0d", windows, delivered, held, dropped);
      end
      checks++;
      if (dropped == 0) begin failures++; $display("FAIL no drops exercised"); end
      $display("windows %0d delivered %0d held %0d dropped %0d", windows, delivered, held, dropped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
