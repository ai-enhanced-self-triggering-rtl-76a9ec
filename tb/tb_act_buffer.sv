// tb_act_buffer: random lane-masked group writes against a shadow copy kept
// here, then reads of random rows on all four ports, compared channel by
// channel. Every row is first written in full so no uninitialised row is
// read.
module tb_act_buffer;
  import aitrig_pkg::*;
  localparam int ROWS = 64, CH = 64, OCL = 32, NRD = 4;
  logic clk = 1'b0, we = 1'b0;
  logic [5:0] wr_row;
  logic [2:0] wr_grp;
  fx_t wr_data [OCL];
  logic [OCL-1:0] wr_mask;
  logic [5:0] rd_addr [NRD];
  fx_t rd_row [NRD][CH];
  int shadow [ROWS][CH];
  int checks = 0, failures = 0;

  act_buffer #(.ROWS(ROWS), .CH(CH), .OCL(OCL), .NRD(NRD)) dut (
    .clk, .we, .wr_row, .wr_grp, .wr_data, .wr_mask, .rd_addr, .rd_row);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int r, input int g, input logic [OCL-1:0] m);
    @(negedge clk);
    we = 1'b1; wr_row = 6'(r); wr_grp = 3'(g); wr_mask = m;
    for (int i = 0; i < OCL; i++) begin
      wr_data[i] = fx_t'($urandom_range(0, 8191));
      if (m[i]) shadow[r][g * OCL + i] = int'(wr_data[i]);
    end
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < CH / OCL; g++) write(r, g, '1);
    for (int n = 0; n < 600; n++) begin
      write($urandom_range(0, ROWS - 1), $urandom_range(0, CH / OCL - 1), OCL'($urandom()));
      for (int p = 0; p < NRD; p++) rd_addr[p] = 6'($urandom_range(0, ROWS - 1));
      #1;
      for (int p = 0; p < NRD; p++)
        for (int c = 0; c < CH; c++) begin
          checks++;
          if (int'(rd_row[p][c]) != shadow[rd_addr[p]][c]) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d ch %0d", rd_addr[p], c);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
