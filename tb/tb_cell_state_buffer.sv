// tb_cell_state_buffer: self-checking test of the cell-state store.
// Random row writes and reads against a testbench copy; reads are
// combinational, so data is checked in the same cycle the row is presented.
module tb_cell_state_buffer;
  import lstm_pkg::*;
  localparam int unsigned R = 64, TR = 8, ROWS = R / TR;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [$clog2(ROWS)-1:0] rd_row, wr_row;
  fp32_t rd_data [TR], wr_data [TR];
  logic wr_en;
  fp32_t model [ROWS][TR];
  int checks = 0, failures = 0;

  cell_state_buffer #(.R(R), .TR(TR)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_row = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = r[$clog2(ROWS)-1:0];
      for (int k = 0; k < TR; k++) begin wr_data[k] = $urandom; model[r][k] = wr_data[k]; end
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) == 1);
      wr_row = $urandom_range(0, ROWS - 1);
      for (int k = 0; k < TR; k++) wr_data[k] = $urandom;
      rd_row = $urandom_range(0, ROWS - 1);
      #1;
      for (int k = 0; k < TR; k++) begin
        checks++;
        if (rd_data[k] !== model[rd_row][k]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d", rd_row, k);
        end
      end
      @(posedge clk);
      if (wr_en) for (int k = 0; k < TR; k++) model[wr_row][k] = wr_data[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
