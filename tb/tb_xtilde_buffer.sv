// tb_xtilde_buffer: self-checking test of the x~ buffer.
// Writes random rows, then reads random indices on all ports at once and
// compares each port's data, one cycle later, with a testbench copy of the
// contents. Also checks that a row written is visible on the next cycle.
module tb_xtilde_buffer;
  import lstm_pkg::*;
  localparam int unsigned C = 64, TR = 8, NP = 4;
  localparam int unsigned ROWS = C / TR;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  fp32_t wr_data [TR];
  logic [$clog2(C)-1:0] rd_idx [NP];
  fp32_t rd_data [NP];
  fp32_t model [C];
  int checks = 0, failures = 0;

  xtilde_buffer #(.C(C), .TR(TR), .NPORTS(NP)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [$clog2(C)-1:0] idx [NP];
    wr_en = 0;
    for (int p = 0; p < NP; p++) rd_idx[p] = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = r[$clog2(ROWS)-1:0];
      for (int k = 0; k < TR; k++) begin wr_data[k] = $urandom; model[r*TR+k] = wr_data[k]; end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      // occasionally rewrite a row and read it back right after
      if (n % 7 == 0) begin
        wr_en = 1; wr_row = $urandom_range(0, ROWS - 1);
        for (int k = 0; k < TR; k++) begin wr_data[k] = $urandom; model[wr_row*TR+k] = wr_data[k]; end
        @(negedge clk); wr_en = 0;
      end
      for (int p = 0; p < NP; p++) begin idx[p] = $urandom_range(0, C - 1); rd_idx[p] = idx[p]; end
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rd_data[p] !== model[idx[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d idx %0d got %h exp %h", p, idx[p], rd_data[p], model[idx[p]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
