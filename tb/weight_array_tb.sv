// weight_array_tb: writes random weights to every cell, then rewrites some, and
// compares all stored bits with a model array kept by the testbench.
module weight_array_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic we;
  logic [$clog2(ROWS)-1:0] wrow;
  logic [$clog2(COLS)-1:0] wcol;
  logic [WGT_W-1:0] wdata;
  logic [WGT_W-1:0] w [COLS][ROWS];
  logic [WGT_W-1:0] model [COLS][ROWS];
  int checks = 0, failures = 0;

  weight_array dut (.clk, .we, .wrow, .wcol, .wdata, .w);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (w[c][r] !== model[c][r]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d row %0d: %h, expected %h", c, r, w[c][r], model[c][r]);
        end
      end
  endtask

  initial begin
    we = 0;
    @(negedge clk);
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        we = 1; wcol = 4'(c); wrow = 6'(r); wdata = 4'($urandom);
        model[c][r] = wdata;
        @(negedge clk);
      end
    we = 0;
    @(negedge clk);
    compare_all();
    for (int i = 0; i < 200; i++) begin
      we = ($urandom % 2) == 1; wcol = 4'($urandom); wrow = 6'($urandom); wdata = 4'($urandom);
      if (we) model[wcol][wrow] = wdata;
      @(negedge clk);
    end
    we = 0;
    @(negedge clk);
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
