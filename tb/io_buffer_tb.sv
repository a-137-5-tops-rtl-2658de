// io_buffer_tb: fills the activation buffer at random addresses and compares it
// with a model, checks the configuration register including the scale limit, and
// checks that the output buffer takes a snapshot only on capture and reads back
// every engine by address.
module io_buffer_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic act_we, cfg_we, capture;
  logic [$clog2(CORES*ROWS)-1:0] act_addr;
  logic [ACT_W-1:0] act_wdata;
  logic [ACT_W-1:0] act_q [CORES][ROWS];
  logic [ACT_W-1:0] model [CORES][ROWS];
  cim_cfg_t cfg_wdata, cfg_q;
  logic signed [OUT_W-1:0] out_in [CORES][COLS];
  logic signed [ADC_BITS-1:0] code_in [CORES][COLS];
  logic [SA_STEPS-1:0] sa_in [CORES][COLS];
  logic signed [OUT_W-1:0] snap_out [CORES][COLS];
  logic signed [ADC_BITS-1:0] snap_code [CORES][COLS];
  logic [SA_STEPS-1:0] snap_sa [CORES][COLS];
  logic [$clog2(CORES*COLS)-1:0] oa_addr;
  logic signed [OUT_W-1:0] oa_out;
  logic signed [ADC_BITS-1:0] oa_code;
  logic [SA_STEPS-1:0] oa_sa;
  int checks = 0, failures = 0;

  io_buffer dut (.clk, .rst_n, .act_we, .act_addr, .act_wdata, .act_q, .cfg_we, .cfg_wdata,
                 .cfg_q, .capture, .out_in, .code_in, .sa_in, .oa_addr, .oa_out, .oa_code, .oa_sa);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic randomize_inputs();
    for (int c = 0; c < CORES; c++)
      for (int k = 0; k < COLS; k++) begin
        out_in[c][k] = OUT_W'($urandom); code_in[c][k] = ADC_BITS'($urandom);
        sa_in[c][k] = SA_STEPS'($urandom);
      end
  endtask

  initial begin
    act_we = 0; cfg_we = 0; capture = 0; oa_addr = 0; act_addr = 0; act_wdata = 0;
    cfg_wdata = '0;
    randomize_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CORES; c++) for (int r = 0; r < ROWS; r++) model[c][r] = '0;
    for (int i = 0; i < 600; i++) begin
      act_we = 1; act_addr = 8'($urandom); act_wdata = 4'($urandom);
      model[act_addr[7:6]][act_addr[5:0]] = act_wdata;
      @(negedge clk);
    end
    act_we = 0;
    for (int c = 0; c < CORES; c++)
      for (int r = 0; r < ROWS; r++)
        chk(act_q[c][r] == model[c][r], $sformatf("act core %0d row %0d", c, r));
    for (int t = 0; t < 8; t++) begin
      cfg_we = 1; cfg_wdata = cim_cfg_t'(t);
      @(negedge clk);
      cfg_we = 0;
      chk(cfg_q.boost == t[0] && int'(cfg_q.adc_scale) == ((t >> 1) > 2 ? 2 : (t >> 1)),
          $sformatf("cfg %0d -> %p", t, cfg_q));
    end
    // snapshot
    capture = 1;
    @(negedge clk);
    capture = 0;
    snap_out = out_in; snap_code = code_in; snap_sa = sa_in;
    randomize_inputs();
    @(negedge clk);
    for (int a = 0; a < CORES * COLS; a++) begin
      oa_addr = 6'(a);
      #1;
      chk(oa_out == snap_out[a / COLS][a % COLS] && oa_code == snap_code[a / COLS][a % COLS]
          && oa_sa == snap_sa[a / COLS][a % COLS], $sformatf("OA read %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
