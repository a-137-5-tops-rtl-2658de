// cim_macro_tb: the whole macro at its default size (4 cores x 16 engines x 64
// rows), through its host interface only. Weights and activations are written
// word by word, operations are started and all 64 results read back from the
// output buffer and compared with a bit-line model kept by the testbench
// (folded products on RBL/RBLB, ten-step binary search, unfolding). Operations
// cover: positive and negative products, the ACT[C] compensation (ACT = 0),
// boosted MAC, ADC scales 0..2, clipping at both ends of the readout range, and
// back-to-back operations (one every 15 clocks). Each of these is counted and a
// mechanism that never occurs counts as a failure. Latency start -> done is
// 17 clocks at the top (16 in the core plus the output-buffer capture).
module cim_macro_tb;
  import cim_pkg::*;
  localparam int unsigned VP = 8192;   // default bit-line headroom of cim_macro
  logic clk = 0, rst_n = 0;
  logic act_we, w_we, cfg_we, start, busy, done;
  logic [7:0] act_addr;
  logic [3:0] act_wdata;
  logic [1:0] w_core;
  logic [5:0] w_row;
  logic [3:0] w_col;
  logic [3:0] w_data;
  cim_cfg_t cfg_wdata, cfg;
  logic [5:0] oa_addr;
  logic signed [OUT_W-1:0] oa_out;
  logic signed [ADC_BITS-1:0] oa_code;
  logic [SA_STEPS-1:0] oa_sa;
  logic [3:0] wm [CORES][COLS][ROWS];
  logic [3:0] am [CORES][ROWS];
  int checks = 0, failures = 0, cyc = 0;
  int n_pos = 0, n_neg = 0, n_comp = 0, n_boost = 0, n_scale = 0;
  int n_clip_hi = 0, n_clip_lo = 0, n_inrange = 0, n_b2b = 0;
  int done_at[$];

  cim_macro dut (.clk, .rst_n, .act_we, .act_addr, .act_wdata, .w_we, .w_core, .w_row,
                 .w_col, .w_data, .cfg_we, .cfg_wdata, .start, .busy, .done, .oa_addr,
                 .oa_out, .oa_code, .oa_sa);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (done) done_at.push_back(cyc);
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic set_cfg(input logic boost, input logic [1:0] scale);
    cfg_we = 1; cfg_wdata.boost = boost; cfg_wdata.adc_scale = scale;
    cfg.boost = boost; cfg.adc_scale = scale;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic write_acts(input int mode);
    for (int k = 0; k < CORES; k++)
      for (int r = 0; r < ROWS; r++) begin
        case (mode)
          0: am[k][r] = 4'($urandom);
          1: am[k][r] = (k % 2) ? 4'd15 : 4'd0;
          default: am[k][r] = 4'(6 + $urandom % 5);
        endcase
        act_we = 1; act_addr = {2'(k), 6'(r)}; act_wdata = am[k][r];
        @(negedge clk);
      end
    act_we = 0;
  endtask

  // Expected code, SA results and unfolded output of one engine.
  task automatic model(input int k, input int c, output int code, output logic [9:0] sa,
                       output int out, output int d, output int ideal);
    int pos, neg, b, sc, vr, vb, s, ws;
    b = cfg.boost ? 2 : 1; sc = 2 ** cfg.adc_scale;
    pos = 0; neg = 0; ws = 0; ideal = 0;
    for (int r = 0; r < ROWS; r++) begin
      int a, wv, p;
      a = int'(am[k][r]) - 8;
      wv = (wm[k][c][r][3] ? -1 : 1) * int'(wm[k][c][r][2:0]);
      p = a * wv * b;
      if (p > 0) pos += p; else neg -= p;
      ws += wv; ideal += int'(am[k][r]) * wv;
    end
    d = pos - neg;
    vr = VP - pos; vb = VP - neg;
    if (vr < 0) vr = 0;
    if (vb < 0) vb = 0;
    s = (vr > vb); sa[9] = 1'(s);
    for (int n = 8; n >= 0; n--) begin
      if (s) vr = (vr > (sc << n)) ? vr - (sc << n) : 0;
      else   vb = (vb > (sc << n)) ? vb - (sc << n) : 0;
      s = (vr > vb); sa[n] = 1'(s);
    end
    code = 255 - int'(sa[9:1]);
    out  = code + 8 * ws * b / (2 * sc);
  endtask

  task automatic count_inputs();
    for (int k = 0; k < CORES; k++)
      for (int r = 0; r < ROWS; r++) begin
        if (am[k][r] == 0) n_comp++;
        for (int c = 0; c < COLS; c++) begin
          int p;
          p = (int'(am[k][r]) - 8) * (wm[k][c][r][3] ? -1 : 1) * int'(wm[k][c][r][2:0]);
          if (p > 0) n_pos++;
          if (p < 0) n_neg++;
        end
      end
    if (cfg.boost) n_boost++;
    if (cfg.adc_scale != 0) n_scale++;
  endtask

  task automatic read_and_check();
    for (int a = 0; a < CORES * COLS; a++) begin
      int code, out, d, ideal, sc, b;
      logic [9:0] sa;
      oa_addr = 6'(a);
      #1;
      model(a / COLS, a % COLS, code, sa, out, d, ideal);
      sc = 2 ** cfg.adc_scale; b = cfg.boost ? 2 : 1;
      chk(oa_sa == sa && int'(oa_code) == code && int'(oa_out) == out,
          $sformatf("engine %0d: sa %b code %0d out %0d, expected %b %0d %0d (d=%0d)",
                    a, oa_sa, oa_code, oa_out, sa, code, out, d));
      if (d >= 512 * sc) n_clip_hi++;
      else if (d < -512 * sc) n_clip_lo++;
      else begin
        n_inrange++;
        chk((2 * sc * int'(oa_out) - b * ideal) <= 2 * sc && (b * ideal - 2 * sc * int'(oa_out)) < 2 * sc,
            $sformatf("engine %0d out %0d vs ideal %0d", a, oa_out, ideal));
      end
    end
  endtask

  task automatic one_op();
    int t0;
    count_inputs();
    done_at.delete();
    start = 1;
    @(negedge clk);
    t0 = cyc;               // accepting edge
    start = 0;
    wait (done_at.size() > 0);
    @(negedge clk);
    // done_at holds the edge after the one that raised done
    chk(done_at[0] - t0 == 17 + 1, $sformatf("latency %0d", done_at[0] - t0 - 1));
    read_and_check();
  endtask

  initial begin
    act_we = 0; w_we = 0; cfg_we = 0; start = 0; oa_addr = 0; cfg_wdata = '0; cfg = '0;
    act_addr = 0; act_wdata = 0; w_core = 0; w_row = 0; w_col = 0; w_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weights: core 0 random, core 1 small, core 2 +7/-7 columns, core 3 random
    for (int k = 0; k < CORES; k++)
      for (int c = 0; c < COLS; c++)
        for (int r = 0; r < ROWS; r++) begin
          case (k)
            1:       wm[k][c][r] = {1'($urandom), 3'($urandom % 3)};
            2:       wm[k][c][r] = (c < 8) ? 4'h7 : 4'hF;
            default: wm[k][c][r] = 4'($urandom);
          endcase
          w_we = 1; w_core = 2'(k); w_row = 6'(r); w_col = 4'(c); w_data = wm[k][c][r];
          @(negedge clk);
        end
    w_we = 0;
    set_cfg(0, 0); write_acts(0); one_op();
    set_cfg(1, 0); one_op();
    set_cfg(0, 1); write_acts(2); one_op();
    set_cfg(1, 2); write_acts(0); one_op();
    set_cfg(0, 0); write_acts(1); one_op();
    set_cfg(1, 1); one_op();
    // back to back: three operations with start held; same inputs, same results
    set_cfg(0, 0); write_acts(0);
    count_inputs();
    done_at.delete();
    start = 1;
    repeat (45) @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    chk(done_at.size() == 3, $sformatf("%0d results from 3 back-to-back operations", done_at.size()));
    if (done_at.size() == 3) begin
      chk(done_at[1] - done_at[0] == OP_CYCLES && done_at[2] - done_at[1] == OP_CYCLES,
          "back-to-back period of 15 clocks");
      n_b2b++;
    end
    read_and_check();

    $display("mechanisms: pos=%0d neg=%0d comp=%0d boost=%0d scale=%0d clip_hi=%0d clip_lo=%0d inrange=%0d b2b=%0d",
             n_pos, n_neg, n_comp, n_boost, n_scale, n_clip_hi, n_clip_lo, n_inrange, n_b2b);
    chk(n_pos > 0, "positive products occurred");
    chk(n_neg > 0, "negative products occurred");
    chk(n_comp > 0, "ACT[C] compensation occurred");
    chk(n_boost > 0, "boosted MAC occurred");
    chk(n_scale > 0, "ADC scale above 0 occurred");
    chk(n_clip_hi > 0, "clipping at the top occurred");
    chk(n_clip_lo > 0, "clipping at the bottom occurred");
    chk(n_inrange > 0, "unclipped results occurred");
    chk(n_b2b > 0, "back-to-back operations occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
