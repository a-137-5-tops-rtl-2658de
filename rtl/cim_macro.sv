// cim_macro: 16Kb SRAM compute-in-memory macro, top level.
//
// Four cores of 16 column engines x 64 rows x 4-bit weights (16 Kb). In one
// operation each core multiplies its 64 activations (4-bit, unsigned) with the
// weights of each of its 16 engines and accumulates the 64 products in the analog
// domain; every engine reads its result out with its own memory-cell-embedded
// binary-search ADC as a 9-bit signed code. Activations are MAC-folded (shifted
// by -8) on the way in and the shift is undone digitally on the way out.
//
// Interface: weights are written one per clock (w_we, core/row/col), activations
// one per clock into the IA buffer, the configuration with cfg_we. start begins an
// operation on all four cores (they run in lockstep); done pulses when all 64
// results are in the OA buffer, 16 clocks after start; back-to-back operations
// complete every 15 clocks. Results are read with oa_addr = {core, col}.
// The sense-line drivers are analog buffers without a logic function; the pulse
// path drives the sense lines directly here. Architecture after the paper; the
// host interface is this design's.
module cim_macro
  import cim_pkg::*;
#(
  parameter int unsigned VPRE = 8192   // bit-line headroom of the analog model
)(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           act_we,
  input  logic [$clog2(CORES*ROWS)-1:0]  act_addr,   // {core, row}
  input  logic [ACT_W-1:0]               act_wdata,
  input  logic                           w_we,
  input  logic [$clog2(CORES)-1:0]       w_core,
  input  logic [$clog2(ROWS)-1:0]        w_row,
  input  logic [$clog2(COLS)-1:0]        w_col,
  input  logic [WGT_W-1:0]               w_data,     // {sign, magnitude}
  input  logic                           cfg_we,
  input  cim_cfg_t                       cfg_wdata,
  input  logic                           start,
  output logic                           busy,
  output logic                           done,
  input  logic [$clog2(CORES*COLS)-1:0]  oa_addr,    // {core, col}
  output logic signed [OUT_W-1:0]        oa_out,     // unfolded result
  output logic signed [ADC_BITS-1:0]     oa_code,    // raw readout code
  output logic [SA_STEPS-1:0]            oa_sa       // raw SA results {sign, b8..b0}
);
  logic [ACT_W-1:0]           act_q   [CORES][ROWS];
  cim_cfg_t                   cfg_q;
  logic signed [OUT_W-1:0]    out_c   [CORES][COLS];
  logic signed [ADC_BITS-1:0] code_c  [CORES][COLS];
  logic [SA_STEPS-1:0]        sa_c    [CORES][COLS];
  logic [CORES-1:0]           busy_c, done_c;

  io_buffer u_buf (
    .clk, .rst_n, .act_we, .act_addr, .act_wdata, .act_q,
    .cfg_we, .cfg_wdata, .cfg_q,
    .capture(done_c[0]), .out_in(out_c), .code_in(code_c), .sa_in(sa_c),
    .oa_addr, .oa_out, .oa_code, .oa_sa
  );

  for (genvar k = 0; k < CORES; k++) begin : g_core
    cim_core #(.VPRE(VPRE)) u_core (
      .clk, .rst_n, .start, .cfg(cfg_q), .act(act_q[k]),
      .w_we(w_we && (w_core == k)), .w_row, .w_col, .w_data,
      .busy(busy_c[k]), .done(done_c[k]),
      .code(code_c[k]), .sa_bits(sa_c[k]), .out(out_c[k])
    );
  end

  // The cores share start and configuration and so stay in lockstep.
  assign busy = |busy_c;
  always_ff @(posedge clk) done <= done_c[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (done_c == '0) || (done_c == '1));

endmodule
