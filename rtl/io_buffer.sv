// io_buffer: input-activation buffer, output buffer and configuration register.
//
// IA buffer: one 4-bit activation per row of each core, written one at a time
// (address {core, row}), all read in parallel by the cores; reset to 0.
// OA buffer: on capture (the cores' done pulse) the unfolded outputs and raw codes
// of all 64 engines are stored; read one engine at a time (address {core, col},
// data valid in the same cycle). Config register: boost and ADC scale, written
// with cfg_we; a scale above 2 is stored as 2 (the largest the readout supports).
// Only the names of these buffers come from the paper; their organisation and
// ports are this design's.
module io_buffer
  import cim_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  // activation writes
  input  logic                               act_we,
  input  logic [$clog2(CORES*ROWS)-1:0]      act_addr,
  input  logic [ACT_W-1:0]                   act_wdata,
  output logic [ACT_W-1:0]                   act_q  [CORES][ROWS],
  // configuration
  input  logic                               cfg_we,
  input  cim_cfg_t                           cfg_wdata,
  output cim_cfg_t                           cfg_q,
  // outputs
  input  logic                               capture,
  input  logic signed [OUT_W-1:0]            out_in  [CORES][COLS],
  input  logic signed [ADC_BITS-1:0]         code_in [CORES][COLS],
  input  logic [SA_STEPS-1:0]                sa_in   [CORES][COLS],
  input  logic [$clog2(CORES*COLS)-1:0]      oa_addr,
  output logic signed [OUT_W-1:0]            oa_out,
  output logic signed [ADC_BITS-1:0]         oa_code,
  output logic [SA_STEPS-1:0]                oa_sa
);
  localparam int unsigned RB = $clog2(ROWS);
  localparam int unsigned CB = $clog2(COLS);

  logic signed [OUT_W-1:0]    oa_mem   [CORES][COLS];
  logic signed [ADC_BITS-1:0] code_mem [CORES][COLS];
  logic [SA_STEPS-1:0]        sa_mem   [CORES][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CORES; c++)
        for (int r = 0; r < ROWS; r++)
          act_q[c][r] <= '0;
      cfg_q <= '0;
    end else begin
      if (act_we) act_q[act_addr[RB +: $clog2(CORES)]][act_addr[RB-1:0]] <= act_wdata;
      if (cfg_we) begin
        cfg_q.boost     <= cfg_wdata.boost;
        cfg_q.adc_scale <= (cfg_wdata.adc_scale > 2'd2) ? 2'd2 : cfg_wdata.adc_scale;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CORES; c++)
        for (int k = 0; k < COLS; k++) begin
          oa_mem[c][k]   <= '0;
          code_mem[c][k] <= '0;
          sa_mem[c][k]   <= '0;
        end
    end else if (capture) begin
      oa_mem   <= out_in;
      code_mem <= code_in;
      sa_mem   <= sa_in;
    end
  end

  assign oa_out  = oa_mem  [oa_addr[CB +: $clog2(CORES)]][oa_addr[CB-1:0]];
  assign oa_code = code_mem[oa_addr[CB +: $clog2(CORES)]][oa_addr[CB-1:0]];
  assign oa_sa   = sa_mem  [oa_addr[CB +: $clog2(CORES)]][oa_addr[CB-1:0]];

endmodule
