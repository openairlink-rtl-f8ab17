// oal_channel: one emulated radio link (the "FPGA channel").
//
// The sample stream from the receive converter passes through an input
// FIFO, the coarse bit shifter, the tapped-delay-line FIR filter and an
// output FIFO to the transmit converter.  The shifter divides every sample
// by 2^j for all paths; the FIR filter then delays and scales each path.
// Together they reach about (r+s)*6 dB = 138 dB of shift-plus-coefficient
// range with a fine step, where the FIR filter alone runs out near 90 dB.
//
// Order of the two stages: the paper's text puts the bit shift before the
// FIR filter, while its latency diagram draws the FIR filter first.
// SHIFT_FIRST = 1 (default) follows the text; SHIFT_FIRST = 0 gives the
// diagram's order, which keeps more low-order bits at high attenuation.
//
// The input has no back-pressure, as a converter delivers a sample every
// period whether or not it can be taken: a sample that finds the input
// FIFO full is dropped and counted in overflow_count.  underflow_count
// counts clocks, after the first output sample, in which the transmit side
// was ready but no sample was available.  The FIFOs stand for the buffers
// the paper's framework places between blocks; their depth and the two
// counters are this design's choices.
//
// Interface: adc_* in (valid only), dac_* out (valid/ready), the register
// port of oal_channel_regs, status counters and the fill levels of the
// two FIFOs (the input FIFO refuses a sample exactly when in_level equals
// FIFO_DEPTH).
// Timing: with an always-ready output the path from adc_valid to dac_valid
// is 1 (FIFO) + 1 (shifter) + 4 (FIR) + 1 (FIFO) = 7 clocks; one sample per
// clock.  A path programmed on tap d adds d sample periods on top.
module oal_channel
  import oal_pkg::*;
#(
  parameter int unsigned N_TAPS      = N_TAPS_DEFAULT,
  parameter int unsigned MAX_SHIFT   = MAX_SHIFT_DEFAULT,
  parameter int unsigned FIFO_DEPTH  = 32,
  parameter bit          SHIFT_FIRST = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // receive side (from the ADC)
  input  logic        adc_valid,
  input  iq_t         adc_data,
  // transmit side (to the DAC)
  output logic        dac_valid,
  input  logic        dac_ready,
  output iq_t         dac_data,
  // settings
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic [7:0]  cfg_raddr,
  output logic [31:0] cfg_rdata,
  // status
  output logic [31:0] update_count,
  output logic [31:0] overflow_count,
  output logic [31:0] underflow_count,
  output logic [$clog2(FIFO_DEPTH):0] in_level,
  output logic [$clog2(FIFO_DEPTH):0] out_level
);

  coef_t              coef [N_TAPS];
  logic [SHIFT_W-1:0] shift_amt;
  logic               fir_bypass;

  oal_channel_regs #(.N_TAPS(N_TAPS)) u_regs (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_raddr, .cfg_rdata,
    .coef, .shift_amt, .fir_bypass, .update_count
  );

  // Stream links: a = input FIFO -> stage 1, b = stage 1 -> stage 2,
  // c = stage 2 -> output FIFO.
  logic a_valid, a_ready, b_valid, b_ready, c_valid, c_ready, in_ready;
  iq_t  a_data, b_data, c_data;

  oal_sample_fifo #(.DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .in_valid(adc_valid), .in_ready(in_ready), .in_data(adc_data),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data),
    .level(in_level)
  );

  if (SHIFT_FIRST) begin : g_shift_first
    oal_bit_shifter #(.MAX_SHIFT(MAX_SHIFT)) u_shift (
      .clk, .rst_n, .shift_amt,
      .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
      .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data)
    );
    oal_fir_tdl #(.N_TAPS(N_TAPS)) u_fir (
      .clk, .rst_n, .coef, .bypass(fir_bypass),
      .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data)
    );
  end else begin : g_fir_first
    oal_fir_tdl #(.N_TAPS(N_TAPS)) u_fir (
      .clk, .rst_n, .coef, .bypass(fir_bypass),
      .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
      .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data)
    );
    oal_bit_shifter #(.MAX_SHIFT(MAX_SHIFT)) u_shift (
      .clk, .rst_n, .shift_amt,
      .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data)
    );
  end

  oal_sample_fifo #(.DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid(dac_valid), .out_ready(dac_ready), .out_data(dac_data),
    .level(out_level)
  );

  logic started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      overflow_count  <= '0;
      underflow_count <= '0;
      started         <= 1'b0;
    end else begin
      if (adc_valid && !in_ready)               overflow_count  <= overflow_count + 1;
      if (dac_valid && dac_ready)               started         <= 1'b1;
      if (started && dac_ready && !dac_valid)   underflow_count <= underflow_count + 1;
    end
  end

endmodule
