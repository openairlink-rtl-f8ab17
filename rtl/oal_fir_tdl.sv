// oal_fir_tdl: tapped-delay-line channel as a causal FIR filter.
//
// Computes, for every accepted complex sample x[n],
//     y[n] = ( sum_{i=0}^{N_TAPS-1} b_i * x[n-i] ) >>> r ,  r = COEF_W-1 = 15,
// applying the same real coefficient b_i to I and to Q.  A path of delay
// d sample periods and linear gain g is emulated by b_d = round(g*(2^r-1));
// several non-zero taps give a multipath channel.  With one sample per
// clock at 200 MHz a tap is 5 ns, and 42 taps reach 41 * 5 ns = 205 ns.
// This follows the paper: a shift register moves the samples through the
// taps, the coefficients are 16-bit signed integers, and the output is an
// integer obtained by truncation.  Saturating a sum that overflows 16 bits
// and the pipeline structure are this design's own choices.
//
// bypass selects pass-through: the sample leaves unchanged with the same
// latency, so switching mode does not change the stream's timing.
//
// Interface: valid/ready streams in and out; coef[] and bypass are the
// active settings.  All the products of one output are formed in the same
// clock, so a change of coef[] takes effect between two samples, never
// inside one.
// Timing: 4 clocks from acceptance to out_valid (delay line, products,
// sum, scale); one sample per clock; a stalled output stalls the whole
// pipeline (in_ready falls with it).
module oal_fir_tdl
  import oal_pkg::*;
#(
  parameter int unsigned N_TAPS = N_TAPS_DEFAULT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  coef_t coef [N_TAPS],
  input  logic  bypass,
  input  logic  in_valid,
  output logic  in_ready,
  input  iq_t   in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output iq_t   out_data
);

  localparam int unsigned PROD_W = SAMPLE_W + COEF_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(N_TAPS + 1);
  localparam int unsigned SCL_W  = ACC_W - COEF_FRAC;

  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  iq_t   dl [N_TAPS];               // delay line: dl[i] = x[n-i]
  prod_t prod_i [N_TAPS], prod_q [N_TAPS];
  acc_t  acc_i, acc_q, sum_i, sum_q;
  iq_t   raw2, raw3;
  logic  v1, v2, v3;
  logic  en, accept;

  assign en       = !out_valid || out_ready;
  assign in_ready = en;
  assign accept   = in_valid && en;

  // Stage 1: the delay line advances by one tap per accepted sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_TAPS; k++) dl[k] <= '0;
    end else if (accept) begin
      dl[0] <= in_data;
      for (int k = 1; k < N_TAPS; k++) dl[k] <= dl[k-1];
    end
  end

  // Stage 2: one product per tap and per component.
  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < N_TAPS; k++) begin
        prod_i[k] <= PROD_W'(dl[k].i) * PROD_W'(coef[k]);
        prod_q[k] <= PROD_W'(dl[k].q) * PROD_W'(coef[k]);
      end
      raw2 <= dl[0];
    end
  end

  // Stage 3: sum of the taps.
  always_comb begin
    acc_i = '0;
    acc_q = '0;
    for (int k = 0; k < N_TAPS; k++) begin
      acc_i = acc_i + ACC_W'(prod_i[k]);
      acc_q = acc_q + ACC_W'(prod_q[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      sum_i <= acc_i;
      sum_q <= acc_q;
      raw3  <= raw2;
    end
  end

  // Stage 4: drop the r fractional bits (truncation) and saturate.
  function automatic logic signed [SAMPLE_W-1:0] scale_sat(input acc_t a);
    logic signed [SCL_W-1:0] s;
    s = SCL_W'(a >>> COEF_FRAC);
    if (s > SCL_W'(2**(SAMPLE_W-1) - 1))       return {1'b0, {(SAMPLE_W-1){1'b1}}};
    else if (s < -SCL_W'(2**(SAMPLE_W-1)))     return {1'b1, {(SAMPLE_W-1){1'b0}}};
    else                                       return s[SAMPLE_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      v2        <= 1'b0;
      v3        <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      v1        <= in_valid;
      v2        <= v1;
      v3        <= v2;
      out_valid <= v3;
      if (v3) begin
        if (bypass) out_data <= raw3;
        else        out_data <= '{i: scale_sat(sum_i), q: scale_sat(sum_q)};
      end
    end
  end

  // A presented output must be held until it is taken.
  logic stall_q;
  iq_t  data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stall_q <= 1'b0;
    else        stall_q <= out_valid && !out_ready;
  end
  always_ff @(posedge clk) data_q <= out_data;
  always_ff @(posedge clk) begin
    if (stall_q) begin
      a_hold: assert (out_valid && out_data == data_q)
        else $error("output changed while stalled");
    end
  end

endmodule
