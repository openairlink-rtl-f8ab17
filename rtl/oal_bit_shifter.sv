// oal_bit_shifter: coarse attenuation of a complex sample stream.
//
// Every sample's I and Q word is shifted right arithmetically by j bits,
// which divides it by 2^j (about 6*j dB of attenuation) for all propagation
// paths at once.  The fine, per-path gain is left to the FIR filter.  The
// paper gives the operation and s = 8 as the largest shift; the clamp of
// larger requests to MAX_SHIFT, the rounding (truncation toward minus
// infinity, which is what an arithmetic shift does) and the one-stage
// registered valid/ready pipeline are this design's choices.
//
// Interface: in_* is a valid/ready stream, out_* the same one clock later.
// shift_amt is sampled together with each accepted sample, so a new value
// applies from the next accepted sample on.
// Timing: latency 1 clock, throughput 1 sample per clock.
module oal_bit_shifter
  import oal_pkg::*;
#(
  parameter int unsigned MAX_SHIFT = MAX_SHIFT_DEFAULT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] shift_amt,
  input  logic               in_valid,
  output logic               in_ready,
  input  iq_t                in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output iq_t                out_data
);

  logic [SHIFT_W-1:0] j;
  logic               adv;

  assign j        = (shift_amt > SHIFT_W'(MAX_SHIFT)) ? SHIFT_W'(MAX_SHIFT) : shift_amt;
  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (adv) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data.i <= in_data.i >>> j;
        out_data.q <= in_data.q >>> j;
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
