// oal_top: FPGA part of the software-radio channel emulator.
//
// A software-defined radio with independent receive and transmit chains
// becomes a channel emulator: the received signal is digitised, a channel
// (delay, per-path gain, multipath) is applied on the FPGA, and the result
// is converted back and transmitted.  The radio carries two such chains, so
// the top holds N_CHAN = 2 independent links, which the paper uses to
// emulate the uplink and the downlink of one radio link at the same time
// (index 0 and 1; which is which is up to the user).
//
// Each link is an oal_channel: input FIFO, coarse bit shifter, 42-tap FIR
// filter, output FIFO, and its own register bank.  The host, the Ethernet
// link, the radio framework, the converters and the RF front ends are not
// part of this RTL: their sample streams and the settings-bus writes are
// ports.
//
// Interface: per link, adc_valid/adc_data in (a sample per clock at
// 200 MHz in the paper's set-up), dac_valid/dac_ready/dac_data out.  One
// shared write port selects its link with cfg_chan; cfg_rdata returns the
// active value of register cfg_raddr of link cfg_rchan.  Status counters
// and FIFO fill levels per link.
// Timing: 7 clocks from a sample in to its pass-through image out, plus
// the programmed tap delay (see oal_channel).
module oal_top
  import oal_pkg::*;
#(
  parameter int unsigned N_CHAN      = 2,
  parameter int unsigned N_TAPS      = N_TAPS_DEFAULT,
  parameter int unsigned MAX_SHIFT   = MAX_SHIFT_DEFAULT,
  parameter int unsigned FIFO_DEPTH  = 32,
  parameter bit          SHIFT_FIRST = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adc_valid [N_CHAN],
  input  iq_t         adc_data  [N_CHAN],
  output logic        dac_valid [N_CHAN],
  input  logic        dac_ready [N_CHAN],
  output iq_t         dac_data  [N_CHAN],
  input  logic        cfg_we,
  input  logic [$clog2(N_CHAN+1)-1:0] cfg_chan,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic [$clog2(N_CHAN+1)-1:0] cfg_rchan,
  input  logic [7:0]  cfg_raddr,
  output logic [31:0] cfg_rdata,
  output logic [31:0] update_count    [N_CHAN],
  output logic [31:0] overflow_count  [N_CHAN],
  output logic [31:0] underflow_count [N_CHAN],
  output logic [$clog2(FIFO_DEPTH):0] in_level  [N_CHAN],
  output logic [$clog2(FIFO_DEPTH):0] out_level [N_CHAN]
);

  logic [31:0] rdata [N_CHAN];

  for (genvar c = 0; c < N_CHAN; c++) begin : g_chan
    oal_channel #(
      .N_TAPS(N_TAPS), .MAX_SHIFT(MAX_SHIFT),
      .FIFO_DEPTH(FIFO_DEPTH), .SHIFT_FIRST(SHIFT_FIRST)
    ) u_channel (
      .clk, .rst_n,
      .adc_valid(adc_valid[c]), .adc_data(adc_data[c]),
      .dac_valid(dac_valid[c]), .dac_ready(dac_ready[c]), .dac_data(dac_data[c]),
      .cfg_we(cfg_we && (32'(cfg_chan) == c)), .cfg_addr, .cfg_wdata,
      .cfg_raddr, .cfg_rdata(rdata[c]),
      .update_count(update_count[c]),
      .overflow_count(overflow_count[c]),
      .underflow_count(underflow_count[c]),
      .in_level(in_level[c]), .out_level(out_level[c])
    );
  end

  always_comb begin
    cfg_rdata = '0;
    for (int c = 0; c < N_CHAN; c++)
      if (32'(cfg_rchan) == c) cfg_rdata = rdata[c];
  end

endmodule
