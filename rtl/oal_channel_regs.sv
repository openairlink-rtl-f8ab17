// oal_channel_regs: run-time channel settings written by the host.
//
// The host program replays a prepared list of channel states and rewrites
// the tap coefficients while the emulator runs (the paper reports 1000
// updates per second).  A state change usually touches several registers
// at once: moving a path by one tap clears one coefficient and sets its
// neighbour.  So that the datapath never sees half an update, every write
// lands in a shadow copy, and a write to the commit address copies all
// shadow registers into the active set in one clock.  The paper only says
// that the coefficients are updated at run time; the shadow/commit scheme,
// the register map (see oal_pkg) and the reset state are this design's.
//
// Reset state: pass-through (FIR bypassed, shift 0) so that an emulator
// that was never configured forwards its input unchanged; all
// coefficients 0.
//
// Interface: a write port (cfg_we, cfg_addr, cfg_wdata) in the style of a
// settings bus, a read port returning the active value of any register
// (combinational), and the active settings as outputs.  update_count
// counts commits.
// Timing: a commit written at clock t drives the new settings from t+1.
module oal_channel_regs
  import oal_pkg::*;
#(
  parameter int unsigned N_TAPS = N_TAPS_DEFAULT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [7:0]         cfg_addr,
  input  logic [31:0]        cfg_wdata,
  input  logic [7:0]         cfg_raddr,
  output logic [31:0]        cfg_rdata,
  output coef_t              coef [N_TAPS],
  output logic [SHIFT_W-1:0] shift_amt,
  output logic               fir_bypass,
  output logic [31:0]        update_count
);

  localparam int unsigned IW = (N_TAPS > 1) ? $clog2(N_TAPS) : 1;

  coef_t              sh_coef [N_TAPS];
  logic [SHIFT_W-1:0] sh_shift;
  logic               sh_bypass;

  initial assert (N_TAPS >= 1 && N_TAPS <= 128)
    else $error("oal_channel_regs: N_TAPS must be 1..128");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_TAPS; k++) begin
        sh_coef[k] <= '0;
        coef[k]    <= '0;
      end
      sh_shift     <= '0;
      sh_bypass    <= 1'b1;
      shift_amt    <= '0;
      fir_bypass   <= 1'b1;
      update_count <= '0;
    end else if (cfg_we) begin
      if (cfg_addr < 8'(N_TAPS)) begin
        sh_coef[cfg_addr[IW-1:0]] <= cfg_wdata[COEF_W-1:0];
      end else if (cfg_addr == REG_SHIFT) begin
        sh_shift <= cfg_wdata[SHIFT_W-1:0];
      end else if (cfg_addr == REG_CTRL) begin
        sh_bypass <= cfg_wdata[0];
      end else if (cfg_addr == REG_COMMIT) begin
        coef         <= sh_coef;
        shift_amt    <= sh_shift;
        fir_bypass   <= sh_bypass;
        update_count <= update_count + 1;
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg_raddr < 8'(N_TAPS))       cfg_rdata = 32'(signed'(coef[cfg_raddr[IW-1:0]]));
    else if (cfg_raddr == REG_SHIFT)  cfg_rdata = 32'(shift_amt);
    else if (cfg_raddr == REG_CTRL)   cfg_rdata = 32'(fir_bypass);
    else if (cfg_raddr == REG_COMMIT) cfg_rdata = update_count;
  end

endmodule
