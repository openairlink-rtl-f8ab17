// tb_oal_channel_regs: self-checking test of the settings bank.
//
// Checks the reset state (pass-through, shift 0, coefficients 0), that
// writes to the shadow registers leave the active outputs untouched until
// a commit, that a commit moves every shadow value at once on the next
// clock, that writes to unmapped addresses are ignored, that the read port
// returns the active values, and that commits are counted.  A model of
// the shadow and active sets is kept here for comparison.
module tb_oal_channel_regs;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int N = 42;

  logic               clk = 1'b0, rst_n = 1'b1;
  logic               cfg_we;
  logic [7:0]         cfg_addr, cfg_raddr;
  logic [31:0]        cfg_wdata, cfg_rdata, update_count;
  coef_t              coef [N];
  logic [SHIFT_W-1:0] shift_amt;
  logic               fir_bypass;
  int checks = 0, failures = 0;

  coef_t m_sh [N], m_act [N];
  int    m_sh_shift, m_act_shift, m_commits;
  bit    m_sh_byp, m_act_byp;

  oal_channel_regs #(.N_TAPS(N)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_active();
    for (int k = 0; k < N; k++) check($sformatf("coef[%0d]", k), coef[k] == m_act[k]);
    check("shift", int'(shift_amt) == m_act_shift);
    check("bypass", fir_bypass == m_act_byp);
    check("count", int'(update_count) == m_commits);
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
    if (int'(a) < N) m_sh[a] = coef_t'(d[15:0]);
    else if (a == REG_SHIFT) m_sh_shift = int'(d[SHIFT_W-1:0]);
    else if (a == REG_CTRL) m_sh_byp = d[0];
    else if (a == REG_COMMIT) begin
      m_act = m_sh; m_act_shift = m_sh_shift; m_act_byp = m_sh_byp; m_commits++;
    end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0; cfg_raddr = '0;
    for (int k = 0; k < N; k++) begin m_sh[k] = '0; m_act[k] = '0; end
    m_sh_shift = 0; m_act_shift = 0; m_sh_byp = 1; m_act_byp = 1; m_commits = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    compare_active();
    check("reset bypass", fir_bypass == 1'b1);

    repeat (30) begin
      // a burst of random shadow writes, including unmapped addresses
      repeat ($urandom_range(1, 20)) begin
        logic [7:0] a;
        case ($urandom_range(0, 5))
          0: a = REG_SHIFT;
          1: a = REG_CTRL;
          2: a = 8'($urandom_range(N, 127));       // unmapped
          default: a = 8'($urandom_range(0, N-1));
        endcase
        wr(a, $urandom);
        compare_active();                           // nothing moves yet
      end
      // commit: the write happens at one posedge, new values the clock after
      @(negedge clk); cfg_we = 1; cfg_addr = REG_COMMIT; cfg_wdata = '0;
      compare_active();                             // still old values
      @(negedge clk); cfg_we = 0;
      m_act = m_sh; m_act_shift = m_sh_shift; m_act_byp = m_sh_byp; m_commits++;
      compare_active();                             // all new at once
      // read port
      repeat (10) begin
        int k;
        k = $urandom_range(0, N-1);
        cfg_raddr = 8'(k); #0.1;
        check("read coef", cfg_rdata == 32'(signed'(m_act[k])));
      end
      cfg_raddr = REG_SHIFT;  #0.1; check("read shift", cfg_rdata == 32'(m_act_shift));
      cfg_raddr = REG_CTRL;   #0.1; check("read ctrl", cfg_rdata == 32'(m_act_byp));
      cfg_raddr = REG_COMMIT; #0.1; check("read count", cfg_rdata == 32'(m_commits));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
