// tb_oal_sample_fifo: self-checking test of the sample FIFO.
//
// Random writes and reads under random back-pressure are compared in order
// with a queue model; the fill level, full (in_ready low after DEPTH
// writes) and empty are checked against the model every clock, and the
// one-clock write-to-output latency is checked on an empty FIFO.
module tb_oal_sample_fifo;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int DEPTH = 32;

  logic clk = 1'b0, rst_n = 1'b1;
  logic in_valid, in_ready, out_valid, out_ready;
  iq_t  in_data, out_data;
  logic [$clog2(DEPTH):0] level;
  int   checks = 0, failures = 0;
  iq_t  model[$];
  int   full_seen = 0;

  oal_sample_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #2.5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(level) != model.size() || in_ready != (model.size() < DEPTH) || out_valid != (model.size() > 0)) begin
      failures++;
      $display("FAIL: level %0d model %0d ready %0d valid %0d", level, model.size(), in_ready, out_valid);
    end
    if (model.size() == DEPTH) full_seen++;
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data !== model[0]) begin
        failures++; $display("FAIL: data mismatch");
      end
      if (model.size() > 0) void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // write-to-output latency on an empty FIFO
    @(negedge clk); in_valid = 1; in_data = '{i: 16'sd7, q: -16'sd7};
    @(negedge clk); in_valid = 0;
    checks++;
    if (!out_valid || out_data.i != 16'sd7) begin failures++; $display("FAIL: latency"); end
    out_ready = 1;
    @(negedge clk); out_ready = 0;
    // random phases: fill-biased, drain-biased, balanced
    for (int ph = 0; ph < 6; ph++) begin
      repeat (1500) begin
        @(negedge clk);
        in_valid  = ($urandom_range(0, 99) < ((ph % 3 == 0) ? 80 : (ph % 3 == 1) ? 20 : 50));
        in_data   = '{i: 16'($urandom), q: 16'($urandom)};
        out_ready = ($urandom_range(0, 99) < ((ph % 3 == 0) ? 20 : (ph % 3 == 1) ? 80 : 50));
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (full_seen == 0 || model.size() != 0) begin failures++; $display("FAIL: full never reached or not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
