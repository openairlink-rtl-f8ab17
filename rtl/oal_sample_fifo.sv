// oal_sample_fifo: synchronous first-in first-out buffer for IQ samples.
//
// The paper's FPGA channel sits in a framework that places FIFO buffers
// between processing blocks so that the stream keeps flowing and no sample
// is lost while a block stalls; the paper names these buffers but gives no
// size or structure.  This one is a plain circular buffer: a DEPTH-entry
// array with read and write pointers one bit wider than the index, so that
// full and empty are told apart by the extra bit.  DEPTH must be a power of
// two; its default of 32 is this design's choice.
//
// Interface: in_* and out_* are valid/ready streams; out_data shows the
// oldest entry whenever out_valid is high.  level is the fill count.
// Timing: a written sample is visible at the output the clock after it is
// written; one write and one read may happen in the same clock.
module oal_sample_fifo
  import oal_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  iq_t                    in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output iq_t                    out_data,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AW = $clog2(DEPTH);

  iq_t         mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic        do_wr, do_rd;

  assign level     = wr_ptr - rd_ptr;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH)
    else $error("oal_sample_fifo: DEPTH must be a power of two");

endmodule
