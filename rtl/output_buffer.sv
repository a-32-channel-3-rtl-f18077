// output_buffer: holds the decoded velocities for readout.
//
// When the core signals out_valid the two 16-bit output membrane potentials
// (X and Y velocity) are captured into vel_q and vel_ready is set. A read
// strobe (rd) clears vel_ready. If a new result is captured while the previous
// one was not read, overrun is set until the next read. The paper shows an
// output buffer between Vmem[15:0] and the output pad; the ready/read protocol
// is this design's choice.
module output_buffer
  import bmi_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  out_valid,
  input  vmem_t vel   [L3_N],
  input  logic  rd,
  output vmem_t vel_q [L3_N],
  output logic  vel_ready,
  output logic  overrun
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vel_q     <= '{default: '0};
      vel_ready <= 1'b0;
      overrun   <= 1'b0;
    end else begin
      if (out_valid) begin
        vel_q     <= vel;
        vel_ready <= 1'b1;
        overrun   <= vel_ready && !rd;
      end else if (rd) begin
        vel_ready <= 1'b0;
        overrun   <= 1'b0;
      end
    end
  end
endmodule
