// pico_reset_ctrl: keeps the PicoRV32 core in reset until it is started.
//
// After system reset the core's active-low reset output stays low, so the
// core fetches nothing while the host SPARC core loads its program. When the
// start interrupt arrives (start_int high for one cycle, a start-type
// interrupt delivered through the L1.5) the output goes high on the next
// clock edge and stays high until the next system reset. Further start
// interrupts are ignored; `start_count` counts all start interrupts seen.
//
// Following the paper, the core is brought out of reset by an interrupt sent
// from the OpenSPARC T1 core. That only a system reset puts it back into
// reset is this design's choice; the paper names no stop mechanism.
module pico_reset_ctrl #(
  parameter int unsigned CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_int,
  output logic             core_resetn,
  output logic [CNT_W-1:0] start_count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_resetn <= 1'b0;
      start_count <= '0;
    end else if (start_int) begin
      core_resetn <= 1'b1;
      start_count <= start_count + 1'b1;
    end
  end

endmodule
