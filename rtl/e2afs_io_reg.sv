// e2afs_io_reg -- operand / result register with a valid bit.
//
// Stands for the input-operand and output-square-root blocks at the two ends of the
// E2AFS flow: a W-bit data register with a valid flag. The data register loads only
// when in_valid is high and otherwise holds its value, so idle cycles cause no
// toggling in the datapath behind it (the design aims at low switching activity).
// out_valid follows in_valid one cycle later. The register, its enable and its reset
// are this implementation's choice; the method names the two blocks but does not
// describe them.
//
// Interface: clk, active-low asynchronous reset rst_n (clears valid and data),
// in_valid/in_data in, out_valid/out_data out. Latency 1 cycle, one word per cycle.
module e2afs_io_reg #(
  parameter int unsigned W = e2afs_pkg::FP_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data;
    end
  end

endmodule
