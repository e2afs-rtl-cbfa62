// e2afs_top -- registered E2AFS approximate binary16 square-root unit.
//
// An input operand register, the combinational E2AFS datapath (e2afs_core) and an
// output register, matching the input-operand, datapath and output-square-root blocks
// of the method's flow. One operand can be accepted every clock cycle; the result of
// an operand presented with in_valid in cycle n appears with out_valid in cycle n+2.
// The critical path is the datapath between the two registers. The register stages,
// the valid protocol and the reset are this implementation's choice.
//
// Ports: clk, rst_n (active-low, asynchronous), in_valid, in_m[15:0] (binary16
// operand), out_valid, out_sqrt[15:0] (binary16 approximate square root).
module e2afs_top
  import e2afs_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [FP_W-1:0] in_m,
  output logic            out_valid,
  output logic [FP_W-1:0] out_sqrt
);

  logic            op_valid;
  logic [FP_W-1:0] op_m;
  fp16_t           core_q;

  e2afs_io_reg #(.W(FP_W)) u_in_reg (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_data   (in_m),
    .out_valid (op_valid),
    .out_data  (op_m)
  );

  e2afs_core u_core (
    .m (fp16_t'(op_m)),
    .q (core_q)
  );

  e2afs_io_reg #(.W(FP_W)) u_out_reg (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (op_valid),
    .in_data   (core_q),
    .out_valid (out_valid),
    .out_data  (out_sqrt)
  );

endmodule
