// const_mult -- constant (scalar) multiplier unit.
//
// Multiplies a 32-bit word by MULT_CONST and keeps the low 32 bits of the
// product. Combinational. The paper names a "constant multiplier" as the first
// stage of its example application but gives neither the constant nor the
// width rule; both are this design's choices.
module const_mult #(
  parameter int unsigned       DW         = 32,
  parameter logic [31:0]       MULT_CONST = 32'd3
) (
  input  logic [DW-1:0] a_i,
  output logic [DW-1:0] y_o
);
  logic [2*DW-1:0] prod;
  assign prod = a_i * (2*DW)'(MULT_CONST);
  assign y_o  = prod[DW-1:0];
endmodule
