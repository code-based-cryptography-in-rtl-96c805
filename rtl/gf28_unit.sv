// F(2^8) unit of the custom RISC-V instructions: a carry-less multiply-accumulate.
//
// Operand a is 16 bits and operand b is 8 bits. The unit computes
//   d(x) = a[15:8](x) * b(x) + a[7:0](x)
// over GF(2)[x], a 15-bit result with no modular reduction, exactly as the
// paper's equation gives it. The core feeds rs1 as a and rs2 (R-type) or the
// immediate (I-type) as b, and writes d to rd. The unit is purely
// combinational (the paper lists it with 0 registers); the decode of the two
// custom instructions lives in the core, which is not part of this RTL.
module gf28_unit (
  input  logic [15:0] a,
  input  logic [7:0]  b,
  output logic [14:0] d
);
  always_comb begin
    d = {7'b0, a[7:0]};
    for (int i = 0; i < 8; i++) begin
      if (b[i]) d = d ^ ({7'b0, a[15:8]} << i);
    end
  end
endmodule
