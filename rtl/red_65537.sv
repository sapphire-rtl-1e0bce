// red_65537: reduction modulo the Fermat prime q = 2^16 + 1.
//
// Splits z = z2*2^32 + z1*2^16 + z0 and uses 2^16 = -1 mod q:
// r = z0 - z1 + z2, plus q when negative, as in the paper's appendix.
// Interface: z (< q^2) in, r out. Timing: combinational.
module red_65537 (
  input  logic [47:0] z,
  output logic [23:0] r
);
  logic signed [19:0] s;

  always_comb begin
    s = $signed({4'b0, z[15:0]}) - $signed({4'b0, z[31:16]}) + $signed({4'b0, z[47:32]});
    if (s < 0) s = s + 20'sd65537;
    r = 24'($unsigned(s));
  end
endmodule
