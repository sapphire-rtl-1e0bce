// red_pseudo: pseudo-configurable modular reduction (one block per listed prime).
//
// Holds a dedicated reduction circuit for each of the twelve primes used by the
// lattice schemes the paper targets (Kyber, NewHope, R.EMBLEM, pqNTRUSign, Ding
// key exchange, LIMA, Dilithium, qTESLA). qsel (0..11, in the order of
// sapphire_pkg::prime_info) picks the output of one block; the inputs of the
// others are forced to zero (data gating) so they do not toggle. Eleven blocks
// are Barrett reductions with the paper's constants m and k; 65537 uses the
// 2^16 = -1 folding. A qsel above 11 gives 0.
// Interface: z (product < q^2), qsel in; r out. Timing: combinational.
module red_pseudo
  import sapphire_pkg::*;
(
  input  logic [47:0] z,
  input  logic [3:0]  qsel,
  output logic [23:0] r
);
  logic [47:0] zg [NPRIMES];
  logic [23:0] rr [NPRIMES];

  always_comb
    for (int i = 0; i < int'(NPRIMES); i++)
      zg[i] = (qsel == 4'(i)) ? z : 48'd0;

  red_const #(.Q(7681),    .M(273),     .K(21)) u_7681    (.z(zg[0]),  .r(rr[0]));
  red_const #(.Q(12289),   .M(10921),   .K(27)) u_12289   (.z(zg[1]),  .r(rr[1]));
  red_const #(.Q(40961),   .M(52427),   .K(31)) u_40961   (.z(zg[2]),  .r(rr[2]));
  red_65537                                     u_65537   (.z(zg[3]),  .r(rr[3]));
  red_const #(.Q(120833),  .M(71089),   .K(33)) u_120833  (.z(zg[4]),  .r(rr[4]));
  red_const #(.Q(133121),  .M(64527),   .K(33)) u_133121  (.z(zg[5]),  .r(rr[5]));
  red_const #(.Q(184321),  .M(46603),   .K(33)) u_184321  (.z(zg[6]),  .r(rr[6]));
  red_const #(.Q(8380417), .M(8396807), .K(46)) u_8380417 (.z(zg[7]),  .r(rr[7]));
  red_const #(.Q(8058881), .M(8731825), .K(46)) u_8058881 (.z(zg[8]),  .r(rr[8]));
  red_const #(.Q(4205569), .M(4183069), .K(44)) u_4205569 (.z(zg[9]),  .r(rr[9]));
  red_const #(.Q(4206593), .M(2091025), .K(43)) u_4206593 (.z(zg[10]), .r(rr[10]));
  red_const #(.Q(8404993), .M(4186127), .K(45)) u_8404993 (.z(zg[11]), .r(rr[11]));

  always_comb begin
    r = '0;
    for (int i = 0; i < int'(NPRIMES); i++)
      if (qsel == 4'(i)) r = rr[i];
  end
endmodule
