// mod_mul: single-cycle modular multiplier, z = x * y mod q.
//
// A 24x24 multiplier feeds one of three reductions, chosen by qmode:
//   0..11  the dedicated reduction block of a listed prime (red_pseudo),
//   12     the fully configurable Barrett circuit with run-time q, m, k,
//   13     reduction modulo 2^k by masking the low k bits (power-of-two q, Frodo).
// The paper builds both the dedicated and the configurable reduction; keeping
// both behind one select is this design's choice. The unused reduction sees a
// zero input. Interface: x, y (< q), qmode, q, m, k in; z out.
// Timing: combinational, one cycle in the datapath.
module mod_mul
  import sapphire_pkg::*;
(
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [3:0]   qmode,
  input  logic [W-1:0] q,
  input  logic [W-1:0] m,
  input  logic [5:0]   k,
  output logic [W-1:0] z
);
  logic [2*W-1:0] p, p_pseudo, p_cfg;
  logic [W-1:0]   r_pseudo, r_cfg, r_pow2;

  always_comb begin
    p        = {{W{1'b0}}, x} * {{W{1'b0}}, y};
    p_pseudo = (qmode < 4'(NPRIMES)) ? p : '0;
    p_cfg    = (qmode == QM_CONFIG) ? p : '0;
    r_pow2   = p[W-1:0] & W'((48'd1 << k) - 48'd1);
  end

  red_pseudo      u_pseudo (.z(p_pseudo), .qsel(qmode), .r(r_pseudo));
  red_barrett_cfg u_cfg    (.z(p_cfg), .q(q), .m(m), .k(k), .r(r_cfg));

  always_comb begin
    if (qmode < 4'(NPRIMES))      z = r_pseudo;
    else if (qmode == QM_CONFIG)  z = r_cfg;
    else                          z = r_pow2;
  end
endmodule
