// rev_latch_top: one instance of each reversible circuit in this library,
// side by side:
//   - sg_nand           the Sayem gate wired as a NAND (universal-gate use)
//   - rev_d_latch       D latch, Q only          (1 SG)
//   - rev_d_latch_qbar  D latch, Q and not-Q     (1 SG + 1 FG)
//   - rev_jk_latch      JK latch, Q only         (1 FRG + 1 SG)
//   - rev_jk_latch_qbar JK latch, Q and not-Q    (1 FRG + 1 SG + 1 FG)
// The published work presents these circuits as separate designs and never
// connects them to each other. So each instance gets its own pins with a
// prefix (nand_, dl_, dlq_, jk_, jkq_), and its garbage outputs are packed
// into one vector per instance (bit 0 = g1). Putting them in one top is this
// design's choice.
//
// Timing: everything is combinational or a level-sensitive latch. No clock
// and no reset. The storage loops inside the latches are intended; see those
// modules.
module rev_latch_top (
  // SG as NAND
  input  logic       nand_a,
  input  logic       nand_b,
  output logic       nand_y_n,
  output logic [2:0] nand_g,
  // D latch, Q only
  input  logic       dl_e,
  input  logic       dl_d,
  output logic       dl_q,
  output logic [1:0] dl_g,
  // D latch, Q and not-Q
  input  logic       dlq_e,
  input  logic       dlq_d,
  output logic       dlq_q,
  output logic       dlq_q_bar,
  output logic [1:0] dlq_g,
  // JK latch, Q only
  input  logic       jk_e,
  input  logic       jk_j,
  input  logic       jk_k,
  output logic       jk_q,
  output logic [2:0] jk_g,
  // JK latch, Q and not-Q
  input  logic       jkq_e,
  input  logic       jkq_j,
  input  logic       jkq_k,
  output logic       jkq_q,
  output logic       jkq_q_bar,
  output logic [2:0] jkq_g
);
  sg_nand u_nand (
    .a   (nand_a),
    .b   (nand_b),
    .y_n (nand_y_n),
    .g   (nand_g)
  );

  rev_d_latch u_dl (
    .e  (dl_e),
    .d  (dl_d),
    .q  (dl_q),
    .g1 (dl_g[0]),
    .g2 (dl_g[1])
  );

  rev_d_latch_qbar u_dlq (
    .e     (dlq_e),
    .d     (dlq_d),
    .q     (dlq_q),
    .q_bar (dlq_q_bar),
    .g1    (dlq_g[0]),
    .g2    (dlq_g[1])
  );

  rev_jk_latch u_jk (
    .e  (jk_e),
    .j  (jk_j),
    .k  (jk_k),
    .q  (jk_q),
    .g1 (jk_g[0]),
    .g2 (jk_g[1]),
    .g3 (jk_g[2])
  );

  rev_jk_latch_qbar u_jkq (
    .e     (jkq_e),
    .j     (jkq_j),
    .k     (jkq_k),
    .q     (jkq_q),
    .q_bar (jkq_q_bar),
    .g1    (jkq_g[0]),
    .g2    (jkq_g[1]),
    .g3    (jkq_g[2])
  );
endmodule
