// aging_calc: the aging model of one bank, evaluated combinationally.
//
// From the bank's two aTab entries (write-pump domain: pulse shaper; read-pump domain: verify
// logic and sense amplifier) and the unit aging table it forms
//   A_blk = n_r*U_r[blk] + n_w*U_w[blk] + n_i*U_i[blk]      (Q16.16 aging units)
// and flags, per domain, whether a de-stress is needed: the domain's aging (for the read
// domain the larger of VR and SA) has reached th_a, its idle count has reached th_i, or one of
// its 4-bit request counters has saturated (this design's rule: the count can go no further).
// Products are 16 x 32 bits; the 49-bit sum cannot overflow.
module aging_calc
  import hebe_pkg::*;
(
  input  atab_entry_t        ent_w,
  input  atab_entry_t        ent_r,
  input  unit_aging_t        u [3],
  input  logic [31:0]        th_a,
  input  logic [IDLE_W-1:0]  th_i,
  output logic               need_w,
  output logic               need_r,
  output logic [AGING_W-1:0] aging_ps,
  output logic [AGING_W-1:0] aging_vr,
  output logic [AGING_W-1:0] aging_sa
);

  function automatic logic [AGING_W-1:0] block_aging(atab_entry_t e, unit_aging_t p);
    return AGING_W'(e.n_r) * AGING_W'(p.u_r)
         + AGING_W'(e.n_w) * AGING_W'(p.u_w)
         + AGING_W'(e.n_i) * AGING_W'(p.u_i);
  endfunction

  logic [AGING_W-1:0] th_fx, aging_rd;

  assign aging_ps = block_aging(ent_w, u[BLK_PS]);
  assign aging_vr = block_aging(ent_r, u[BLK_VR]);
  assign aging_sa = block_aging(ent_r, u[BLK_SA]);
  assign aging_rd = (aging_vr > aging_sa) ? aging_vr : aging_sa;
  assign th_fx    = AGING_W'(th_a) << UFRAC;

  assign need_w = (aging_ps >= th_fx) || (ent_w.n_i >= th_i) || (&ent_w.n_r) || (&ent_w.n_w);
  assign need_r = (aging_rd >= th_fx) || (ent_r.n_i >= th_i) || (&ent_r.n_r) || (&ent_r.n_w);

endmodule
