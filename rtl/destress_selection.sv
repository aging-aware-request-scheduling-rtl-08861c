// destress_selection: aging computation and the de-stress decision for the selected request.
//
// For the bank of the request chosen by request_selection it evaluates the aging model
//   A_blk = n_r*U_r[blk] + n_w*U_w[blk] + n_i*U_i[blk]
// (through aging_calc) for the pulse shaper (from the bank's write-domain aTab entry) and for
// the verify logic and sense amplifier (from its read-domain entry), in Q16.16 aging units. A
// domain needs a de-stress when its aging reaches the aging threshold th_a (the read domain
// uses the larger of VR and SA, the series-failure maximum), when its idle count reaches the
// idle threshold th_i, or when one of its 4-bit request counters has saturated (the model can
// no longer count; this last rule is this design's own).
//
// Decision, for a non-critical request (a critical one is issued without this check):
//   coupled mode (decoupled = 0): if either domain needs it, de-stress both and hold the
//     request; otherwise issue it.
//   decoupled mode (decoupled = 1):
//     read:  read domain needs it -> de-stress it (and the write domain too if that needs it),
//            hold the request; else issue the read and, if the write domain needs it,
//            de-stress the write domain alongside, since a read does not use the pulse shaper.
//     write: write domain needs it -> de-stress it (and the read domain if that needs it),
//            hold the request; else if the read domain needs it -> de-stress the read domain
//            and issue only the program step, leaving the verify step for later; else issue it.
// A write to a bank whose read domain is already being de-stressed is issued as a program step.
//
// Purely combinational. Outputs: iss_valid/iss_op (OP_READ, OP_WRITE or OP_PROGRAM),
// ds_valid/ds_mask, and the aging values of the selected bank for observation. Since iss_op
// is never OP_VERIFY (verify steps come from the bank state), its top bit is always 0.
module destress_selection
  import hebe_pkg::*;
(
  input  logic              decoupled,
  input  logic              sel_valid,
  input  logic              sel_critical,
  input  logic              sel_is_write,
  input  atab_entry_t       ent_w,         // selected bank, write-pump domain
  input  atab_entry_t       ent_r,         // selected bank, read-pump domain
  input  logic [NDOM-1:0]   bank_ds_active,
  input  unit_aging_t       u [3],
  input  logic [31:0]       th_a,          // a.u., integer
  input  logic [IDLE_W-1:0] th_i,
  output logic              iss_valid,
  output pcm_op_e           iss_op,
  output logic              ds_valid,
  output logic [NDOM-1:0]   ds_mask,
  output logic [AGING_W-1:0] aging_ps,
  output logic [AGING_W-1:0] aging_vr,
  output logic [AGING_W-1:0] aging_sa
);

  logic    need_w, need_r;
  pcm_op_e wr_op;

  aging_calc u_aging (
    .ent_w, .ent_r, .u, .th_a, .th_i,
    .need_w, .need_r, .aging_ps, .aging_vr, .aging_sa
  );

  assign wr_op  = bank_ds_active[DOM_R] ? OP_PROGRAM : OP_WRITE;

  always_comb begin
    iss_valid = 1'b0;
    iss_op    = OP_NOP;
    ds_mask   = '0;
    if (sel_valid) begin
      if (sel_critical) begin
        iss_valid = 1'b1;
      end else if (!decoupled) begin
        if (need_w || need_r) ds_mask = '1;
        else                  iss_valid = 1'b1;
      end else if (!sel_is_write) begin
        ds_mask[DOM_W] = need_w && !bank_ds_active[DOM_W];
        ds_mask[DOM_R] = need_r;
        iss_valid      = !need_r;
      end else begin
        ds_mask[DOM_W] = need_w;
        ds_mask[DOM_R] = need_r && !bank_ds_active[DOM_R];
        iss_valid      = !need_w;
      end
      if (iss_valid) begin
        if (!sel_is_write)                         iss_op = OP_READ;
        else if (decoupled && ds_mask[DOM_R])      iss_op = OP_PROGRAM;
        else                                       iss_op = wr_op;
      end
    end
    ds_valid = |ds_mask;
  end

endmodule
