// background_destress: de-stresses an unused charge-pump domain of a busy bank (decoupled mode).
//
// In decoupled mode a logic block can be de-stressed while the bank serves a request that does
// not use it. A read uses only the read pump (sense amplifier), so the pulse shaper may be
// de-stressed meanwhile. A program step uses only the write pump, so the verify logic and the
// sense amplifier may be de-stressed meanwhile. The request path (destress_selection) only
// checks a bank at the moment a request is chosen for it. This block adds a background check.
//
// A round-robin pointer visits one bank per cycle and evaluates its aging with aging_calc. It
// proposes a de-stress of the write domain if the bank is serving a read and that domain needs
// it. It proposes a de-stress of the read domain if the bank is serving a program step and that
// domain needs it. A domain already being de-stressed is not proposed again.
// The proposal is used only in a cycle where the request path issues no de-stress; the pointer
// advances every cycle regardless. Nothing is proposed in coupled mode, where the whole
// circuit must wait for the access to end.
//
// Only the two need flags of aging_calc are used here; its aging values are left open.
// Interface: registered pointer, combinational proposal (prop_valid, prop_bank, prop_mask).
// The scan order and the one-bank-per-cycle rate are this design's choices; the published
// description says only that decoupled de-stress runs in parallel with ongoing accesses.
module background_destress
  import hebe_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          decoupled,
  input  logic [NUM_BANKS-1:0]          serving_read,
  input  logic [NUM_BANKS-1:0]          serving_prog,
  input  logic [NDOM-1:0]               ds_active [NUM_BANKS],
  input  atab_entry_t                   ent [NUM_BANKS][NDOM],
  input  unit_aging_t                   u [3],
  input  logic [31:0]                   th_a,
  input  logic [IDLE_W-1:0]             th_i,
  output logic                          prop_valid,
  output logic [$clog2(NUM_BANKS)-1:0]  prop_bank,
  output logic [NDOM-1:0]               prop_mask
);

  localparam int unsigned BW = $clog2(NUM_BANKS);

  logic [BW-1:0]      ptr;
  logic               need_w, need_r;

  always_ff @(posedge clk) begin
    if (!rst_n)                            ptr <= '0;
    else if (ptr == BW'(NUM_BANKS - 1))    ptr <= '0;
    else                                   ptr <= ptr + 1'b1;
  end

  aging_calc u_aging (
    .ent_w (ent[ptr][DOM_W]), .ent_r (ent[ptr][DOM_R]), .u, .th_a, .th_i,
    .need_w, .need_r, .aging_ps (), .aging_vr (), .aging_sa ()
  );

  always_comb begin
    prop_bank         = ptr;
    prop_mask         = '0;
    prop_mask[DOM_W]  = decoupled && serving_read[ptr] && need_w && !ds_active[ptr][DOM_W];
    prop_mask[DOM_R]  = decoupled && serving_prog[ptr] && need_r && !ds_active[ptr][DOM_R];
    prop_valid        = |prop_mask;
  end

endmodule
