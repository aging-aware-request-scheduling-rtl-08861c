// request_selection: picks the next request (or deferred verify step) to send to the PCM.
//
// The selection follows the published flowchart. The oldest request in the rwQ (slot 0) is
// critical when it has been outstanding for at least th_b cycles (the backlogging threshold);
// a critical request is chosen ahead of everything else and skips the de-stress check. Any
// other choice goes to the request whose bank has been idle longest, by the aTab idle count
// (the larger of the bank's two domain counts); ties go to the older request.
//
// A request is eligible only if its bank is free (sTab) and the charge-pump domain it needs
// is powered: a read needs the read pump; a write needs the write pump and no verify step
// of an earlier write may still be pending on the bank. When the oldest request is critical
// but its bank is not yet eligible, other banks keep being served, but no younger request to
// that bank is chosen, so the critical one is next there.
//
// Deferred verify steps take the command slot before any new request: a bank whose verify
// is pending, which is free and whose read pump is powered, is served first (lowest bank).
//
// Purely combinational; all inputs are registered state of the controller. Outputs:
// vfy_valid/vfy_bank for a verify step, otherwise sel_valid/sel_idx/sel_critical for a request.
// The idle-count key and the handling of an ineligible critical request are this design's own
// choices; the published text leaves them open.
module request_selection
  import hebe_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned NUM_BANKS = 128
) (
  input  logic [DEPTH-1:0]              ent_valid,
  input  mem_req_t                      ent_req [DEPTH],
  input  logic [AGE_W-1:0]              ent_age [DEPTH],
  input  logic [AGE_W-1:0]              th_b,
  input  logic [NUM_BANKS-1:0]          avail,
  input  logic [NDOM-1:0]               ds_active [NUM_BANKS],
  input  logic [NUM_BANKS-1:0]          verify_pending,
  input  atab_entry_t                   ent [NUM_BANKS][NDOM],
  output logic                          vfy_valid,
  output logic [$clog2(NUM_BANKS)-1:0]  vfy_bank,
  output logic                          sel_valid,
  output logic [$clog2(DEPTH)-1:0]      sel_idx,
  output logic                          sel_critical
);

  localparam int unsigned BW = $clog2(NUM_BANKS);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [DEPTH-1:0] eligible;
  logic             crit;
  logic [BW-1:0]    crit_bank;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      logic [BW-1:0] b;
      b = BW'(ent_req[i].bank);
      if (ent_req[i].is_write)
        eligible[i] = ent_valid[i] && avail[b] && !ds_active[b][DOM_W] && !verify_pending[b];
      else
        eligible[i] = ent_valid[i] && avail[b] && !ds_active[b][DOM_R];
    end
  end

  assign crit      = ent_valid[0] && (ent_age[0] >= th_b);
  assign crit_bank = BW'(ent_req[0].bank);

  // Deferred verify steps.
  always_comb begin
    vfy_valid = 1'b0;
    vfy_bank  = '0;
    for (int b = NUM_BANKS - 1; b >= 0; b--) begin
      if (verify_pending[b] && avail[b] && !ds_active[b][DOM_R]) begin
        vfy_valid = 1'b1;
        vfy_bank  = BW'(b);
      end
    end
  end

  // Request choice.
  always_comb begin
    logic [IDLE_W-1:0] best_key, key;
    logic [BW-1:0]     b;
    sel_valid    = 1'b0;
    sel_idx      = '0;
    sel_critical = 1'b0;
    best_key     = '0;
    key          = '0;
    b            = '0;
    if (!vfy_valid) begin
      if (crit && eligible[0]) begin
        sel_valid    = 1'b1;
        sel_critical = 1'b1;
      end else begin
        for (int i = 0; i < DEPTH; i++) begin
          b   = BW'(ent_req[i].bank);
          key = (ent[b][DOM_W].n_i > ent[b][DOM_R].n_i) ? ent[b][DOM_W].n_i : ent[b][DOM_R].n_i;
          if (eligible[i] && !(crit && b == crit_bank) && (!sel_valid || key > best_key)) begin
            sel_valid = 1'b1;
            sel_idx   = IW'(i);
            best_key  = key;
          end
        end
      end
    end
  end

endmodule
