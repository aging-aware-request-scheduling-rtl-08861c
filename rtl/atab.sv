// atab: access table (aTab) holding, per bank, what the aging model needs.
//
// Each entry has a 16-bit idle-cycle count n_i and two 4-bit request counts n_r and n_w,
// all saturating, counted since the entry was last cleared by a de-stress. Because the
// write-pump domain (pulse shaper) and the read-pump domain (verify logic, sense amplifier)
// are de-stressed independently, each bank has one entry per domain, so that clearing one
// domain keeps the other's history. With both domains always de-stressed together (coupled
// mode) the two entries hold the same values.
//
// Updates, on each clock edge:
//   * idle_inc[b][d] high: n_i of bank b, domain d, counts one idle cycle;
//   * acc_valid: a command to acc_bank counts one request: OP_READ n_r in both domains,
//     OP_WRITE n_w in both, OP_PROGRAM n_w in the write domain, OP_VERIFY n_w in the read
//     domain (the step that raises each block's voltage);
//   * clr_valid: entries of clr_bank selected by clr_mask are zeroed (de-stress), which takes
//     precedence over counting in that cycle.
// The table is read through the registered ent output. Reset (synchronous) clears all entries.
//
// The field widths are the published ones; the second entry per bank doubles the published
// storage (see the reference documentation for why).
module atab
  import hebe_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NDOM-1:0]               idle_inc [NUM_BANKS],
  input  logic                          acc_valid,
  input  pcm_op_e                       acc_op,
  input  logic [$clog2(NUM_BANKS)-1:0]  acc_bank,
  input  logic                          clr_valid,
  input  logic [$clog2(NUM_BANKS)-1:0]  clr_bank,
  input  logic [NDOM-1:0]               clr_mask,
  output atab_entry_t                   ent [NUM_BANKS][NDOM]
);

  localparam int unsigned BW = $clog2(NUM_BANKS);

  function automatic logic [RCNT_W-1:0] sat_inc4(logic [RCNT_W-1:0] v, logic en);
    return (en && v != '1) ? v + 1'b1 : v;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++)
        for (int d = 0; d < NDOM; d++) ent[b][d] <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        for (int d = 0; d < NDOM; d++) begin
          logic hit, rd, wr;
          hit = acc_valid && acc_bank == BW'(b);
          rd  = hit && acc_op == OP_READ;
          wr  = hit && (acc_op == OP_WRITE ||
                        (acc_op == OP_PROGRAM && d == DOM_W) ||
                        (acc_op == OP_VERIFY  && d == DOM_R));
          if (clr_valid && clr_mask[d] && clr_bank == BW'(b)) begin
            ent[b][d] <= '0;
          end else begin
            ent[b][d].n_r <= sat_inc4(ent[b][d].n_r, rd);
            ent[b][d].n_w <= sat_inc4(ent[b][d].n_w, wr);
            if (idle_inc[b][d] && ent[b][d].n_i != '1) ent[b][d].n_i <= ent[b][d].n_i + 1'b1;
          end
        end
      end
    end
  end

endmodule
