// hebe_controller: aging-aware PCM memory controller (top level).
//
// Requests from the cache side enter the read-write queue (rwQ). Every cycle the controller
// chooses at most one command for the PCM command port and at most one de-stress for the
// de-stress port:
//   1. request_selection looks at the rwQ, the status table (sTab), the per-domain de-stress
//      state and the access table (aTab). A deferred verify step has priority; otherwise the
//      oldest request is taken if it has waited th_b cycles or more, else the request to the
//      bank with the most idle cycles.
//   2. destress_selection evaluates the aging of the chosen bank's pulse shaper, verify logic
//      and sense amplifier from aTab counts and the unit aging table (uTab). If a threshold
//      (aging th_a, idle th_i) is reached it de-stresses the bank, or in decoupled mode only
//      the charge-pump domain that needs it, and holds or splits the request.
//   3. On the clock edge the issued request leaves the rwQ, its bank is marked busy in sTab,
//      aTab counts it, the bank timers start, and a de-stress clears the domain's aTab entry.
// bank_state times accesses (read 45, write 168 cycles) and de-stress (tDSC = 10 cycles), frees
// banks in sTab, and drives the per-bank charge-pump connections and isolation-transistor gate.
// In decoupled mode background_destress uses de-stress-port cycles the request path leaves
// free: it de-stresses the pulse shaper of a bank busy with a read, or the read-pump domain
// of a bank busy with a program step, when that domain needs it.
//
// Ports: req_* is the request input (valid/ready); pcm_cmd_* the command port (one command per
// cycle, op from hebe_pkg::pcm_op_e, address of the original request; a verify step carries
// address 0 since it acts on the bank's pending write); ds_* the de-stress port (bank and
// domain mask, bit 0 write pump, bit 1 read pump); rd_pump_on/wr_pump_on/iso_on drive the
// analog parts of each bank; mon_aging shows the aging computed for the bank under
// selection. cfg_* are thresholds, the coupled/decoupled mode and the uTab
// write port. All outputs except the per-bank pump signals are combinational from registered
// state (one decision per cycle, no pipeline). Reset is synchronous and active low.
//
// The block structure (rwQ, sTab, aTab, uTab, request selection, de-stress selection) and the
// decision flow follow the published design; timer values, queue depth, the verify-step
// scheduling and the threshold defaults other than th_a are this design's own choices.
module hebe_controller
  import hebe_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128,
  parameter int unsigned RWQ_DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // request input
  input  logic                          req_valid,
  output logic                          req_ready,
  input  mem_req_t                      req,
  // configuration
  input  logic [31:0]                   cfg_th_a,
  input  logic [IDLE_W-1:0]             cfg_th_i,
  input  logic [AGE_W-1:0]              cfg_th_b,
  input  logic                          cfg_decoupled,
  input  logic                          cfg_u_wr_en,
  input  blk_e                          cfg_u_wr_blk,
  input  logic [1:0]                    cfg_u_wr_sel,
  input  logic [UNIT_W-1:0]             cfg_u_wr_data,
  // PCM command port
  output logic                          pcm_cmd_valid,
  output pcm_op_e                       pcm_cmd_op,
  output logic [$clog2(NUM_BANKS)-1:0]  pcm_cmd_bank,
  output logic [ADDR_W-1:0]             pcm_cmd_addr,
  // de-stress port
  output logic                          ds_valid,
  output logic [$clog2(NUM_BANKS)-1:0]  ds_bank,
  output logic [NDOM-1:0]               ds_mask,
  // charge-pump and isolation-transistor control per bank
  output logic [NUM_BANKS-1:0]          rd_pump_on,
  output logic [NUM_BANKS-1:0]          wr_pump_on,
  output logic [NUM_BANKS-1:0]          iso_on,
  // aging of the bank under selection this cycle (pulse shaper, verify logic, sense amp)
  output logic [AGING_W-1:0]            mon_aging [3]
);

  localparam int unsigned BW = $clog2(NUM_BANKS);
  localparam int unsigned IW = $clog2(RWQ_DEPTH);

  // rwQ
  logic [RWQ_DEPTH-1:0] ent_valid;
  mem_req_t             ent_req [RWQ_DEPTH];
  logic [AGE_W-1:0]     ent_age [RWQ_DEPTH];
  logic                 deq_valid;

  // tables and bank state
  logic [NUM_BANKS-1:0] avail, acc_done, verify_pending, serving_read, serving_prog;
  logic [NDOM-1:0]      ds_active [NUM_BANKS];
  logic [NDOM-1:0]      idle_inc  [NUM_BANKS];
  atab_entry_t          aent      [NUM_BANKS][NDOM];
  unit_aging_t          u [3];

  // selection
  logic                 vfy_valid, sel_valid, sel_critical, iss_valid, dsel_valid;
  logic [BW-1:0]        vfy_bank, sel_bank;
  logic [IW-1:0]        sel_idx;
  pcm_op_e              iss_op;
  logic [NDOM-1:0]      dsel_mask, bg_mask;
  logic                 bg_valid;
  logic [BW-1:0]        bg_bank;
  mem_req_t             sel_req;

  rwq #(.DEPTH(RWQ_DEPTH)) u_rwq (
    .clk, .rst_n,
    .in_valid (req_valid), .in_ready (req_ready), .in_req (req),
    .deq_valid, .deq_idx (sel_idx),
    .ent_valid, .ent_req, .ent_age
  );

  stab #(.NUM_BANKS(NUM_BANKS)) u_stab (
    .clk, .rst_n,
    .claim_valid (pcm_cmd_valid), .claim_bank (pcm_cmd_bank),
    .release_vec (acc_done), .avail
  );

  always_comb
    for (int b = 0; b < NUM_BANKS; b++)
      for (int d = 0; d < NDOM; d++) idle_inc[b][d] = avail[b] && !ds_active[b][d];

  atab #(.NUM_BANKS(NUM_BANKS)) u_atab (
    .clk, .rst_n, .idle_inc,
    .acc_valid (pcm_cmd_valid), .acc_op (pcm_cmd_op), .acc_bank (pcm_cmd_bank),
    .clr_valid (ds_valid), .clr_bank (ds_bank), .clr_mask (ds_mask),
    .ent (aent)
  );

  utab u_utab (
    .clk, .rst_n,
    .wr_en (cfg_u_wr_en), .wr_blk (cfg_u_wr_blk), .wr_sel (cfg_u_wr_sel),
    .wr_data (cfg_u_wr_data), .u
  );

  request_selection #(.DEPTH(RWQ_DEPTH), .NUM_BANKS(NUM_BANKS)) u_reqsel (
    .ent_valid, .ent_req, .ent_age, .th_b (cfg_th_b),
    .avail, .ds_active, .verify_pending, .ent (aent),
    .vfy_valid, .vfy_bank, .sel_valid, .sel_idx, .sel_critical
  );

  assign sel_req  = ent_req[sel_idx];
  assign sel_bank = BW'(sel_req.bank);

  destress_selection u_dssel (
    .decoupled (cfg_decoupled),
    .sel_valid, .sel_critical, .sel_is_write (sel_req.is_write),
    .ent_w (aent[sel_bank][DOM_W]), .ent_r (aent[sel_bank][DOM_R]),
    .bank_ds_active (ds_active[sel_bank]),
    .u, .th_a (cfg_th_a), .th_i (cfg_th_i),
    .iss_valid, .iss_op, .ds_valid (dsel_valid), .ds_mask (dsel_mask),
    .aging_ps (mon_aging[BLK_PS]), .aging_vr (mon_aging[BLK_VR]),
    .aging_sa (mon_aging[BLK_SA])
  );

  // Command and de-stress ports.
  always_comb begin
    if (vfy_valid) begin
      pcm_cmd_valid = 1'b1;
      pcm_cmd_op    = OP_VERIFY;
      pcm_cmd_bank  = vfy_bank;
      pcm_cmd_addr  = '0;
    end else begin
      pcm_cmd_valid = iss_valid;
      pcm_cmd_op    = iss_valid ? iss_op : OP_NOP;
      pcm_cmd_bank  = sel_bank;
      pcm_cmd_addr  = sel_req.addr;
    end
    if (dsel_valid && !vfy_valid) begin
      ds_valid = 1'b1;
      ds_bank  = sel_bank;
      ds_mask  = dsel_mask;
    end else begin
      ds_valid = bg_valid;
      ds_bank  = bg_bank;
      ds_mask  = bg_valid ? bg_mask : '0;
    end
    deq_valid = iss_valid && !vfy_valid;
  end

  bank_state #(.NUM_BANKS(NUM_BANKS)) u_bank_state (
    .clk, .rst_n,
    .cmd_valid (pcm_cmd_valid), .cmd_op (pcm_cmd_op), .cmd_bank (pcm_cmd_bank),
    .ds_valid, .ds_bank, .ds_mask,
    .acc_done, .ds_active, .verify_pending, .serving_read, .serving_prog,
    .rd_pump_on, .wr_pump_on, .iso_on
  );

  background_destress #(.NUM_BANKS(NUM_BANKS)) u_bg (
    .clk, .rst_n, .decoupled (cfg_decoupled),
    .serving_read, .serving_prog, .ds_active, .ent (aent),
    .u, .th_a (cfg_th_a), .th_i (cfg_th_i),
    .prop_valid (bg_valid), .prop_bank (bg_bank), .prop_mask (bg_mask)
  );

  // A request must never be issued to a bank whose needed pump is discharged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pcm_cmd_valid && pcm_cmd_op inside {OP_READ, OP_VERIFY}) |-> rd_pump_on[pcm_cmd_bank])
    else $error("hebe_controller: read-pump command while the read pump is discharged");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pcm_cmd_valid && pcm_cmd_op inside {OP_WRITE, OP_PROGRAM}) |-> wr_pump_on[pcm_cmd_bank])
    else $error("hebe_controller: write command while the write pump is discharged");

endmodule
