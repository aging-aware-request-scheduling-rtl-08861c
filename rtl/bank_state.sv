// bank_state: per-bank access timers, de-stress timers and charge-pump control.
//
// For every bank this block keeps
//   * an access timer loaded when a command is issued (read T_RC_RD, write T_RC_WR, program
//     step T_PROG, verify step T_VERIFY cycles); it pulses acc_done in the last busy cycle so
//     that sTab frees the bank on the following edge, giving exactly T cycles of occupancy;
//   * one de-stress timer per charge-pump domain (write pump: pulse shaper; read pump: verify
//     logic and sense amplifier), loaded with T_DSC when a de-stress is issued to the domain;
//     ds_active is high for exactly T_DSC cycles;
//   * a verify-pending flag, set by a program-only write and cleared when its verify step is
//     issued;
//   * the operation in progress, exported as serving_read / serving_prog (high while the bank
//     is busy with a read, or with a program step), so that the domain the operation does not
//     use can be de-stressed alongside it.
// From the de-stress state it drives the charge-pump connections of each bank as in the
// decoupled control table: a domain whose pump is discharged is being de-stressed. The
// isolation transistor between pulse shaper and verify logic is opened (iso_on low) whenever
// exactly one of the two domains is discharged; that gate rule is this design's reading of
// the published description, which states only that the transistor decouples the two blocks.
//
// Interface: cmd_* is the command issued to the PCM this cycle; ds_* is the de-stress issued
// this cycle (ds_mask bit DOM_W / DOM_R selects the domains). All outputs are registered.
// Reset (synchronous, active low) leaves every bank idle with both pumps connected.
module bank_state
  import hebe_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid,
  input  pcm_op_e                       cmd_op,
  input  logic [$clog2(NUM_BANKS)-1:0]  cmd_bank,
  input  logic                          ds_valid,
  input  logic [$clog2(NUM_BANKS)-1:0]  ds_bank,
  input  logic [NDOM-1:0]               ds_mask,
  output logic [NUM_BANKS-1:0]          acc_done,
  output logic [NDOM-1:0]               ds_active [NUM_BANKS],
  output logic [NUM_BANKS-1:0]          verify_pending,
  output logic [NUM_BANKS-1:0]          serving_read,
  output logic [NUM_BANKS-1:0]          serving_prog,
  output logic [NUM_BANKS-1:0]          rd_pump_on,
  output logic [NUM_BANKS-1:0]          wr_pump_on,
  output logic [NUM_BANKS-1:0]          iso_on
);

  localparam int unsigned BW = $clog2(NUM_BANKS);

  logic [TCNT_W-1:0] acc_cnt [NUM_BANKS];
  pcm_op_e           acc_op  [NUM_BANKS];
  logic [DCNT_W-1:0] ds_cnt  [NUM_BANKS][NDOM];

  function automatic logic [TCNT_W-1:0] op_time(pcm_op_e op);
    case (op)
      OP_READ:    return TCNT_W'(T_RC_RD);
      OP_WRITE:   return TCNT_W'(T_RC_WR);
      OP_PROGRAM: return TCNT_W'(T_PROG);
      OP_VERIFY:  return TCNT_W'(T_VERIFY);
      default:    return '0;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      verify_pending <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        acc_cnt[b] <= '0;
        acc_op[b]  <= OP_NOP;
        for (int d = 0; d < NDOM; d++) ds_cnt[b][d] <= '0;
      end
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (cmd_valid && cmd_op != OP_NOP && cmd_bank == BW'(b)) begin
          acc_cnt[b] <= op_time(cmd_op);
          acc_op[b]  <= cmd_op;
          if (cmd_op == OP_PROGRAM) verify_pending[b] <= 1'b1;
          if (cmd_op == OP_VERIFY)  verify_pending[b] <= 1'b0;
        end else if (acc_cnt[b] != '0) begin
          acc_cnt[b] <= acc_cnt[b] - 1'b1;
        end
        for (int d = 0; d < NDOM; d++) begin
          if (ds_valid && ds_mask[d] && ds_bank == BW'(b)) ds_cnt[b][d] <= DCNT_W'(T_DSC);
          else if (ds_cnt[b][d] != '0)                     ds_cnt[b][d] <= ds_cnt[b][d] - 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      acc_done[b]     = (acc_cnt[b] == TCNT_W'(1));
      serving_read[b] = (acc_cnt[b] != '0) && (acc_op[b] == OP_READ);
      serving_prog[b] = (acc_cnt[b] != '0) && (acc_op[b] == OP_PROGRAM);
      for (int d = 0; d < NDOM; d++) ds_active[b][d] = (ds_cnt[b][d] != '0);
      wr_pump_on[b] = !ds_active[b][DOM_W];
      rd_pump_on[b] = !ds_active[b][DOM_R];
      iso_on[b]     = (wr_pump_on[b] == rd_pump_on[b]);
    end
  end

  // A command may only be issued to a bank whose access timer has run out.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && cmd_op != OP_NOP) |-> acc_cnt[cmd_bank] == '0)
    else $error("bank_state: command to a busy bank");

endmodule
