// pcm_model: behavioural model of the PCM banks as seen from the controller (not
// synthesizable; used by testbenches only).
//
// It keeps its own copy of each bank's occupancy using the PCM timing figures (read row
// cycle 56.25 ns = 45 cycles, write 209.75 ns = 168 cycles at 1.25 ns; the program/verify
// split 144 + 24 and tDSC = 10 cycles) and of each charge-pump domain's de-stress window, and
// counts protocol violations:
//   * a command to a bank that is still busy;
//   * a read or verify while the bank's read pump is discharged, a write or program step while
//     its write pump is discharged, a full write while either is discharged;
//   * a verify step with no program step pending, or a write/program with a verify pending;
//   * a de-stress of a domain that the bank's operation in progress is using (the write pump
//     for a write or program step, the read pump for a read, write or verify);
//   * pump-control outputs of the controller that disagree with the de-stress windows.
// It exposes busy and de-stress state so a testbench can account idle cycles independently.
module pcm_model #(
  parameter int NB = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic [2:0]        cmd_op,
  input  logic [$clog2(NB)-1:0] cmd_bank,
  input  logic              ds_valid,
  input  logic [$clog2(NB)-1:0] ds_bank,
  input  logic [1:0]        ds_mask,
  input  logic [NB-1:0]     rd_pump_on,
  input  logic [NB-1:0]     wr_pump_on,
  output logic [NB-1:0]     busy,
  output logic [1:0]        ds_on [NB],
  output int                violations,
  output int                n_reads,
  output int                n_writes,
  output int                n_programs,
  output int                n_verifies
);
  longint cyc;
  longint busy_until [NB];
  longint ds_until [NB][2];
  bit     vpend [NB];
  logic [2:0] cur [NB];

  always_comb
    for (int b = 0; b < NB; b++) begin
      busy[b] = busy_until[b] >= cyc;
      for (int d = 0; d < 2; d++) ds_on[b][d] = ds_until[b][d] >= cyc;
    end

  function automatic int dur(logic [2:0] op);
    case (op)
      3'd1: return 45;
      3'd2: return 168;
      3'd3: return 144;
      3'd4: return 24;
      default: return 0;
    endcase
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0;
      violations <= 0; n_reads <= 0; n_writes <= 0; n_programs <= 0; n_verifies <= 0;
      for (int b = 0; b < NB; b++) begin
        busy_until[b] <= -1; vpend[b] <= 0; cur[b] <= 0;
        ds_until[b][0] <= -1; ds_until[b][1] <= -1;
      end
    end else begin
      int v;
      v = 0;
      for (int b = 0; b < NB; b++)
        if (wr_pump_on[b] == ds_on[b][0] || rd_pump_on[b] == ds_on[b][1]) v++;
      if (cmd_valid && cmd_op != 0) begin
        if (busy[cmd_bank]) v++;
        case (cmd_op)
          3'd1: begin if (ds_on[cmd_bank][1]) v++; n_reads <= n_reads + 1; end
          3'd2: begin if (ds_on[cmd_bank] != 0 || vpend[cmd_bank]) v++; n_writes <= n_writes + 1; end
          3'd3: begin if (ds_on[cmd_bank][0] || vpend[cmd_bank]) v++; vpend[cmd_bank] <= 1;
                      n_programs <= n_programs + 1; end
          3'd4: begin if (ds_on[cmd_bank][1] || !vpend[cmd_bank]) v++; vpend[cmd_bank] <= 0;
                      n_verifies <= n_verifies + 1; end
          default: v++;
        endcase
        busy_until[cmd_bank] <= cyc + 1 + dur(cmd_op) - 1;
        cur[cmd_bank] <= cmd_op;
      end
      if (ds_valid && busy[ds_bank]) begin
        if (ds_mask[0] && cur[ds_bank] inside {3'd2, 3'd3}) v++;
        if (ds_mask[1] && cur[ds_bank] inside {3'd1, 3'd2, 3'd4}) v++;
      end
      if (ds_valid)
        for (int d = 0; d < 2; d++) if (ds_mask[d]) ds_until[ds_bank][d] <= cyc + 1 + 10 - 1;
      if (v != 0) $display("pcm_model: %0d violation(s) in cycle %0d", v, cyc);
      violations <= violations + v;
      cyc <= cyc + 1;
    end
  end
endmodule
