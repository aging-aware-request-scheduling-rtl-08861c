// tb_bank_state: self-checking test of the per-bank timers and charge-pump control.
// Random commands (to free banks) and de-stresses are issued to 4 banks. For each one the
// testbench records the cycle of issue and checks that acc_done pulses exactly in cycle
// issue + T - 1 (read 45, write 168, program 144, verify 24 cycles), that each domain stays
// de-stressed for exactly tDSC = 10 cycles, that the pump enables follow the de-stress state,
// that the isolation transistor is off exactly when one domain is discharged, and that
// verify_pending follows program and verify commands, and that serving_read/serving_prog
// are high exactly while a read or a program step is in progress.
module tb_bank_state;
  import hebe_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, ds_valid;
  pcm_op_e cmd_op;
  logic [1:0] cmd_bank, ds_bank;
  logic [NDOM-1:0] ds_mask;
  logic [NB-1:0] acc_done, verify_pending, rd_pump_on, wr_pump_on, iso_on, serving_read, serving_prog;
  pcm_op_e cur_op [NB];
  logic [NDOM-1:0] ds_active [NB];
  longint cyc = 0;
  longint busy_until [NB];          // last cycle (inclusive) with the bank busy
  longint ds_until [NB][NDOM];      // last cycle (inclusive) with the domain de-stressed
  bit     vp [NB];
  int checks = 0, failures = 0;
  int n_done = 0;

  bank_state #(.NUM_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dur(pcm_op_e op);
    case (op)
      OP_READ: return 45;
      OP_WRITE: return 168;
      OP_PROGRAM: return 144;
      OP_VERIFY: return 24;
      default: return 0;
    endcase
  endfunction

  initial begin
    cmd_valid = 0; ds_valid = 0; cmd_op = OP_NOP; cmd_bank = 0; ds_bank = 0; ds_mask = 0;
    for (int b = 0; b < NB; b++) begin
      busy_until[b] = -1; vp[b] = 0; cur_op[b] = OP_NOP;
      for (int d = 0; d < NDOM; d++) ds_until[b][d] = -1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      cmd_bank  = 2'($urandom);
      cmd_op    = pcm_op_e'($urandom_range(1, 4));
      cmd_valid = (busy_until[cmd_bank] < cyc) && ($urandom_range(0, 9) == 0);
      ds_bank   = 2'($urandom);
      ds_mask   = 2'($urandom_range(1, 3));
      ds_valid  = ($urandom_range(0, 29) == 0);
      @(posedge clk);
      cyc++;
      if (cmd_valid) begin
        busy_until[cmd_bank] = cyc + dur(cmd_op) - 1;
        cur_op[cmd_bank] = cmd_op;
        if (cmd_op == OP_PROGRAM) vp[cmd_bank] = 1;
        if (cmd_op == OP_VERIFY)  vp[cmd_bank] = 0;
      end
      if (ds_valid)
        for (int d = 0; d < NDOM; d++) if (ds_mask[d]) ds_until[ds_bank][d] = cyc + 10 - 1;
      #1;
      for (int b = 0; b < NB; b++) begin
        bit exp_done, exp_w, exp_r;
        exp_done = (busy_until[b] == cyc);
        exp_w = (ds_until[b][DOM_W] >= cyc);
        exp_r = (ds_until[b][DOM_R] >= cyc);
        checks += 5;
        if (exp_done) n_done++;
        if (acc_done[b] !== exp_done) begin failures++; $display("cyc %0d bank %0d acc_done %b", cyc, b, acc_done[b]); end
        if (ds_active[b] !== {exp_r, exp_w}) begin failures++; $display("cyc %0d bank %0d ds_active", cyc, b); end
        if (wr_pump_on[b] !== !exp_w || rd_pump_on[b] !== !exp_r) begin failures++; $display("cyc %0d bank %0d pumps", cyc, b); end
        if (iso_on[b] !== (exp_w == exp_r)) begin failures++; $display("cyc %0d bank %0d iso", cyc, b); end
        if (verify_pending[b] !== vp[b]) begin failures++; $display("cyc %0d bank %0d vp", cyc, b); end
        checks++;
        if (serving_read[b] !== (busy_until[b] >= cyc && cur_op[b] == OP_READ) ||
            serving_prog[b] !== (busy_until[b] >= cyc && cur_op[b] == OP_PROGRAM)) begin
          failures++; $display("cyc %0d bank %0d serving flags", cyc, b);
        end
      end
    end
    checks++;
    if (n_done < 100) begin failures++; $display("too few completions %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
