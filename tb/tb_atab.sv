// tb_atab: self-checking test of the access table.
// Drives random idle increments, commands (read, write, program, verify) and per-domain
// clears on a 4-bank table and compares every entry with a reference model each cycle,
// including saturation of the 4-bit request counts and of the 16-bit idle count (the latter
// reached by holding one bank idle for 70,000 cycles).
module tb_atab;
  import hebe_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic [NDOM-1:0] idle_inc [NB];
  logic acc_valid, clr_valid;
  pcm_op_e acc_op;
  logic [1:0] acc_bank, clr_bank;
  logic [NDOM-1:0] clr_mask;
  atab_entry_t ent [NB][NDOM];
  int m_i [NB][NDOM], m_r [NB][NDOM], m_w [NB][NDOM];
  int checks = 0, failures = 0;

  atab #(.NUM_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit rnd);
    @(negedge clk);
    for (int b = 0; b < NB; b++) idle_inc[b] = rnd ? 2'($urandom) : 2'b11;
    acc_valid = rnd && $urandom_range(0, 1);
    acc_op    = pcm_op_e'($urandom_range(1, 4));
    acc_bank  = 2'($urandom);
    clr_valid = rnd && ($urandom_range(0, 19) == 0);
    clr_bank  = 2'($urandom);
    clr_mask  = 2'($urandom);
    @(posedge clk);
    for (int b = 0; b < NB; b++)
      for (int d = 0; d < NDOM; d++) begin
        if (clr_valid && clr_bank == b && clr_mask[d]) begin
          m_i[b][d] = 0; m_r[b][d] = 0; m_w[b][d] = 0;
        end else begin
          if (idle_inc[b][d] && m_i[b][d] < 65535) m_i[b][d]++;
          if (acc_valid && acc_bank == b) begin
            if (acc_op == OP_READ && m_r[b][d] < 15) m_r[b][d]++;
            if ((acc_op == OP_WRITE || (acc_op == OP_PROGRAM && d == DOM_W) ||
                 (acc_op == OP_VERIFY && d == DOM_R)) && m_w[b][d] < 15) m_w[b][d]++;
          end
        end
      end
    #1;
  endtask

  task automatic compare(input int cyc);
    for (int b = 0; b < NB; b++)
      for (int d = 0; d < NDOM; d++) begin
        checks++;
        if (ent[b][d].n_i != m_i[b][d] || ent[b][d].n_r != m_r[b][d] || ent[b][d].n_w != m_w[b][d]) begin
          failures++;
          $display("cyc %0d bank %0d dom %0d: %0d/%0d/%0d exp %0d/%0d/%0d", cyc, b, d,
                   ent[b][d].n_i, ent[b][d].n_r, ent[b][d].n_w, m_i[b][d], m_r[b][d], m_w[b][d]);
        end
      end
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin
      idle_inc[b] = 0;
      for (int d = 0; d < NDOM; d++) begin m_i[b][d] = 0; m_r[b][d] = 0; m_w[b][d] = 0; end
    end
    acc_valid = 0; clr_valid = 0; acc_op = OP_READ; acc_bank = 0; clr_bank = 0; clr_mask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin step(1); compare(cyc); end
    // long idle stretch: idle counters saturate at 65535
    for (int cyc = 0; cyc < 70000; cyc++) step(0);
    compare(-1);
    checks++;
    if (ent[0][0].n_i != 16'hFFFF) begin failures++; $display("idle count did not saturate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
