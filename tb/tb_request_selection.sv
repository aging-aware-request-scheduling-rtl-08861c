// tb_request_selection: self-checking test of the request selection logic.
// Random queue contents, ages, bank availability, de-stress state, pending verifies and aTab
// idle counts are applied to an 8-entry, 8-bank instance. The expected choice is worked out
// by a reference written as a ranking: verify first (lowest bank), then a critical oldest
// request, then the eligible request with the largest idle count, oldest first on ties.
// Directed cases make sure critical, blocked-critical and verify choices occur.
module tb_request_selection;
  import hebe_pkg::*;
  localparam int D = 8, NB = 8;
  logic [D-1:0] ent_valid;
  mem_req_t ent_req [D];
  logic [AGE_W-1:0] ent_age [D];
  logic [AGE_W-1:0] th_b;
  logic [NB-1:0] avail, verify_pending;
  logic [NDOM-1:0] ds_active [NB];
  atab_entry_t ent [NB][NDOM];
  logic vfy_valid, sel_valid, sel_critical;
  logic [2:0] vfy_bank, sel_idx;
  int checks = 0, failures = 0;
  int n_vfy = 0, n_crit = 0, n_norm = 0, n_none = 0;

  request_selection #(.DEPTH(D), .NUM_BANKS(NB)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ok(int i);
    int b;
    b = ent_req[i].bank[2:0];
    if (!ent_valid[i] || !avail[b]) return 0;
    return ent_req[i].is_write ? (!ds_active[b][0] && !verify_pending[b]) : !ds_active[b][1];
  endfunction

  function automatic int idle_of(int b);
    return (ent[b][0].n_i > ent[b][1].n_i) ? ent[b][0].n_i : ent[b][1].n_i;
  endfunction

  task automatic check_one();
    bit e_vfy, e_sel, e_crit;
    int e_vb, e_idx, best;
    bit crit;
    e_vfy = 0; e_vb = 0; e_sel = 0; e_crit = 0; e_idx = 0; best = -1;
    for (int b = 0; b < NB; b++)
      if (!e_vfy && verify_pending[b] && avail[b] && !ds_active[b][1]) begin e_vfy = 1; e_vb = b; end
    crit = ent_valid[0] && ent_age[0] >= th_b;
    if (!e_vfy) begin
      if (crit && ok(0)) begin e_sel = 1; e_crit = 1; e_idx = 0; end
      else
        for (int i = 0; i < D; i++)
          if (ok(i) && !(crit && ent_req[i].bank[2:0] == ent_req[0].bank[2:0]) && idle_of(ent_req[i].bank[2:0]) > best) begin
            best = idle_of(ent_req[i].bank[2:0]); e_sel = 1; e_idx = i;
          end
    end
    #1;
    checks++;
    if (vfy_valid !== e_vfy || (e_vfy && vfy_bank != e_vb) || sel_valid !== e_sel ||
        (e_sel && (sel_idx != e_idx || sel_critical !== e_crit))) begin
      failures++;
      $display("mismatch: vfy %b/%b bank %0d/%0d sel %b/%b idx %0d/%0d crit %b/%b",
               vfy_valid, e_vfy, vfy_bank, e_vb, sel_valid, e_sel, sel_idx, e_idx, sel_critical, e_crit);
    end
    if (e_vfy) n_vfy++; else if (e_crit) n_crit++; else if (e_sel) n_norm++; else n_none++;
  endtask

  task automatic randomise(int density);
    for (int i = 0; i < D; i++) begin
      ent_valid[i] = ($urandom_range(0, 99) < 80);
      ent_req[i]   = '{is_write: 1'($urandom), bank: 7'($urandom_range(0, NB - 1)), addr: $urandom};
      ent_age[i]   = 16'($urandom_range(0, 300));
    end
    th_b = 16'($urandom_range(100, 400));
    for (int b = 0; b < NB; b++) begin
      avail[b] = ($urandom_range(0, 99) < 70);
      verify_pending[b] = ($urandom_range(0, 99) < density);
      ds_active[b] = ($urandom_range(0, 99) < 30) ? 2'($urandom) : 2'b00;
      for (int d = 0; d < NDOM; d++) ent[b][d] = '{n_i: 16'($urandom_range(0, 40)), n_r: 4'($urandom), n_w: 4'($urandom)};
    end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) begin
      randomise(n % 2 ? 0 : 8);
      check_one();
    end
    // Directed: oldest request critical but its bank busy; a younger request to the same bank
    // with a larger idle count must not be chosen, a request to another bank must.
    randomise(0);
    ent_valid = '1; th_b = 10; ent_age[0] = 50;
    for (int i = 0; i < D; i++) ent_req[i] = '{is_write: 1'b0, bank: 7'(i == 1 ? 0 : 3), addr: 32'(i)};
    ent_req[0].bank = 0; avail = '1; avail[0] = 0;
    for (int b = 0; b < NB; b++) begin ds_active[b] = 0; ent[b][0].n_i = 16'(b == 0 ? 900 : 5); end
    check_one();
    checks++;
    if (!(sel_valid && sel_idx != 1 && ent_req[sel_idx].bank == 3)) begin
      failures++; $display("blocked critical handling wrong");
    end
    checks++;
    if (n_vfy == 0 || n_crit == 0 || n_norm == 0 || n_none == 0) begin
      failures++; $display("coverage vfy %0d crit %0d norm %0d none %0d", n_vfy, n_crit, n_norm, n_none);
    end
    $display("coverage: verify %0d critical %0d normal %0d none %0d", n_vfy, n_crit, n_norm, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
