// tb_destress_selection: self-checking test of the aging computation and de-stress decision.
// Random aTab entries, unit aging words and thresholds are applied in both coupled and
// decoupled modes. The reference computes each block's aging with 64-bit integer arithmetic,
// compares with th_a * 2^16 and th_i, and applies the decision table written out as a case
// list. Each decision (issue, hold with de-stress, issue with a concurrent de-stress, program
// step) is counted and must occur. One directed case uses the published-style numbers: 9 writes
// on the pulse shaper with U_w = 111.4 a.u. exceed the 1000 a.u. threshold, 8 do not.
module tb_destress_selection;
  import hebe_pkg::*;
  logic decoupled, sel_valid, sel_critical, sel_is_write;
  atab_entry_t ent_w, ent_r;
  logic [NDOM-1:0] bank_ds_active;
  unit_aging_t u [3];
  logic [31:0] th_a;
  logic [IDLE_W-1:0] th_i;
  logic iss_valid, ds_valid;
  pcm_op_e iss_op;
  logic [NDOM-1:0] ds_mask;
  logic [AGING_W-1:0] aging_ps, aging_vr, aging_sa;
  int checks = 0, failures = 0;
  int n_issue = 0, n_hold = 0, n_conc = 0, n_prog = 0, n_full = 0;

  destress_selection dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ag(atab_entry_t e, unit_aging_t p);
    return longint'(e.n_r) * longint'(p.u_r) + longint'(e.n_w) * longint'(p.u_w) + longint'(e.n_i) * longint'(p.u_i);
  endfunction

  task automatic check_one();
    longint aps, avr, asa, th;
    bit nw, nr, e_iss, e_ds;
    logic [1:0] e_mask;
    pcm_op_e e_op;
    aps = ag(ent_w, u[0]); avr = ag(ent_r, u[1]); asa = ag(ent_r, u[2]);
    th = longint'(th_a) * 65536;
    nw = aps >= th || ent_w.n_i >= th_i || ent_w.n_r == 15 || ent_w.n_w == 15;
    nr = avr >= th || asa >= th || ent_r.n_i >= th_i || ent_r.n_r == 15 || ent_r.n_w == 15;
    e_iss = 0; e_mask = 0; e_op = OP_NOP;
    if (!sel_valid) ;
    else if (sel_critical) e_iss = 1;
    else if (!decoupled) begin
      if (nw || nr) e_mask = 2'b11; else e_iss = 1;
    end else if (!sel_is_write) begin
      if (nr) e_mask = {1'b1, nw && !bank_ds_active[0]};
      else begin e_iss = 1; e_mask = {1'b0, nw && !bank_ds_active[0]}; end
    end else begin
      if (nw) e_mask = {nr && !bank_ds_active[1], 1'b1};
      else begin e_iss = 1; e_mask = {nr && !bank_ds_active[1], 1'b0}; end
    end
    if (e_iss)
      e_op = !sel_is_write ? OP_READ :
             ((decoupled && e_mask[1]) || bank_ds_active[1]) ? OP_PROGRAM : OP_WRITE;
    e_ds = |e_mask;
    #1;
    checks++;
    if (iss_valid !== e_iss || iss_op !== e_op || ds_valid !== e_ds || ds_mask !== e_mask ||
        aging_ps != AGING_W'(aps) || aging_vr != AGING_W'(avr) || aging_sa != AGING_W'(asa)) begin
      failures++;
      $display("mismatch: dec %b crit %b wr %b iss %b/%b op %0d/%0d mask %b/%b",
               decoupled, sel_critical, sel_is_write, iss_valid, e_iss, iss_op, e_op, ds_mask, e_mask);
    end
    if (sel_valid) begin
      if (e_iss && !e_ds) n_issue++;
      if (!e_iss && e_ds) n_hold++;
      if (e_iss && e_ds) n_conc++;
      if (e_op == OP_PROGRAM) n_prog++;
      if (e_mask == 2'b11) n_full++;
    end
  endtask

  initial begin
    for (int n = 0; n < 40000; n++) begin
      decoupled = 1'($urandom); sel_valid = ($urandom_range(0, 9) != 0);
      sel_critical = ($urandom_range(0, 9) == 0); sel_is_write = 1'($urandom);
      ent_w = '{n_i: 16'($urandom_range(0, 6000)), n_r: 4'($urandom), n_w: 4'($urandom_range(0, 14))};
      ent_r = '{n_i: 16'($urandom_range(0, 6000)), n_r: 4'($urandom_range(0, 15)), n_w: 4'($urandom_range(0, 14))};
      bank_ds_active = ($urandom_range(0, 3) == 0) ? 2'($urandom) : 2'b00;
      for (int b = 0; b < 3; b++) u[b] = '{u_r: $urandom_range(0, 2000000), u_w: $urandom_range(0, 8000000), u_i: $urandom_range(0, 2000)};
      th_a = $urandom_range(300, 2000);
      th_i = 16'($urandom_range(1000, 8000));
      check_one();
    end
    // Directed: default unit aging, th_a = 1000, decoupled read, PS with 8 then 9 writes.
    decoupled = 1; sel_valid = 1; sel_critical = 0; sel_is_write = 0; bank_ds_active = 0;
    u[0] = '{u_r: U_R_PS_DEF, u_w: U_W_PS_DEF, u_i: U_I_DEF};
    u[1] = '{u_r: U_R_VR_DEF, u_w: U_W_VR_DEF, u_i: U_I_DEF};
    u[2] = '{u_r: U_R_SA_DEF, u_w: U_W_SA_DEF, u_i: U_I_DEF};
    th_a = 1000; th_i = 4096;
    ent_r = '{n_i: 16'd10, n_r: 4'd1, n_w: 4'd1};
    ent_w = '{n_i: 16'd10, n_r: 4'd1, n_w: 4'd8};
    check_one();
    checks++; if (ds_valid) begin failures++; $display("8 writes should stay below threshold"); end
    ent_w.n_w = 9;
    check_one();
    checks++; if (!(iss_valid && iss_op == OP_READ && ds_mask == 2'b01)) begin failures++; $display("9 writes: expected read with PS de-stress"); end
    checks++;
    if (n_issue == 0 || n_hold == 0 || n_conc == 0 || n_prog == 0 || n_full == 0) begin
      failures++; $display("coverage issue %0d hold %0d conc %0d prog %0d full %0d", n_issue, n_hold, n_conc, n_prog, n_full);
    end
    $display("coverage: issue %0d hold %0d concurrent %0d program %0d full %0d", n_issue, n_hold, n_conc, n_prog, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
