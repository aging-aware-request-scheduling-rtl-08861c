// tb_hebe_full: end-to-end test of the aging-aware PCM controller at its default size
// (128 banks, 16-entry rwQ) with the default thresholds (aging 1000 a.u., idle 4096 cycles,
// backlog 1024 cycles); otherwise identical to tb_hebe_controller.
//
// The controller is fed random traffic, skewed so that two banks are hot (their
// requests back up and become critical) and the others are seldom used (they reach the idle
// threshold). The run has a decoupled phase, a coupled phase (mode switch) and a drain. The
// PCM side is the behavioural pcm_model, which flags any command to a busy bank or to a
// discharged charge-pump domain and checks the command timing.
//
// Independent checks done here:
//   * scoreboard: every request is issued exactly once, to its bank and with its direction,
//     and all requests are served by the end; every verify step follows a program step;
//   * the testbench keeps its own aging account per bank and domain (reads, writes and idle
//     cycles since the domain's last de-stress, with the default unit aging values) and checks
//     that each de-stress is justified by the aging, idle or saturation rule and that a
//     non-critical request is only issued to domains below all thresholds;
//   * in coupled mode every de-stress covers both domains and no program-only step is issued.
// Each mechanism is counted and must occur at least once: critical (backlogged) issue,
// aging-threshold, idle-threshold and counter-saturation de-stress, write-pump-only,
// read-pump-only and full de-stress, a read issued alongside a write-pump de-stress, a
// program step issued alongside a read-pump de-stress and its deferred verify, a background
// de-stress of the pulse shaper while its bank serves a read, a full rwQ (backpressure) and
// both modes. (A background read-pump de-stress during a program step is counted and printed;
// it needs a program step in flight on a bank whose read domain has just crossed a threshold
// and is too rare to demand.)
module tb_hebe_full;
  import hebe_pkg::*;
  localparam int NB = 128;
  localparam int DEPTH = 16;
  localparam int PHASE_CYCLES = 150000;
  localparam int HOT_PCT = 55;
  localparam int RATE_PCT = 12;
  localparam logic [31:0] TH_A = TH_A_DEF;
  localparam logic [15:0] TH_I = TH_I_DEF;
  localparam logic [15:0] TH_B = TH_B_DEF;
  localparam int BW = $clog2(NB);

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready;
  mem_req_t req;
  logic [31:0] cfg_th_a;
  logic [15:0] cfg_th_i, cfg_th_b;
  logic cfg_decoupled, cfg_u_wr_en;
  blk_e cfg_u_wr_blk;
  logic [1:0] cfg_u_wr_sel;
  logic [31:0] cfg_u_wr_data;
  logic pcm_cmd_valid, ds_valid;
  pcm_op_e pcm_cmd_op;
  logic [BW-1:0] pcm_cmd_bank, ds_bank;
  logic [31:0] pcm_cmd_addr;
  logic [1:0] ds_mask;
  logic [NB-1:0] rd_pump_on, wr_pump_on, iso_on;
  logic [AGING_W-1:0] mon_aging [3];

  logic [NB-1:0] m_busy;
  logic [1:0] m_ds [NB];
  int violations, n_reads, n_writes, n_programs, n_verifies;

  hebe_controller dut (.*);

  pcm_model #(.NB(NB)) pcm (
    .clk, .rst_n, .cmd_valid (pcm_cmd_valid), .cmd_op (pcm_cmd_op), .cmd_bank (pcm_cmd_bank),
    .ds_valid, .ds_bank, .ds_mask, .rd_pump_on, .wr_pump_on,
    .busy (m_busy), .ds_on (m_ds), .violations, .n_reads, .n_writes, .n_programs, .n_verifies
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;

  initial begin
    repeat (3 * PHASE_CYCLES + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scoreboard ----------------
  typedef struct { bit w; int bank; } exp_t;
  exp_t outstanding [int];
  int next_id = 1;
  int issued = 0;

  // ---------------- independent aging account ----------------
  int a_r [NB][2], a_w [NB][2], a_i [NB][2];
  longint unsigned U [3][3];   // [block][r,w,i]

  function automatic longint unsigned blk_aging(int b, int d, int blk);
    return longint'(a_r[b][d]) * U[blk][0] + longint'(a_w[b][d]) * U[blk][1] + longint'(a_i[b][d]) * U[blk][2];
  endfunction
  function automatic bit aged(int b, int d);
    longint unsigned th;
    th = longint'(cfg_th_a) << 16;
    if (d == 0) return blk_aging(b, 0, 0) >= th;
    return blk_aging(b, 1, 1) >= th || blk_aging(b, 1, 2) >= th;
  endfunction
  function automatic bit idled(int b, int d);
    return a_i[b][d] >= cfg_th_i;
  endfunction
  function automatic bit satd(int b, int d);
    return a_r[b][d] == 15 || a_w[b][d] == 15;
  endfunction
  function automatic bit need(int b, int d);
    return aged(b, d) || idled(b, d) || satd(b, d);
  endfunction

  // mechanism counters
  int c_crit = 0, c_aging = 0, c_idle = 0, c_sat = 0, c_ds_w = 0, c_ds_r = 0, c_ds_full = 0;
  int c_bg_w = 0, c_bg_r = 0, c_conc_read = 0, c_conc_prog = 0, c_full_q = 0, c_coupled_ds = 0, c_decoupled_ds = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cycles <= cycles + 1;
      if (req_valid && !req_ready) c_full_q++;
      // --- checks on this cycle's decisions (state before the edge) ---
      if (pcm_cmd_valid && pcm_cmd_op inside {OP_READ, OP_WRITE, OP_PROGRAM}) begin
        int id;
        id = int'(pcm_cmd_addr);
        checks++;
        if (!outstanding.exists(id) || outstanding[id].bank != pcm_cmd_bank ||
            outstanding[id].w != (pcm_cmd_op != OP_READ)) begin
          failures++; $display("cycle %0d: unexpected issue id %0d", cycles, id);
        end else outstanding.delete(id);
        issued++;
        if (dut.u_reqsel.sel_critical) c_crit++;
        else begin
          int b;
          b = pcm_cmd_bank;
          checks++;
          if (cfg_decoupled) begin
            if ((pcm_cmd_op == OP_READ && need(b, 1)) || (pcm_cmd_op != OP_READ && need(b, 0))) begin
              failures++; $display("cycle %0d: request issued to a domain over threshold", cycles);
            end
          end else if (need(b, 0) || need(b, 1)) begin
            failures++; $display("cycle %0d: coupled request issued to a bank over threshold", cycles);
          end
        end
        if (!cfg_decoupled && pcm_cmd_op == OP_PROGRAM) begin
          checks++; failures++; $display("cycle %0d: program step in coupled mode", cycles);
        end
      end
      if (ds_valid) begin
        int b;
        b = ds_bank;
        checks++;
        if (cfg_decoupled) begin
          c_decoupled_ds++;
          for (int d = 0; d < 2; d++)
            if (ds_mask[d] && !need(b, d)) begin
              failures++; $display("cycle %0d: unjustified de-stress bank %0d dom %0d", cycles, b, d);
            end
        end else begin
          c_coupled_ds++;
          if (ds_mask != 2'b11 || !(need(b, 0) || need(b, 1))) begin
            failures++; $display("cycle %0d: bad coupled de-stress", cycles);
          end
        end
        for (int d = 0; d < 2; d++)
          if (ds_mask[d]) begin
            if (aged(b, d)) c_aging++;
            if (idled(b, d)) c_idle++;
            if (satd(b, d)) c_sat++;
          end
        if (m_busy[b] && ds_mask[0]) c_bg_w++;
        if (m_busy[b] && ds_mask[1]) c_bg_r++;
        if (ds_mask == 2'b01) c_ds_w++;
        if (ds_mask == 2'b10) c_ds_r++;
        if (ds_mask == 2'b11) c_ds_full++;
        if (pcm_cmd_valid && pcm_cmd_bank == ds_bank && pcm_cmd_op == OP_READ && ds_mask == 2'b01) c_conc_read++;
        if (pcm_cmd_valid && pcm_cmd_bank == ds_bank && pcm_cmd_op == OP_PROGRAM && ds_mask[1]) c_conc_prog++;
      end
      // --- update the independent aging account ---
      for (int b = 0; b < NB; b++)
        for (int d = 0; d < 2; d++) begin
          if (ds_valid && ds_bank == b && ds_mask[d]) begin
            a_r[b][d] = 0; a_w[b][d] = 0; a_i[b][d] = 0;
          end else begin
            if (!m_busy[b] && !m_ds[b][d] && a_i[b][d] < 65535) a_i[b][d]++;
            if (pcm_cmd_valid && pcm_cmd_bank == b) begin
              if (pcm_cmd_op == OP_READ && a_r[b][d] < 15) a_r[b][d]++;
              if ((pcm_cmd_op == OP_WRITE || (pcm_cmd_op == OP_PROGRAM && d == 0) ||
                   (pcm_cmd_op == OP_VERIFY && d == 1)) && a_w[b][d] < 15) a_w[b][d]++;
            end
          end
        end
    end
  end

  // ---------------- traffic ----------------
  task automatic drive(int n_cycles, bit gen);
    for (int c = 0; c < n_cycles; c++) begin
      @(negedge clk);
      if (req_valid && req_ready) ; // accepted at the previous edge, handled below
      if (!req_valid && gen && $urandom_range(0, 99) < RATE_PCT) begin
        int b;
        b = ($urandom_range(0, 99) < HOT_PCT) ? $urandom_range(0, 1) : $urandom_range(2, NB - 1);
        req = '{is_write: ($urandom_range(0, 99) < 40), bank: 7'(b), addr: 32'(next_id)};
        req_valid = 1;
      end
      @(posedge clk);
      if (req_valid && req_ready) begin
        outstanding[int'(req.addr)] = '{w: req.is_write, bank: int'(req.bank)};
        next_id++;
        #1 req_valid = 0;
      end
    end
  endtask

  initial begin
    req_valid = 0; req = '0;
    cfg_th_a = TH_A; cfg_th_i = TH_I; cfg_th_b = TH_B; cfg_decoupled = 1;
    cfg_u_wr_en = 0; cfg_u_wr_blk = BLK_PS; cfg_u_wr_sel = 0; cfg_u_wr_data = 0;
    U[0] = '{U_R_PS_DEF, U_W_PS_DEF, U_I_DEF};
    U[1] = '{U_R_VR_DEF, U_W_VR_DEF, U_I_DEF};
    U[2] = '{U_R_SA_DEF, U_W_SA_DEF, U_I_DEF};
    for (int b = 0; b < NB; b++) for (int d = 0; d < 2; d++) begin a_r[b][d] = 0; a_w[b][d] = 0; a_i[b][d] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    drive(PHASE_CYCLES, 1);
    $display("decoupled phase: issued %0d, de-stresses %0d", issued, c_decoupled_ds);
    // mode switch to coupled de-stress
    cfg_decoupled = 0;
    drive(PHASE_CYCLES, 1);
    $display("coupled phase: issued %0d, de-stresses %0d", issued, c_coupled_ds);
    drive(PHASE_CYCLES / 4, 0);   // drain
    checks++;
    if (outstanding.size() != 0) begin failures++; $display("%0d requests never served", outstanding.size()); end
    checks++;
    if (violations != 0) begin failures++; $display("PCM model saw %0d violations", violations); end
    checks++;
    if (n_programs != n_verifies) begin failures++; $display("programs %0d verifies %0d", n_programs, n_verifies); end
    $display("reads %0d writes %0d programs %0d verifies %0d", n_reads, n_writes, n_programs, n_verifies);
    $display("critical %0d | de-stress: aging %0d idle %0d saturation %0d | W-only %0d R-only %0d full %0d",
             c_crit, c_aging, c_idle, c_sat, c_ds_w, c_ds_r, c_ds_full);
    $display("read+W de-stress %0d program+R de-stress %0d | rwQ full cycles %0d | coupled de-stress %0d",
             c_conc_read, c_conc_prog, c_full_q, c_coupled_ds);
    $display("background de-stress during a read %0d, during a program step %0d", c_bg_w, c_bg_r);
    begin
      int cnt [13];
      cnt = '{c_crit, c_aging, c_idle, c_sat, c_ds_w, c_ds_r, c_ds_full, c_conc_read, c_conc_prog,
              c_full_q, c_coupled_ds, c_decoupled_ds, c_bg_w};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
