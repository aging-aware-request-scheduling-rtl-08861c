// tb_background_destress: self-checking test of the background de-stress scanner.
// An 8-bank instance gets random aTab contents, busy states (reading, programming, idle),
// de-stress states and mode every cycle. The testbench tracks the expected round-robin bank
// (cycle count since reset, modulo 8), computes that bank's aging with its own 64-bit
// arithmetic and checks the proposal: write domain only while reading, read domain only while
// programming, only if needed, never for a domain already de-stressed, never in coupled mode.
// Both proposal kinds must occur.
module tb_background_destress;
  import hebe_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  logic decoupled;
  logic [NB-1:0] serving_read, serving_prog;
  logic [NDOM-1:0] ds_active [NB];
  atab_entry_t ent [NB][NDOM];
  unit_aging_t u [3];
  logic [31:0] th_a;
  logic [IDLE_W-1:0] th_i;
  logic prop_valid;
  logic [2:0] prop_bank;
  logic [NDOM-1:0] prop_mask;
  int checks = 0, failures = 0, n_w = 0, n_r = 0;

  background_destress #(.NUM_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ag(atab_entry_t e, unit_aging_t p);
    return longint'(e.n_r) * longint'(p.u_r) + longint'(e.n_w) * longint'(p.u_w) + longint'(e.n_i) * longint'(p.u_i);
  endfunction

  initial begin
    int k;
    longint th;
    bit nw, nr;
    logic [1:0] em;
    u[0] = '{u_r: U_R_PS_DEF, u_w: U_W_PS_DEF, u_i: U_I_DEF};
    u[1] = '{u_r: U_R_VR_DEF, u_w: U_W_VR_DEF, u_i: U_I_DEF};
    u[2] = '{u_r: U_R_SA_DEF, u_w: U_W_SA_DEF, u_i: U_I_DEF};
    th_a = 1000; th_i = 4096; decoupled = 1;
    serving_read = 0; serving_prog = 0;
    for (int b = 0; b < NB; b++) begin ds_active[b] = 0; ent[b][0] = '0; ent[b][1] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    k = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      decoupled = ($urandom_range(0, 9) != 0);
      th_a = $urandom_range(500, 2000);
      for (int b = 0; b < NB; b++) begin
        int s;
        s = $urandom_range(0, 2);
        serving_read[b] = (s == 1);
        serving_prog[b] = (s == 2);
        ds_active[b] = ($urandom_range(0, 4) == 0) ? 2'($urandom) : 2'b00;
        for (int d = 0; d < NDOM; d++)
          ent[b][d] = '{n_i: 16'($urandom_range(0, 5000)), n_r: 4'($urandom_range(0, 15)), n_w: 4'($urandom_range(0, 14))};
      end
      #1;
      th = longint'(th_a) * 65536;
      nw = ag(ent[k][0], u[0]) >= th || ent[k][0].n_i >= th_i || ent[k][0].n_r == 15 || ent[k][0].n_w == 15;
      nr = ag(ent[k][1], u[1]) >= th || ag(ent[k][1], u[2]) >= th || ent[k][1].n_i >= th_i ||
           ent[k][1].n_r == 15 || ent[k][1].n_w == 15;
      em[0] = decoupled && serving_read[k] && nw && !ds_active[k][0];
      em[1] = decoupled && serving_prog[k] && nr && !ds_active[k][1];
      checks++;
      if (prop_valid !== (|em) || prop_mask !== em || (prop_valid && int'(prop_bank) != k)) begin
        failures++;
        $display("n %0d: bank %0d/%0d mask %b/%b", n, prop_bank, k, prop_mask, em);
      end
      if (em[0]) n_w++;
      if (em[1]) n_r++;
      @(posedge clk);
      k = (k + 1) % NB;
    end
    checks++;
    if (n_w == 0 || n_r == 0) begin failures++; $display("coverage w %0d r %0d", n_w, n_r); end
    $display("proposals: write domain %0d, read domain %0d", n_w, n_r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
