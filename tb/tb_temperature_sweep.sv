// tb_temperature_sweep: operating-temperature sweep (300 K, 325 K and 350 K).
//
// Temperature changes nothing in the controller's logic. It changes only the unit aging values
// that software loads into uTab: unit aging is the reciprocal of the Weibull scale factor, and
// that factor falls exponentially as temperature rises. Three 8-bank controllers in decoupled
// mode run the same request sequence side by side with the default aging threshold. Before any
// traffic, each controller's nine uTab words are rewritten through the cfg_u_wr port. Every
// word is multiplied by 1.0, 1/0.93 and 1/0.74 respectively. These factors are the inverse of
// the average lifetime loss reported at 325 K and 350 K (7 % and 26 %), taken here as the
// change in aging rate; the exact scaling is this testbench's choice. The idle threshold is set
// to its maximum so that de-stresses come from aging (or counter saturation) alone. Checks: no
// protocol violations, every request served, every program step verified, and a hotter die
// never gives fewer de-stresses, with strictly more at 350 K than at 300 K. The cycles each
// controller needs for the whole sequence are printed as its execution time.
module tb_temperature_sweep;
  import hebe_pkg::*;
  localparam int NB = 8;
  localparam int N_REQ = 4000;
  localparam int BW = $clog2(NB);
  localparam int TEMP_K [3] = '{300, 325, 350};
  localparam longint SCALE_NUM [3] = '{100, 100, 100};
  localparam longint SCALE_DEN [3] = '{100, 93, 74};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t seq [N_REQ];
  int checks = 0, failures = 0;

  logic          req_valid [3], req_ready [3];
  mem_req_t      req [3];
  logic          cmd_valid [3], ds_valid [3];
  pcm_op_e       cmd_op [3];
  logic [BW-1:0] cmd_bank [3], ds_bank [3];
  logic [31:0]   cmd_addr [3];
  logic [1:0]    ds_mask [3];
  logic [NB-1:0] rd_on [3], wr_on [3], iso [3];
  logic [AGING_W-1:0] mon [3][3];
  logic [NB-1:0] m_busy [3];
  logic [1:0]    m_ds [3][NB];
  int viol [3], nr [3], nw [3], np [3], nv [3];
  int sent [3], served [3], n_ds [3];
  longint done_at [3];
  longint cyc = 0;
  logic          go = 0;
  logic          u_en = 0;
  blk_e          u_blk = BLK_PS;
  logic [1:0]    u_sel = 2'd0;
  logic [UNIT_W-1:0] u_data [3];
  logic [UNIT_W-1:0] U_DEF [3][3];   // [block][0 = U_r, 1 = U_w, 2 = U_i]
  int n_ds_w [3];

  for (genvar k = 0; k < 3; k++) begin : g_inst
    hebe_controller #(.NUM_BANKS(NB), .RWQ_DEPTH(8)) dut (
      .clk, .rst_n,
      .req_valid (req_valid[k]), .req_ready (req_ready[k]), .req (req[k]),
      .cfg_th_a (TH_A_DEF), .cfg_th_i (16'hFFFF), .cfg_th_b (16'd2000), .cfg_decoupled (1'b1),
      .cfg_u_wr_en (u_en), .cfg_u_wr_blk (u_blk), .cfg_u_wr_sel (u_sel), .cfg_u_wr_data (u_data[k]),
      .pcm_cmd_valid (cmd_valid[k]), .pcm_cmd_op (cmd_op[k]), .pcm_cmd_bank (cmd_bank[k]),
      .pcm_cmd_addr (cmd_addr[k]), .ds_valid (ds_valid[k]), .ds_bank (ds_bank[k]), .ds_mask (ds_mask[k]),
      .rd_pump_on (rd_on[k]), .wr_pump_on (wr_on[k]), .iso_on (iso[k]), .mon_aging (mon[k])
    );
    pcm_model #(.NB(NB)) pcm (
      .clk, .rst_n, .cmd_valid (cmd_valid[k]), .cmd_op (cmd_op[k]), .cmd_bank (cmd_bank[k]),
      .ds_valid (ds_valid[k]), .ds_bank (ds_bank[k]), .ds_mask (ds_mask[k]),
      .rd_pump_on (rd_on[k]), .wr_pump_on (wr_on[k]),
      .busy (m_busy[k]), .ds_on (m_ds[k]), .violations (viol[k]),
      .n_reads (nr[k]), .n_writes (nw[k]), .n_programs (np[k]), .n_verifies (nv[k])
    );
    // one request per cycle offered whenever the previous one was taken
    always @(posedge clk) begin
      if (!rst_n) begin
        sent[k] <= 0; served[k] <= 0; n_ds[k] <= 0; n_ds_w[k] <= 0; done_at[k] <= 0;
      end else begin
        if (req_valid[k] && req_ready[k]) sent[k] <= sent[k] + 1;
        if (cmd_valid[k] && cmd_op[k] inside {OP_READ, OP_WRITE, OP_PROGRAM}) begin
          served[k] <= served[k] + 1;
          if (served[k] + 1 == N_REQ) done_at[k] <= cyc;
        end
        if (ds_valid[k]) n_ds[k] <= n_ds[k] + $countones(ds_mask[k]);
        if (ds_valid[k] && ds_mask[k][DOM_W]) n_ds_w[k] <= n_ds_w[k] + 1;
      end
    end
    always_comb begin
      req_valid[k] = go && sent[k] < N_REQ;
      req[k]       = seq[(sent[k] < N_REQ) ? sent[k] : 0];
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // mixed read/write traffic to random banks, 40% writes
    for (int i = 0; i < N_REQ; i++)
      seq[i] = '{is_write: ($urandom_range(0, 99) < 40), bank: 7'($urandom_range(0, NB - 1)), addr: 32'(i)};
    U_DEF[BLK_PS] = '{U_R_PS_DEF, U_W_PS_DEF, U_I_DEF};
    U_DEF[BLK_VR] = '{U_R_VR_DEF, U_W_VR_DEF, U_I_DEF};
    U_DEF[BLK_SA] = '{U_R_SA_DEF, U_W_SA_DEF, U_I_DEF};
    for (int k = 0; k < 3; k++) u_data[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // load the temperature-scaled unit aging values, one word per cycle
    for (int b = 0; b < 3; b++)
      for (int sl = 0; sl < 3; sl++) begin
        u_en  = 1'b1;
        u_blk = blk_e'(b);
        u_sel = 2'(sl);
        for (int k = 0; k < 3; k++)
          u_data[k] = UNIT_W'((longint'(U_DEF[b][sl]) * SCALE_NUM[k]) / SCALE_DEN[k]);
        @(posedge clk); #1;
      end
    u_en = 1'b0;
    go   = 1'b1;
    wait (served[0] == N_REQ && served[1] == N_REQ && served[2] == N_REQ);
    repeat (300) @(posedge clk);
    for (int k = 0; k < 3; k++) begin
      $display("%0d K: de-stressed domains %0d (write pump %0d), finished at cycle %0d, reads %0d writes %0d programs %0d",
               TEMP_K[k], n_ds[k], n_ds_w[k], done_at[k], nr[k], nw[k], np[k]);
      checks += 3;
      if (viol[k] != 0) begin failures++; $display("violations %0d", viol[k]); end
      if (served[k] != N_REQ) begin failures++; $display("not all served"); end
      if (np[k] != nv[k]) begin failures++; $display("verify missing"); end
    end
    checks += 3;
    if (n_ds[1] < n_ds[0]) begin failures++; $display("325 K gave fewer de-stresses than 300 K"); end
    if (n_ds[2] < n_ds[1]) begin failures++; $display("350 K gave fewer de-stresses than 325 K"); end
    if (n_ds_w[2] <= n_ds_w[0]) begin failures++; $display("350 K did not de-stress the write pump more often"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
