// tb_threshold_sweep: aging-threshold sweep (500, 1000 and 2000 a.u.).
//
// Three 8-bank controllers in decoupled mode run the same request sequence side by side; only
// their aging thresholds differ. The idle threshold is set to its maximum so that de-stresses
// come from aging (or counter saturation) alone. Each controller drives its own behavioural
// PCM model. Checks: no protocol violations, every request served, and a stricter threshold
// never gives fewer de-stresses (more de-stress overhead, less aging). The number of cycles
// each controller needs to serve the whole sequence is printed as its execution time.
module tb_threshold_sweep;
  import hebe_pkg::*;
  localparam int NB = 8;
  localparam int N_REQ = 4000;
  localparam int BW = $clog2(NB);
  localparam logic [31:0] TH [3] = '{32'd500, 32'd1000, 32'd2000};

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

  for (genvar k = 0; k < 3; k++) begin : g_inst
    hebe_controller #(.NUM_BANKS(NB), .RWQ_DEPTH(8)) dut (
      .clk, .rst_n,
      .req_valid (req_valid[k]), .req_ready (req_ready[k]), .req (req[k]),
      .cfg_th_a (TH[k]), .cfg_th_i (16'hFFFF), .cfg_th_b (16'd2000), .cfg_decoupled (1'b1),
      .cfg_u_wr_en (1'b0), .cfg_u_wr_blk (BLK_PS), .cfg_u_wr_sel (2'd0), .cfg_u_wr_data (32'd0),
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
        sent[k] <= 0; served[k] <= 0; n_ds[k] <= 0; done_at[k] <= 0;
      end else begin
        if (req_valid[k] && req_ready[k]) sent[k] <= sent[k] + 1;
        if (cmd_valid[k] && cmd_op[k] inside {OP_READ, OP_WRITE, OP_PROGRAM}) begin
          served[k] <= served[k] + 1;
          if (served[k] + 1 == N_REQ) done_at[k] <= cyc;
        end
        if (ds_valid[k]) n_ds[k] <= n_ds[k] + $countones(ds_mask[k]);
      end
    end
    always_comb begin
      req_valid[k] = rst_n && sent[k] < N_REQ;
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
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (served[0] == N_REQ && served[1] == N_REQ && served[2] == N_REQ);
    repeat (300) @(posedge clk);
    for (int k = 0; k < 3; k++) begin
      $display("th_a %0d: de-stressed domains %0d, finished at cycle %0d, reads %0d writes %0d programs %0d",
               TH[k], n_ds[k], done_at[k], nr[k], nw[k], np[k]);
      checks += 3;
      if (viol[k] != 0) begin failures++; $display("violations %0d", viol[k]); end
      if (served[k] != N_REQ) begin failures++; $display("not all served"); end
      if (np[k] != nv[k]) begin failures++; $display("verify missing"); end
    end
    checks += 2;
    if (n_ds[0] < n_ds[1]) begin failures++; $display("500 gave fewer de-stresses than 1000"); end
    if (n_ds[1] < n_ds[2]) begin failures++; $display("1000 gave fewer de-stresses than 2000"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
