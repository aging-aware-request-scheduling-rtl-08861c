// hebe_pkg: types and constants shared by the aging-aware PCM memory controller.
//
// The controller tracks aging of each bank's peripheral circuitry as
//   A = n_r*U_r + n_w*U_w + n_i*U_i
// per logic block (pulse shaper PS, verify logic VR, sense amplifier SA), where n_r and n_w
// count requests served and n_i counts idle memory cycles since the last de-stress.
// Aging and unit-aging values are unsigned fixed point with UFRAC fractional bits, in the
// arbitrary units (a.u.) the aging threshold is expressed in (default threshold 1000 a.u.).
//
// Timing is in memory clock cycles. Row-cycle times come from the PCM timing table
// (read tRC 56.25 ns, write tRC 209.75 ns) at an assumed DDR3-1600 memory clock of
// 800 MHz (1.25 ns): 45 and 168 cycles. The de-stress cycle time tDSC = 10 cycles is the
// published figure. The split of a write into program and verify steps (T_VERIFY) is this
// design's own assumption.
//
// Default unit-aging values (this design's own assumption; the published model gives the
// form of the equation but not the fitted material constants):
//   alpha(V) ~ (V - Vth)^-gamma with Vth = 0.85 V, gamma = 2, so relative to idle at 1.2 V
//   r(2.85 V) = (2.0/0.35)^2 = 32.65 and r(3.7 V) = (2.85/0.35)^2 = 66.31;
//   U_i = 0.01 a.u. per idle cycle; U_r = tRC_r * r(V_read) * U_i; U_w = tRC_w * r(V_write) * U_i
//   with block voltages PS 1.2/3.7 V, VR 1.2/2.85 V, SA 2.85/1.2 V for read/write.
//   Each value is rounded to Q16.16.
package hebe_pkg;

  // Organisation: 128 banks (128 GB at 1 GB per bank).
  localparam int unsigned BANK_W = 7;           // bank index field width (up to 128 banks)
  localparam int unsigned ADDR_W = 32;          // address within a bank, carried opaquely
  localparam int unsigned AGE_W  = 16;          // outstanding-cycle counter of an rwQ entry

  // aTab entry field widths (published: 16-bit idle, two 4-bit request counts).
  localparam int unsigned IDLE_W = 16;
  localparam int unsigned RCNT_W = 4;

  // uTab word width (published: 32-bit entries) and fixed-point fraction.
  localparam int unsigned UNIT_W = 32;
  localparam int unsigned UFRAC  = 16;
  localparam int unsigned AGING_W = 49;         // (2^16-1 + 2*(2^4-1)) * (2^32-1) < 2^49

  // Timing in memory cycles.
  localparam int unsigned T_RC_RD  = 45;        // 56.25 ns / 1.25 ns
  localparam int unsigned T_RC_WR  = 168;       // 209.75 ns / 1.25 ns, rounded up
  localparam int unsigned T_VERIFY = 24;        // verify step of a write (assumed)
  localparam int unsigned T_PROG   = T_RC_WR - T_VERIFY; // program step alone
  localparam int unsigned T_DSC    = 10;        // de-stress cycle time
  localparam int unsigned TCNT_W   = 8;         // access timer width
  localparam int unsigned DCNT_W   = 4;         // de-stress timer width

  // Logic blocks of the peripheral circuitry.
  typedef enum logic [1:0] {BLK_PS = 2'd0, BLK_VR = 2'd1, BLK_SA = 2'd2} blk_e;
  // Charge-pump domains: the write pump feeds PS, the read pump feeds VR and SA.
  localparam int unsigned DOM_W = 0;
  localparam int unsigned DOM_R = 1;
  localparam int unsigned NDOM  = 2;

  // Commands to the PCM.
  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_READ    = 3'd1,
    OP_WRITE   = 3'd2,   // program and verify back to back
    OP_PROGRAM = 3'd3,   // program step only (read pump is being de-stressed)
    OP_VERIFY  = 3'd4    // deferred verify step of an earlier OP_PROGRAM
  } pcm_op_e;

  // A memory request as it enters the read-write queue.
  typedef struct packed {
    logic              is_write;
    logic [BANK_W-1:0] bank;
    logic [ADDR_W-1:0] addr;
  } mem_req_t;

  // One aTab entry (24 bits).
  typedef struct packed {
    logic [IDLE_W-1:0] n_i;
    logic [RCNT_W-1:0] n_r;
    logic [RCNT_W-1:0] n_w;
  } atab_entry_t;

  // One block's unit aging parameters.
  typedef struct packed {
    logic [UNIT_W-1:0] u_r;
    logic [UNIT_W-1:0] u_w;
    logic [UNIT_W-1:0] u_i;
  } unit_aging_t;

  // Default unit aging values in Q16.16 a.u. (see header for the formula).
  localparam logic [UNIT_W-1:0] U_I_DEF     = 32'd655;
  localparam logic [UNIT_W-1:0] U_R_PS_DEF  = 32'd29491;
  localparam logic [UNIT_W-1:0] U_W_PS_DEF  = 32'd7300336;
  localparam logic [UNIT_W-1:0] U_R_VR_DEF  = 32'd29491;
  localparam logic [UNIT_W-1:0] U_W_VR_DEF  = 32'd3595118;
  localparam logic [UNIT_W-1:0] U_R_SA_DEF  = 32'd962978;
  localparam logic [UNIT_W-1:0] U_W_SA_DEF  = 32'd110100;

  // Default thresholds.
  localparam logic [31:0]       TH_A_DEF = 32'd1000;   // aging threshold, a.u. (published)
  localparam logic [IDLE_W-1:0] TH_I_DEF = 16'd4096;   // idle threshold, cycles (assumed)
  localparam logic [AGE_W-1:0]  TH_B_DEF = 16'd1024;   // backlogging threshold, cycles (assumed)

endpackage
