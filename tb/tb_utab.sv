// tb_utab: self-checking test of the unit aging table.
// Checks the reset defaults against the values derived from the aging formula
// (U = t_RC * ((V - 0.85)/0.35)^2 * 0.01 a.u. in Q16.16), then writes random words and checks
// that exactly the addressed word changes.
module tb_utab;
  import hebe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en;
  blk_e wr_blk;
  logic [1:0] wr_sel;
  logic [31:0] wr_data;
  unit_aging_t u [3];
  logic [31:0] model [3][3];
  int checks = 0, failures = 0;

  utab dut (.*);
  always #5 clk = ~clk;

  function automatic longint expect_q16(real cycles, real volts);
    real r;
    r = ((volts - 0.85) / 0.35) ** 2;
    return longint'(cycles * r * 0.01 * 65536.0 + 0.5);
  endfunction

  function automatic logic [31:0] get(int b, int s);
    case (s)
      0: return u[b].u_r;
      1: return u[b].u_w;
      default: return u[b].u_i;
    endcase
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    wr_en = 0; wr_blk = BLK_PS; wr_sel = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    // read voltages PS 1.2, VR 1.2, SA 2.85; write PS 3.7, VR 2.85, SA 1.2; tRC 45 / 168 cycles
    model[0][0] = 32'(expect_q16(45, 1.2));  model[0][1] = 32'(expect_q16(168, 3.7));
    model[1][0] = 32'(expect_q16(45, 1.2));  model[1][1] = 32'(expect_q16(168, 2.85));
    model[2][0] = 32'(expect_q16(45, 2.85)); model[2][1] = 32'(expect_q16(168, 1.2));
    for (int b = 0; b < 3; b++) model[b][2] = 32'(expect_q16(1, 1.2));
    for (int b = 0; b < 3; b++)
      for (int s = 0; s < 3; s++) begin
        e = model[b][s];
        checks++;
        // the formula is evaluated here in double precision; allow 1 LSB of rounding
        if (get(b, s) > e + 1 || get(b, s) + 1 < e) begin
          failures++; $display("default blk %0d sel %0d = %0d, expected %0d", b, s, get(b, s), e);
        end
        model[b][s] = get(b, s);
      end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      wr_en   = $urandom_range(0, 1);
      wr_blk  = blk_e'($urandom_range(0, 2));
      wr_sel  = 2'($urandom_range(0, 3));
      wr_data = $urandom;
      @(posedge clk);
      if (wr_en && wr_sel != 3) model[wr_blk][wr_sel] = wr_data;
      #1;
      for (int b = 0; b < 3; b++)
        for (int s = 0; s < 3; s++) begin
          checks++;
          if (get(b, s) !== model[b][s]) begin failures++; $display("word %0d/%0d wrong", b, s); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
