// tb_stab: self-checking test of the status table.
// Random claims (of free banks only) and releases (of busy banks only) are applied to an
// 8-bank table and its availability vector is compared with a reference bit vector each cycle.
module tb_stab;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  logic claim_valid;
  logic [2:0] claim_bank;
  logic [NB-1:0] release_vec, avail, model;
  int checks = 0, failures = 0;

  stab #(.NUM_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    claim_valid = 0; claim_bank = 0; release_vec = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = '1;
    #1;
    checks++; if (avail !== '1) begin failures++; $display("reset state wrong"); end
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      claim_bank  = 3'($urandom);
      claim_valid = model[claim_bank] && ($urandom_range(0, 1) == 1);
      release_vec = (~model) & NB'($urandom);
      @(posedge clk);
      if (claim_valid) model[claim_bank] = 1'b0;
      model = model | release_vec;
      #1;
      checks++;
      if (avail !== model) begin failures++; $display("cyc %0d avail %b exp %b", cyc, avail, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
