// stab: status table (sTab), one bit per PCM bank.
//
// A set bit means the bank is available to take a new PCM request; a clear bit means it is
// still serving one. The scheduler clears a bank's bit when it issues a request to it
// (claim) and the bank timers set it again when the access completes (release). All banks
// are available after reset.
//
// Timing: claim and release take effect on the next clock edge; avail is a plain register
// output. Reset is synchronous, active low.
//
// One bit per bank follows the published table (128 bits for 128 banks). Whether a bank being
// de-stressed counts as unavailable is not stated; here the de-stress state of each
// charge-pump domain is kept separately in bank_state, so that a request that needs only the
// still-powered domain can be issued (decoupled operation).
module stab
  import hebe_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          claim_valid,
  input  logic [$clog2(NUM_BANKS)-1:0]  claim_bank,
  input  logic [NUM_BANKS-1:0]          release_vec,
  output logic [NUM_BANKS-1:0]          avail
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      avail <= '1;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (claim_valid && (claim_bank == b[$clog2(NUM_BANKS)-1:0])) avail[b] <= 1'b0;
        else if (release_vec[b])                                      avail[b] <= 1'b1;
      end
    end
  end

  // Only a free bank may be claimed, and only a busy bank may be released.
  assert property (@(posedge clk) disable iff (!rst_n) claim_valid |-> avail[claim_bank])
    else $error("stab: claim of a busy bank");
  assert property (@(posedge clk) disable iff (!rst_n) (release_vec & avail) == '0)
    else $error("stab: release of a free bank");

endmodule
