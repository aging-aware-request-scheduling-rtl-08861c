// rwq: read-write queue (rwQ) of the PCM memory controller.
//
// Buffers incoming PCM requests and exposes every entry to the scheduler, which may take any
// one of them per cycle (out-of-order dequeue). Entries are kept compacted in arrival order:
// entry 0 is always the oldest request, so the scheduler's "oldest request" is a fixed slot.
// Each entry carries an outstanding-cycle counter (age) that starts at 0 when the request is
// written and saturates at its maximum; the scheduler compares it with the backlogging
// threshold.
//
// Reset is synchronous and active low. Interface: in_valid/in_ready handshake (a request is taken on a clock edge where both are
// high); deq_valid/deq_idx remove entry deq_idx on the same edge. Enqueue and dequeue may
// happen together. in_ready is high whenever fewer than DEPTH entries are held.
//
// The published design names the rwQ but gives neither its depth nor its organisation; the
// depth of 16, the compacting order and the saturating age counter are this design's choices.
module rwq
  import hebe_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  mem_req_t              in_req,
  input  logic                  deq_valid,
  input  logic [$clog2(DEPTH)-1:0] deq_idx,
  output logic [DEPTH-1:0]      ent_valid,
  output mem_req_t              ent_req [DEPTH],
  output logic [AGE_W-1:0]      ent_age [DEPTH]
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [CNT_W-1:0] count;
  logic             do_enq;

  assign in_ready = (count < CNT_W'(DEPTH));
  assign do_enq   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count     <= '0;
      ent_valid <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent_req[i] <= '0;
        ent_age[i] <= '0;
      end
    end else begin
      logic [CNT_W-1:0] n;
      n = count;
      // Remove: shift every younger entry down by one slot, ageing as it goes.
      for (int i = 0; i < DEPTH; i++) begin
        int src;
        src = (deq_valid && (i >= int'(deq_idx))) ? i + 1 : i;
        if (src < DEPTH) begin
          ent_valid[i] <= ent_valid[src];
          ent_req[i]   <= ent_req[src];
          ent_age[i]   <= (ent_age[src] == '1) ? ent_age[src] : ent_age[src] + 1'b1;
        end else begin
          ent_valid[i] <= 1'b0;
        end
      end
      if (deq_valid) n = n - 1'b1;
      // Append the new request behind the youngest remaining one.
      if (do_enq) begin
        for (int i = 0; i < DEPTH; i++) begin
          if (CNT_W'(i) == n) begin
            ent_valid[i] <= 1'b1;
            ent_req[i]   <= in_req;
            ent_age[i]   <= '0;
          end
        end
        n = n + 1'b1;
      end
      count <= n;
    end
  end

  // A dequeue must name a held entry.
  assert property (@(posedge clk) disable iff (!rst_n) deq_valid |-> ent_valid[deq_idx])
    else $error("rwq: dequeue of an empty slot");

endmodule
