// tb_rwq: self-checking test of the read-write queue.
// Random enqueues and out-of-order dequeues are applied to a 4-entry queue; after each edge
// every slot (valid, request, age) is compared with a reference queue kept in the testbench,
// including the full (in_ready low) condition and age saturation behaviour over time.
module tb_rwq;
  import hebe_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, deq_valid;
  mem_req_t in_req;
  logic [1:0] deq_idx;
  logic [DEPTH-1:0] ent_valid;
  mem_req_t ent_req [DEPTH];
  logic [AGE_W-1:0] ent_age [DEPTH];
  int checks = 0, failures = 0;

  rwq #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { mem_req_t r; int age; } ref_t;
  ref_t q[$];

  initial begin
    in_valid = 0; deq_valid = 0; deq_idx = 0; in_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < 60);
      in_req   = '{is_write: 1'($urandom), bank: 7'($urandom), addr: $urandom};
      deq_valid = (q.size() > 0) && ($urandom_range(0, 99) < 45);
      deq_idx   = (q.size() > 0) ? 2'($urandom_range(0, q.size() - 1)) : 2'd0;
      // check ready
      checks++;
      if (in_ready !== (q.size() < DEPTH)) begin
        failures++; $display("ready mismatch cyc %0d", cyc);
      end
      @(posedge clk);
      // reference update
      begin
        bit enq;
        enq = in_valid && (q.size() < DEPTH);
        foreach (q[i]) q[i].age = (q[i].age == 65535) ? 65535 : q[i].age + 1;
        if (deq_valid) q.delete(deq_idx);
        if (enq) q.push_back('{r: in_req, age: 0});
      end
      #1;
      for (int i = 0; i < DEPTH; i++) begin
        checks++;
        if (i < q.size()) begin
          if (!ent_valid[i] || ent_req[i] != q[i].r || ent_age[i] != q[i].age[15:0]) begin
            failures++; $display("slot %0d mismatch cyc %0d", i, cyc);
          end
        end else if (ent_valid[i]) begin
          failures++; $display("slot %0d should be empty cyc %0d", i, cyc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
