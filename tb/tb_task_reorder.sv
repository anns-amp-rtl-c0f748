// tb_task_reorder: several rounds of random (cluster, query) pairs, as the
// top-nprobe results of a batch of queries would give. After drain, the
// output must list every cluster once, in order of first use, with exactly
// its queries in insertion order and out_last on the last one; one pair per
// cycle.
module tb_task_reorder;
  localparam int NC = 64, NE = 128;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic ins_valid, ins_ready, drain, out_valid, out_last, busy;
  logic [5:0] ins_cluster, out_cluster; logic [15:0] ins_query, out_query;
  task_reorder #(.N_CLUSTERS(NC), .N_ENTRIES(NE)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ins_valid = 0; drain = 0; ins_cluster = 0; ins_query = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      int lists [int][$]; int order [$]; int n; int ci, qi, t0, t1;
      lists.delete(); order.delete();
      n = 1 + $urandom_range(NE - 1);
      for (int i = 0; i < n; i++) begin
        int c; c = $urandom_range(NC - 1) % ((r % 3 == 0) ? 4 : NC);
        if (!lists.exists(c)) order.push_back(c);
        lists[c].push_back(i + 1000 * r);
        ins_valid = 1; ins_cluster = 6'(c); ins_query = 16'(i + 1000 * r);
        checks++; if (!ins_ready) begin failures++; $display("not ready"); end
        @(negedge clk);
      end
      ins_valid = 0; drain = 1; @(negedge clk); drain = 0;
      ci = 0; qi = 0; t0 = 0; t1 = 0;
      while (ci < order.size()) begin
        t1++;
        if (t1 > 2 * NE + 10) begin failures++; $display("drain stuck"); break; end
        if (out_valid) begin
          checks++;
          if (t0 == 0) t0 = t1;
          if (out_cluster !== 6'(order[ci]) || out_query !== 16'(lists[order[ci]][qi]) ||
              out_last !== (qi == lists[order[ci]].size() - 1)) begin
            failures++; $display("r%0d got c%0d q%0d last%0d, want c%0d q%0d", r, out_cluster, out_query, out_last, order[ci], lists[order[ci]][qi]);
          end
          qi++;
          if (qi == lists[order[ci]].size()) begin ci++; qi = 0; end
        end
        @(negedge clk);
      end
      checks++; if (t1 - t0 + 1 != n) begin failures++; $display("drain took %0d cycles for %0d pairs", t1 - t0 + 1, n); end
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
