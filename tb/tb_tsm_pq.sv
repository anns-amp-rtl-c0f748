// tb_tsm_pq: self-checking test of the top-k priority queue.
// Streams of random keys (with many duplicates) are inserted one per cycle;
// after each stream the sorted contents are compared with a reference sort,
// the threshold with the k-th smallest key, and full with the count. Before
// the queue fills, the threshold must still be the maximum key.
module tb_tsm_pq;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid; logic [31:0] in_key; logic [15:0] in_id; logic [4:0] k_sel;
  logic [31:0] keys [D]; logic [15:0] ids [D]; logic [31:0] thr; logic full;
  tsm_pq #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; in_valid = 0; in_key = 0; in_id = 0; k_sel = 10;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n; longint ref_q [$];
      ref_q.delete();
      n = 1 + $urandom_range(60);
      k_sel = 5'(1 + $urandom_range(D - 1));
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        in_valid = 1; in_key = (r % 2) ? $urandom_range(50) : $urandom; in_id = 16'(i);
        // key and id packed so that equal keys keep arrival order
        ref_q.push_back({in_key, 16'(i)});
        @(negedge clk);
        if (i == 0 && k_sel > 1) begin
          checks++; if (thr !== '1) begin failures++; $display("thr not max before full"); end
        end
      end
      in_valid = 0;
      ref_q.sort();
      for (int i = 0; i < D; i++) begin
        checks++;
        if (i < n) begin
          if ({keys[i], ids[i]} !== 48'(ref_q[i])) begin
            failures++; $display("r%0d entry %0d: %0d/%0d vs %0d/%0d", r, i, keys[i], ids[i], ref_q[i] >> 16, ref_q[i] & 16'hffff);
          end
        end else if (keys[i] !== '1) begin failures++; $display("entry %0d not max", i); end
      end
      checks += 2;
      if (full !== (n >= k_sel)) begin failures++; $display("full"); end
      if (thr !== ((n >= k_sel) ? 32'(ref_q[k_sel-1] >> 16) : '1)) begin failures++; $display("thr"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
