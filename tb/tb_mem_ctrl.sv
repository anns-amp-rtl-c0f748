// tb_mem_ctrl: eight requesters issue random reads against a channel model
// that answers in order after a random delay (data = f(address)). Each
// requester must get its own data back in its own order; grants must rotate
// fairly (no requester waits more than N_REQ grants while asking).
module tb_mem_ctrl;
  localparam int N = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [N-1:0] req, gnt, rvalid; logic [31:0] addr [N]; logic [15:0] rdata;
  logic ch_req, ch_ready, ch_rvalid; logic [31:0] ch_addr; logic [15:0] ch_rdata;
  mem_ctrl #(.N_REQ(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // channel model: in-order, latency 3..6
  int pend_a [$]; int pend_t [$]; int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  function automatic logic [15:0] f(input int a); return 16'(a * 7 + 3); endfunction
  always @(negedge clk) begin
    ch_ready = ($urandom_range(4) != 0);
    ch_rvalid = 0;
    if (pend_a.size() > 0 && pend_t[0] <= cyc) begin
      ch_rvalid = 1; ch_rdata = f(pend_a[0]); void'(pend_a.pop_front()); void'(pend_t.pop_front());
    end
  end
  always @(posedge clk) if (rst_n && ch_req && ch_ready) begin
    pend_a.push_back(int'(ch_addr));
    pend_t.push_back((pend_t.size() > 0 && pend_t[$] > cyc + 3) ? pend_t[$] + 1 : cyc + 3 + $urandom_range(3));
  end
  int exp_q [N][$]; int waitc [N]; int got = 0; bit granted [N];
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) begin
    if (gnt[i]) begin exp_q[i].push_back(int'(addr[i])); waitc[i] = 0; granted[i] = 1; end
    else if (req[i] && |gnt) begin
      waitc[i]++;
      if (waitc[i] > N) begin failures++; $display("requester %0d starved", i); end
    end
    if (rvalid[i]) begin
      checks++; got++;
      if (exp_q[i].size() == 0) begin failures++; $display("unexpected data to %0d", i); end
      else begin
        if (rdata !== f(exp_q[i][0])) begin failures++; $display("req %0d data %h vs %h", i, rdata, f(exp_q[i][0])); end
        void'(exp_q[i].pop_front());
      end
    end
  end
  initial begin
    req = 0; ch_ready = 0; ch_rvalid = 0; ch_rdata = 0;
    for (int i = 0; i < N; i++) begin addr[i] = 0; waitc[i] = 0; granted[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) begin
        if (!req[i] || granted[i]) begin granted[i] = 0; req[i] = ($urandom_range(2) != 0); addr[i] = $urandom_range(100000); end
      end
      @(negedge clk);
    end
    req = 0; repeat (100) @(negedge clk);
    checks++; if (got < 1000) begin failures++; $display("too few responses %0d", got); end
    for (int i = 0; i < N; i++) if (exp_q[i].size() != 0) begin failures++; $display("lost responses %0d", i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
