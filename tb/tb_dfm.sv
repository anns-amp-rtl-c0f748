// tb_dfm: self-checking test of the data fetching module.
// A memory model answers reads in order after a random delay, with the word
// at address a equal to a hash of a. Random tasks (random lane mask, lane
// precisions 1..8, 1..16 dimensions, stride 1 or 5) are offered back to back.
// For every streamed task, each lane's bit sequence must be, per dimension,
// the top P_s bits of the stored planes (MSB first) and of the query, with
// correct first/last flags. The number of words read must equal the sum of the
// lane precisions (only the needed planes are fetched), and prefetching must
// make some fetch overlap a stream.
module tb_dfm;
  import anns_pkg::*;
  localparam int NPE = 4, MD = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic task_valid, task_ready, t_signed; mode_e t_mode; logic [31:0] t_addr, t_stride; logic [4:0] t_nd;
  logic [NPE-1:0] t_mask; logic [3:0] t_prec [NPE]; logic [31:0] t_tag;
  logic mem_req, mem_gnt, mem_rvalid; logic [31:0] mem_addr; logic [MD-1:0] mem_rdata;
  logic [31:0] stream_tag; logic streaming; logic [7:0] query [NPE*MD];
  logic grp_busy, g_start, g_signed; logic [NPE-1:0] g_mask; logic [31:0] g_tag; mode_e g_mode;
  logic [NPE-1:0] lane_valid, lane_q, lane_c, lane_first, lane_last; logic [3:0] lane_prec [NPE];
  dfm #(.NPE(NPE), .MAX_DIMS(MD)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [MD-1:0] memf(input logic [31:0] a); return MD'(a * 32'h9E3779B1 >> 7); endfunction
  function automatic logic [7:0] qf(input logic [31:0] tag, input int i); return 8'((tag * 31 + i * 17) >> 2); endfunction
  always_comb for (int i = 0; i < NPE*MD; i++) query[i] = qf(stream_tag, i);

  // memory model
  int pa [$]; int pt [$]; int nreads = 0;
  always @(negedge clk) begin
    mem_gnt = ($urandom_range(3) != 0);
    mem_rvalid = 0;
    if (pa.size() > 0 && pt[0] <= cyc) begin mem_rvalid = 1; mem_rdata = memf(pa[0]); void'(pa.pop_front()); void'(pt.pop_front()); end
  end
  always @(posedge clk) if (rst_n && mem_req && mem_gnt) begin
    pa.push_back(mem_addr); nreads++;
    pt.push_back((pt.size() > 0 && pt[$] >= cyc + 2) ? pt[$] + 1 : cyc + 2 + $urandom_range(4));
  end

  // tasks remembered by tag
  logic [31:0] ta [int], ts [int]; int tn [int]; logic [NPE-1:0] tm [int]; int tp [int][NPE];
  int exp_reads = 0;

  // group model: busy for a few cycles after each stream
  int busy_left = 0; int cur = -1; int lj [NPE], lp [NPE]; int overlap = 0;
  assign grp_busy = busy_left > 0;
  always @(posedge clk) if (rst_n) begin
    if (busy_left > 0 && !streaming) busy_left <= busy_left - 1;
    if (streaming && mem_req) overlap++;
    if (g_start) begin
      cur = int'(g_tag);
      for (int s = 0; s < NPE; s++) begin lj[s] = 0; lp[s] = 0; end
      checks++; if (g_mask !== tm[cur]) begin failures++; $display("mask"); end
    end
    if (lane_valid != 0) begin
      busy_left <= 3;
      for (int s = 0; s < NPE; s++) if (lane_valid[s]) begin
        logic [MD-1:0] w; logic eb, eq;
        w  = memf(ta[cur] + (s * 8 + lp[s]) * ts[cur]);
        eb = w[lj[s]];
        eq = qf(cur, s * MD + lj[s]) >> (7 - lp[s]);
        checks++;
        if (!tm[cur][s] || lane_c[s] !== eb || lane_q[s] !== eq || lane_first[s] !== (lj[s] == 0) ||
            lane_last[s] !== (lj[s] == tn[cur] - 1) || lane_prec[s] !== 4'(tp[cur][s])) begin
          failures++; $display("task %0d lane %0d dim %0d plane %0d wrong", cur, s, lj[s], lp[s]);
        end
        lp[s]++; if (lp[s] == tp[cur][s]) begin lp[s] = 0; lj[s]++; end
      end
    end
  end

  initial begin
    task_valid = 0; t_mode = MODE_CL; t_signed = 0; t_addr = 0; t_stride = 1; t_nd = 1; t_mask = 0; t_tag = 0;
    for (int s = 0; s < NPE; s++) t_prec[s] = 8;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      t_tag = k; t_addr = $urandom_range(1 << 20); t_stride = (k % 2) ? 5 : 1; t_nd = 5'(1 + $urandom_range(MD - 1));
      t_mask = (k % 3 == 0) ? '1 : NPE'($urandom);
      ta[k] = t_addr; ts[k] = t_stride; tn[k] = t_nd; tm[k] = t_mask;
      for (int s = 0; s < NPE; s++) begin
        t_prec[s] = 4'(1 + $urandom_range(7)); tp[k][s] = t_prec[s];
        if (t_mask[s]) exp_reads += t_prec[s];
      end
      task_valid = 1;
      #1;
      while (!task_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      task_valid = 0;
    end
    repeat (400) @(negedge clk);
    checks += 2;
    if (nreads != exp_reads) begin failures++; $display("reads %0d vs %0d", nreads, exp_reads); end
    if (overlap == 0) begin failures++; $display("no prefetch overlap"); end
    $display("words read %0d, cycles with fetch during stream %0d", nreads, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
