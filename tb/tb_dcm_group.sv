// tb_dcm_group: self-checking test of a DCM group.
// Each task gives every lane its own precision (1..8) and the same number of
// dimensions; lanes are streamed independently, MSB first. The collected
// per-lane distances, the mask and the tag are compared with integer
// reference values; a residual-mode task checks residual values and their
// dimension indices. The group result must appear max(prec)*(nd+1)+1 cycles
// after the first bit.
module tb_dcm_group;
  import anns_pkg::*;
  localparam int NPE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic task_start; logic [NPE-1:0] task_mask; logic [31:0] task_tag;
  mode_e mode; logic signed_mode;
  logic [NPE-1:0] lane_valid, lane_q, lane_c, lane_first, lane_last;
  logic [3:0] lane_prec [NPE];
  logic out_valid, out_ready; logic [31:0] out_dist [NPE]; logic [NPE-1:0] out_mask; logic [31:0] out_tag;
  logic [NPE-1:0] res_valid; logic signed [8:0] res [NPE]; logic [3:0] res_dim [NPE]; logic busy;

  dcm_group #(.NPE(NPE)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] qv [NPE][16], cv [NPE][16];
  int pl [NPE];
  longint ed [NPE];
  int er [NPE][16];

  always @(posedge clk) if (rst_n) for (int s = 0; s < NPE; s++) if (res_valid[s]) begin
    checks++;
    if (res[s] !== 9'(er[s][res_dim[s]])) begin
      failures++; $display("res lane %0d dim %0d: %0d vs %0d", s, res_dim[s], res[s], er[s][res_dim[s]]);
    end
  end

  task automatic run(input int nd, input bit sgn, input mode_e m, input logic [NPE-1:0] mask);
    int t0, maxp, qt, ct, d, tick;
    maxp = 0;
    for (int s = 0; s < NPE; s++) begin
      pl[s] = 1 + $urandom_range(7); ed[s] = 0;
      if (mask[s] && pl[s] > maxp) maxp = pl[s];
      for (int j = 0; j < nd; j++) begin
        qv[s][j] = 8'($urandom); cv[s][j] = 8'($urandom);
        qt = sgn ? 32'($signed(qv[s][j])) >>> (8 - pl[s]) : 32'(qv[s][j]) >> (8 - pl[s]);
        ct = sgn ? 32'($signed(cv[s][j])) >>> (8 - pl[s]) : 32'(cv[s][j]) >> (8 - pl[s]);
        if (sgn) begin qt = $signed(qv[s][j]) >>> (8 - pl[s]); ct = $signed(cv[s][j]) >>> (8 - pl[s]); end
        d = (qt - ct) * (1 << (8 - pl[s]));
        er[s][j] = d; ed[s] += longint'(d) * d;
      end
    end
    @(negedge clk);
    mode = m; signed_mode = sgn; task_start = 1; task_mask = mask; task_tag = $urandom;
    for (int s = 0; s < NPE; s++) lane_prec[s] = 4'(pl[s]);
    t0 = cyc;
    for (tick = 0; tick < nd * maxp; tick++) begin
      for (int s = 0; s < NPE; s++) begin
        int j, b;
        j = tick / pl[s]; b = tick % pl[s];
        lane_valid[s] = mask[s] && (j < nd);
        lane_q[s] = (j < nd) ? qv[s][j][7-b] : 1'b0;
        lane_c[s] = (j < nd) ? cv[s][j][7-b] : 1'b0;
        lane_first[s] = (j == 0); lane_last[s] = (j == nd - 1);
      end
      @(negedge clk);
      task_start = 0;
    end
    lane_valid = '0;
    if (m != MODE_RC) begin
      while (!out_valid) @(negedge clk);
      checks += 3;
      if (cyc - t0 != maxp * (nd + 1) + 1) begin
        failures++; $display("latency %0d vs %0d", cyc - t0, maxp * (nd + 1) + 1);
      end
      if (out_mask !== mask || out_tag !== task_tag) begin failures++; $display("mask/tag"); end
      for (int s = 0; s < NPE; s++) if (mask[s]) begin
        checks++;
        if (out_dist[s] !== 32'(ed[s])) begin
          failures++; $display("lane %0d p=%0d dist %0d vs %0d", s, pl[s], out_dist[s], ed[s]);
        end
      end
      if (!busy) begin failures++; $display("not busy with pending result"); end
      out_ready = 1; @(negedge clk); out_ready = 0;
      checks++;
      if (out_valid) begin failures++; $display("out_valid not cleared"); end
    end else repeat (3) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    task_start = 0; task_mask = 0; task_tag = 0; mode = MODE_CL; signed_mode = 0;
    lane_valid = 0; lane_q = 0; lane_c = 0; lane_first = 0; lane_last = 0; out_ready = 0;
    for (int s = 0; s < NPE; s++) lane_prec[s] = 8;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++)
      run(1 + $urandom_range(15), 1'($urandom), (i % 4 == 3) ? MODE_RC : MODE_CL,
          (i % 2) ? {NPE{1'b1}} : NPE'($urandom) | NPE'(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
