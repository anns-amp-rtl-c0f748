// tb_lsm: self-checking test of the load scheduler against a reference model.
// Four groups, queue depth 2. Every cycle random tasks are offered, random
// groups are ready and earlier tasks complete. The model keeps the same
// queues and loads; the chosen group, each group's offered task, the offload
// flag and the offload count are compared every cycle. A directed phase
// holds all groups but one busy so that the idle one must take work from its
// neighbour.
module tb_lsm;
  localparam int NG = 4, QD = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready; logic [15:0] in_nvec; logic [5:0] in_nd; logic [3:0] in_prec_max;
  logic [63:0] in_payload; logic [1:0] in_group;
  logic [NG-1:0] grp_valid, grp_ready, grp_stolen, done_valid;
  logic [63:0] grp_payload [NG]; logic [23:0] grp_cost [NG], done_cost [NG]; logic [31:0] offloads;
  lsm #(.NG(NG), .QD(QD)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint mq_pay [NG][$]; int mq_cost [NG][$]; longint mload [NG];
  int infl [NG][$];  // costs of tasks a group is executing
  int noff = 0;

  initial begin
    in_valid = 0; in_nvec = 0; in_nd = 0; in_prec_max = 0; in_payload = 0; grp_ready = 0; done_valid = 0;
    for (int g = 0; g < NG; g++) begin done_cost[g] = 0; mload[g] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int best; longint bl; bit anyfree;
      bit exp_v [NG]; longint exp_p [NG]; int exp_c [NG]; bit exp_st [NG]; bit own [NG], stl [NG];
      // ---- drive ----
      in_valid = ($urandom_range(2) != 0);
      in_nvec = 16'(1 + $urandom_range(40)); in_nd = 6'(1 + $urandom_range(15)); in_prec_max = 4'(1 + $urandom_range(7));
      in_payload = {$urandom, $urandom};
      if (t >= 2000 && t < 2500) grp_ready = 4'b0001;      // only group 0 takes work
      else grp_ready = NG'($urandom);
      for (int g = 0; g < NG; g++) begin
        done_valid[g] = (infl[g].size() > 0) && ($urandom_range(3) == 0);
        done_cost[g] = done_valid[g] ? 24'(infl[g][0]) : 0;
      end
      #1;
      // ---- model ----
      best = 0; bl = 0; anyfree = 0;
      for (int g = 0; g < NG; g++)
        if (mq_pay[g].size() < QD && (!anyfree || mload[g] < bl)) begin best = g; bl = mload[g]; anyfree = 1; end
      checks++;
      if (in_ready !== anyfree || (anyfree && in_group !== 2'(best))) begin
        failures++; $display("t%0d choice %0d/%0d vs %0d/%0d", t, in_ready, in_group, anyfree, best);
      end
      for (int g = 0; g < NG; g++) own[g] = mq_pay[g].size() > 0 && grp_ready[g];
      for (int g = 0; g < NG; g++) begin
        int h, skip;
        h = (g + 1) % NG; skip = own[h] ? 1 : 0;
        exp_st[g] = 0; stl[g] = 0; exp_v[g] = 0; exp_p[g] = 0; exp_c[g] = 0;
        if (mq_pay[g].size() > 0) begin exp_v[g] = 1; exp_p[g] = mq_pay[g][0]; exp_c[g] = mq_cost[g][0]; end
        else if (mq_pay[h].size() > skip) begin
          exp_v[g] = 1; exp_st[g] = 1; exp_p[g] = mq_pay[h][skip]; exp_c[g] = mq_cost[h][skip]; stl[g] = grp_ready[g];
        end
        checks++;
        if (grp_valid[g] !== exp_v[g] || (exp_v[g] && (grp_payload[g] !== 64'(exp_p[g]) || grp_cost[g] !== 24'(exp_c[g]) || grp_stolen[g] !== exp_st[g]))) begin
          failures++; $display("t%0d group %0d offer mismatch v=%0d/%0d st=%0d/%0d", t, g, grp_valid[g], exp_v[g], grp_stolen[g], exp_st[g]);
        end
      end
      // ---- update model (same order as hardware) ----
      for (int g = 0; g < NG; g++) begin
        if (done_valid[g]) begin mload[g] -= infl[g][0]; void'(infl[g].pop_front()); end
        if (stl[g]) begin
          int h; h = (g + 1) % NG;
          infl[g].push_back(exp_c[g]); mload[g] += exp_c[g]; mload[h] -= exp_c[g]; noff++;
        end
      end
      for (int g = 0; g < NG; g++) if (own[g]) begin
        infl[g].push_back(mq_cost[g][0]); void'(mq_pay[g].pop_front()); void'(mq_cost[g].pop_front());
      end
      for (int g = 0; g < NG; g++) if (stl[g]) begin
        int h; h = (g + 1) % NG;
        mq_pay[h].delete(own[h] ? 0 : 0); mq_cost[h].delete(0);
      end
      if (in_valid && anyfree) begin
        int c; c = int'(in_nvec) * int'(in_nd) * int'(in_prec_max);
        mq_pay[best].push_back(in_payload); mq_cost[best].push_back(c); mload[best] += c;
      end
      @(negedge clk);
      checks++;
      if (offloads !== 32'(noff)) begin failures++; $display("offloads %0d vs %0d", offloads, noff); end
    end
    checks++;
    if (noff == 0) begin failures++; $display("no offload happened"); end
    $display("offloads: %0d", noff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
