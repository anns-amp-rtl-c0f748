// lsm: Load Scheduling Module.
//
// Bit-serial groups finish a task in a time that depends on the task's size
// and precision, so groups run out of work at different times. The LSM
// (1) estimates each task's work with a linear model,
//       cost = n_vec * nd * prec_max   (cycles of one DCM group),
//     where prec_max is the largest precision over the task's slices (the
//     slowest lane sets the group's time);
// (2) hands the task greedily to the group with the least outstanding
//     estimated load that still has queue space (lowest index on ties);
// (3) lets an idle group take work from its busy neighbour: a group whose
//     own queue is empty may take the oldest queued task of group (g+1) mod
//     NG, leaving the neighbour the task it is taking itself in that cycle.
// The linear estimator, greedy allocation and neighbour offload follow the
// paper; the queue depth, the offload direction and the tie rule are this
// design's choices.
//
// Interface: in_valid/in_ready accepts one task per cycle. Group g sees
// grp_valid[g] with its task and takes it with grp_ready[g]; the task's cost
// comes along and is returned with done_valid[g]/done_cost[g] when the group
// finishes, which removes it from the group's load. offloads counts tasks
// moved between neighbours.
module lsm #(
  parameter int unsigned NG     = 1024,
  parameter int unsigned QD     = 2,
  parameter int unsigned PAY_W  = 64,
  parameter int unsigned COST_W = 24,
  parameter int unsigned GI_W   = (NG <= 2) ? 1 : $clog2(NG)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [15:0]        in_nvec,
  input  logic [5:0]         in_nd,
  input  logic [3:0]         in_prec_max,
  input  logic [PAY_W-1:0]   in_payload,
  output logic [GI_W-1:0]    in_group,       // group chosen for the offered task
  output logic [NG-1:0]      grp_valid,
  input  logic [NG-1:0]      grp_ready,
  output logic [PAY_W-1:0]   grp_payload [NG],
  output logic [COST_W-1:0]  grp_cost [NG],
  output logic [NG-1:0]      grp_stolen,     // task came from the neighbour
  input  logic [NG-1:0]      done_valid,
  input  logic [COST_W-1:0]  done_cost [NG],
  output logic [31:0]        offloads
);
  localparam int unsigned CW = (QD <= 1) ? 1 : $clog2(QD + 1);
  localparam int unsigned LW = COST_W + 8;

  logic [PAY_W-1:0]  q_pay  [NG][QD];
  logic [COST_W-1:0] q_cost [NG][QD];
  logic [CW-1:0]     q_cnt  [NG];
  logic [LW-1:0]     load   [NG];

  logic [COST_W-1:0] in_cost;
  assign in_cost = COST_W'(in_nvec) * COST_W'(in_nd) * COST_W'(in_prec_max);

  // ---- greedy choice: least-loaded group with queue space ----
  logic [GI_W-1:0] best;
  logic            any_free;
  always_comb begin
    logic [LW-1:0] bl;
    best = '0; bl = '1; any_free = 1'b0;
    for (int g = 0; g < NG; g++) begin
      if (q_cnt[g] < CW'(QD) && (!any_free || load[g] < bl)) begin
        best = GI_W'(g); bl = load[g]; any_free = 1'b1;
      end
    end
  end
  assign in_ready = any_free;
  assign in_group = best;

  // ---- hand-out and neighbour offload ----
  logic [NG-1:0] own_pop, steal;
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      int h;
      h = (g + 1) % NG;
      own_pop[g] = q_cnt[g] != '0 && grp_ready[g];
      steal[g]   = 1'b0;
      grp_valid[g]   = 1'b0;
      grp_payload[g] = q_pay[g][0];
      grp_cost[g]    = q_cost[g][0];
      grp_stolen[g]  = 1'b0;
      if (q_cnt[g] != '0) begin
        grp_valid[g] = 1'b1;
      end else if (NG > 1 && (q_cnt[h] > ((q_cnt[h] != '0 && grp_ready[h]) ? CW'(1) : CW'(0)))) begin
        // neighbour keeps its head if it is taking it now; offer the next one
        grp_valid[g]   = 1'b1;
        grp_stolen[g]  = 1'b1;
        grp_payload[g] = (q_cnt[h] != '0 && grp_ready[h]) ? q_pay[h][(QD > 1) ? 1 : 0]  : q_pay[h][0];
        grp_cost[g]    = (q_cnt[h] != '0 && grp_ready[h]) ? q_cost[h][(QD > 1) ? 1 : 0] : q_cost[h][0];
        steal[g]       = grp_ready[g];
      end
    end
  end

  // ---- queue and load update ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      offloads <= '0;
      for (int g = 0; g < NG; g++) begin
        q_cnt[g] <= '0;
        load[g]  <= '0;
        for (int i = 0; i < QD; i++) begin
          q_pay[g][i]  <= '0;
          q_cost[g][i] <= '0;
        end
      end
    end else begin
      int nst;
      nst = 0;
      for (int g = 0; g < NG; g++) begin
        int pops, cnt;
        logic [LW-1:0] ld;
        // entries leaving this queue: own head, plus one taken by the
        // lower neighbour (g-1) when it steals
        pops = (own_pop[g] ? 1 : 0) + (steal[(g + NG - 1) % NG] ? 1 : 0);
        cnt  = int'(q_cnt[g]) - pops;
        for (int i = 0; i < QD; i++) begin
          if (i + pops < QD) begin
            q_pay[g][i]  <= q_pay[g][i + pops];
            q_cost[g][i] <= q_cost[g][i + pops];
          end
        end
        ld = load[g];
        if (in_valid && in_ready && best == GI_W'(g)) begin
          q_pay[g][cnt]  <= in_payload;
          q_cost[g][cnt] <= in_cost;
          cnt = cnt + 1;
          ld = ld + LW'(in_cost);
        end
        if (steal[g])                        ld = ld + LW'(grp_cost[g]);
        if (steal[(g + NG - 1) % NG])        ld = ld - LW'(grp_cost[(g + NG - 1) % NG]);
        if (done_valid[g])                   ld = ld - LW'(done_cost[g]);
        load[g]  <= ld;
        q_cnt[g] <= CW'(cnt);
        if (steal[g]) nst++;
      end
      offloads <= offloads + 32'(nst);
    end
  end

  for (genvar g = 0; g < NG; g++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) q_cnt[g] <= CW'(QD))
      else $error("lsm: queue %0d overflow", g);
  end
endmodule
