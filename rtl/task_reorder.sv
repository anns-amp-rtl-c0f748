// task_reorder: turns the cluster-locating result around before the later
// stages fetch cluster data.
//
// Cluster locating yields, for every query, the clusters it probes. Fetching
// per query would load a popular cluster many times; the reorder unit instead
// builds, for every cluster, the list of queries that probe it, so each
// cluster is fetched once for all of them. Pairs (cluster, query) are inserted
// one per cycle into per-cluster linked lists (head, tail and next pointers);
// clusters are remembered in order of first use. drain then emits, cluster by
// cluster, every query of the list, one per cycle, with out_last on the last
// query of a cluster, and empties the table. The paper shows this unit only
// in its architecture figure; the linked-list organisation is this design's.
module task_reorder #(
  parameter int unsigned N_CLUSTERS = 65536,
  parameter int unsigned N_ENTRIES  = 4096,
  parameter int unsigned QID_W      = 16,
  parameter int unsigned CID_W      = $clog2(N_CLUSTERS),
  parameter int unsigned EID_W      = $clog2(N_ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ins_valid,
  output logic               ins_ready,
  input  logic [CID_W-1:0]   ins_cluster,
  input  logic [QID_W-1:0]   ins_query,
  input  logic               drain,
  output logic               out_valid,
  output logic [CID_W-1:0]   out_cluster,
  output logic [QID_W-1:0]   out_query,
  output logic               out_last,
  output logic               busy
);
  logic [EID_W-1:0] head [N_CLUSTERS];
  logic [EID_W-1:0] tail [N_CLUSTERS];
  logic             used [N_CLUSTERS];
  logic [QID_W-1:0] e_q    [N_ENTRIES];
  logic [EID_W-1:0] e_next [N_ENTRIES];
  logic [EID_W:0]   n_ent;                 // entries held
  logic [CID_W-1:0] act [N_ENTRIES];       // clusters in order of first use
  logic [EID_W:0]   n_act;

  typedef enum logic [1:0] {S_FILL, S_WALK} state_e;
  state_e           st;
  logic [EID_W:0]   act_idx;                    // index into act
  logic [EID_W-1:0] cur;                   // entry being emitted
  logic [EID_W-1:0] cur_tail;

  assign ins_ready = (st == S_FILL) && (n_ent < (EID_W+1)'(N_ENTRIES));
  assign busy      = (st == S_WALK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_FILL; n_ent <= '0; n_act <= '0; act_idx <= '0; cur <= '0; cur_tail <= '0;
      out_valid <= 1'b0; out_cluster <= '0; out_query <= '0; out_last <= 1'b0;
      for (int c = 0; c < N_CLUSTERS; c++) used[c] <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (st)
        S_FILL: begin
          if (ins_valid && ins_ready) begin
            e_q[n_ent[EID_W-1:0]] <= ins_query;
            tail[ins_cluster]     <= n_ent[EID_W-1:0];
            if (!used[ins_cluster]) begin
              used[ins_cluster]         <= 1'b1;
              head[ins_cluster]         <= n_ent[EID_W-1:0];
              act[n_act[EID_W-1:0]]     <= ins_cluster;
              n_act                     <= n_act + 1'b1;
            end else begin
              e_next[tail[ins_cluster]] <= n_ent[EID_W-1:0];
            end
            n_ent <= n_ent + 1'b1;
          end else if (drain && n_act != '0) begin
            st       <= S_WALK;
            act_idx       <= '0;
            cur      <= head[act[0]];
            cur_tail <= tail[act[0]];
          end
        end
        S_WALK: begin
          out_valid   <= 1'b1;
          out_cluster <= act[act_idx[EID_W-1:0]];
          out_query   <= e_q[cur];
          out_last    <= (cur == cur_tail);
          if (cur == cur_tail) begin
            used[act[act_idx[EID_W-1:0]]] <= 1'b0;
            if (act_idx + 1'b1 == n_act) begin
              st <= S_FILL; n_act <= '0; n_ent <= '0;
            end else begin
              act_idx       <= act_idx + 1'b1;
              cur      <= head[act[act_idx[EID_W-1:0] + 1'b1]];
              cur_tail <= tail[act[act_idx[EID_W-1:0] + 1'b1]];
            end
          end else begin
            cur <= e_next[cur];
          end
        end
        default: st <= S_FILL;
      endcase
    end
  end
endmodule
