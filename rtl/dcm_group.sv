// dcm_group: one DCM group of NPE bit-serial processing elements.
//
// Lane s works on slice (sub-space) s of the same pair of vectors, so the
// group computes all slices of one query/centroid (or residual/codebook)
// pair at once, each lane at the precision predicted for its own sub-space.
// Lanes therefore finish at different times; the group collects the partial
// distances of all lanes enabled in the task mask and presents them together
// (out_valid, held until out_ready), tagged with the tag given at task start.
// In MODE_RC each lane's residual is forwarded as it appears, with the
// dimension index counted per lane.
//
// Interface: task_start (one cycle, before or with the first bit) carries the
// lane mask and the tag; the lane_* inputs are the per-lane bit streams of the
// DFM. busy is high from task_start until the result has been taken, and a
// new task must not start while it is high.
module dcm_group
  import anns_pkg::*;
#(
  parameter int unsigned NPE    = 32,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned TAG_W  = 32,
  parameter int unsigned DIM_W  = 4    // width of the per-lane dimension index
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  task_start,
  input  logic [NPE-1:0]        task_mask,
  input  logic [TAG_W-1:0]      task_tag,
  input  mode_e                 mode,
  input  logic                  signed_mode,
  input  logic [NPE-1:0]        lane_valid,
  input  logic [NPE-1:0]        lane_q,
  input  logic [NPE-1:0]        lane_c,
  input  logic [NPE-1:0]        lane_first,
  input  logic [NPE-1:0]        lane_last,
  input  logic [PREC_W-1:0]     lane_prec [NPE],
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [ACC_W-1:0]      out_dist [NPE],
  output logic [NPE-1:0]        out_mask,
  output logic [TAG_W-1:0]      out_tag,
  output logic [NPE-1:0]        res_valid,
  output logic signed [B:0]     res [NPE],
  output logic [DIM_W-1:0]      res_dim [NPE],
  output logic                  busy
);
  logic [NPE-1:0]   pe_dv, pe_busy, done;
  logic [ACC_W-1:0] pe_dist [NPE];
  logic             collecting;

  for (genvar s = 0; s < NPE; s++) begin : g_pe
    dcm_pe #(.BW(B), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n,
      .prec        (lane_prec[s]),
      .signed_mode,
      .mode,
      .bit_valid   (lane_valid[s]),
      .q_bit       (lane_q[s]),
      .c_bit       (lane_c[s]),
      .first_dim   (lane_first[s]),
      .last_dim    (lane_last[s]),
      .dist_valid  (pe_dv[s]),
      .pdist       (pe_dist[s]),
      .res_valid   (res_valid[s]),
      .res         (res[s]),
      .busy        (pe_busy[s])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_dist[s] <= '0;
        res_dim[s]  <= '0;
      end else begin
        if (pe_dv[s]) out_dist[s] <= pe_dist[s];
        if (task_start)        res_dim[s] <= '0;
        else if (res_valid[s]) res_dim[s] <= res_dim[s] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= '0; collecting <= 1'b0; out_valid <= 1'b0;
      out_mask <= '0; out_tag <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (task_start) begin
        done       <= '0;
        collecting <= (mode != MODE_RC) && (task_mask != '0);
        out_mask   <= task_mask;
        out_tag    <= task_tag;
      end else if (collecting) begin
        done <= done | pe_dv;
        if (((done | pe_dv) & out_mask) == out_mask) begin
          collecting <= 1'b0;
          out_valid  <= 1'b1;
        end
      end
    end
  end

  assign busy = collecting || out_valid || (|pe_busy);

  // a result must not be overwritten before it is taken
  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |-> !task_start)
    else $error("dcm_group: task started while a result is pending");
endmodule
