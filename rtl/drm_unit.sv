// drm_unit: one unit of the Distance Reduction Module.
//
// A multi-bit adder tree sums N_IN partial results: the per-slice partial
// distances of one vector in cluster locating and LUT construction, or the M
// looked-up LUT values of one encoded vector in distance calculation. Inputs
// are zero-extended to the output width and masked lanes count as zero. The
// tree has one register stage per level (log2(N_IN) stages), so it accepts a
// new vector every cycle and returns its sum log2(N_IN) cycles later, with
// the tag that came with it.
//
// When the vector space is not divided there is nothing to reduce: with
// bypass set, lane 0 is passed to the output after one register stage.
// The pipelined tree follows the paper; the bypass latency and the tag are
// this design's choices.
module drm_unit #(
  parameter int unsigned N_IN  = 32,
  parameter int unsigned IN_W  = 32,
  parameter int unsigned TAG_W = 32,
  parameter int unsigned OUT_W = IN_W + $clog2(N_IN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IN_W-1:0]   in_data [N_IN],
  input  logic [N_IN-1:0]   in_mask,
  input  logic [TAG_W-1:0]  in_tag,
  input  logic              bypass,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_sum,
  output logic [TAG_W-1:0]  out_tag
);
  localparam int unsigned LV = $clog2(N_IN);   // number of tree levels
  localparam int unsigned NP = 1 << LV;        // padded lane count

  // level l holds NP >> l partial sums
  logic [OUT_W-1:0] lvl   [LV+1][NP];
  logic             vld   [LV+1];
  logic [TAG_W-1:0] tag   [LV+1];

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl[0][i] = (i < N_IN && in_mask[i % N_IN]) ? OUT_W'(in_data[i % N_IN]) : '0;
    vld[0] = in_valid && !bypass;
    tag[0] = in_tag;
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1] <= 1'b0;
        tag[l+1] <= '0;
        for (int i = 0; i < NP; i++) lvl[l+1][i] <= '0;
      end else begin
        vld[l+1] <= vld[l];
        if (vld[l]) begin
          tag[l+1] <= tag[l];
          for (int i = 0; i < (NP >> (l + 1)); i++)
            lvl[l+1][i] <= lvl[l][2*i] + lvl[l][2*i+1];
        end
      end
    end
  end

  logic             byp_v;
  logic [OUT_W-1:0] byp_d;
  logic [TAG_W-1:0] byp_t;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_v <= 1'b0; byp_d <= '0; byp_t <= '0;
    end else begin
      byp_v <= in_valid && bypass;
      if (in_valid && bypass) begin
        byp_d <= OUT_W'(in_data[0]);
        byp_t <= in_tag;
      end
    end
  end

  always_comb begin
    out_valid = vld[LV] || byp_v;
    out_sum   = byp_v ? byp_d : lvl[LV][0];
    out_tag   = byp_v ? byp_t : tag[LV];
  end

  // the two paths must not deliver in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(vld[LV] && byp_v))
    else $error("drm_unit: bypass and tree results collide");
endmodule
