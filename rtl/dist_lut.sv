// dist_lut: distance look-up table of one query (one per DRM group).
//
// Holds LUT_j[k] for the M PQ subspaces j and the ENTRIES codebook entries k:
// the squared distance between the query's residual and codebook entry k in
// subspace j. It is written during LUT construction, one value per write,
// and read during distance calculation with the M codes of one encoded
// vector, returning the M values together one cycle later (with a tag).
// Bank j holds subspace j, so the M reads never conflict. The registered read
// and the tag are this design's choices.
module dist_lut #(
  parameter int unsigned M       = 16,
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned LUT_W   = 32,
  parameter int unsigned TAG_W   = 32,
  parameter int unsigned CODE_W  = $clog2(ENTRIES),
  parameter int unsigned SUB_W   = (M <= 2) ? 1 : $clog2(M)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [SUB_W-1:0]   wsub,
  input  logic [CODE_W-1:0]  wentry,
  input  logic [LUT_W-1:0]   wdata,
  input  logic               rd_valid,
  input  logic [CODE_W-1:0]  codes [M],
  input  logic [TAG_W-1:0]   rd_tag,
  output logic               out_valid,
  output logic [LUT_W-1:0]   out_data [M],
  output logic [TAG_W-1:0]   out_tag
);
  logic [LUT_W-1:0] bank [M][ENTRIES];

  for (genvar j = 0; j < M; j++) begin : g_bank
    always_ff @(posedge clk) begin
      if (we && wsub == SUB_W'(j)) bank[j][wentry] <= wdata;
      if (rd_valid) out_data[j] <= bank[j][codes[j]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0;
    end else begin
      out_valid <= rd_valid;
      if (rd_valid) out_tag <= rd_tag;
    end
  end
endmodule
