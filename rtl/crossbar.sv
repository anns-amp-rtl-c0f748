// crossbar: registered full crossbar in front of the DRM adder trees.
//
// Each of the N_OUT outputs selects any of the N_IN inputs with its own
// index in sel; the routed words and the valid bit are registered (one cycle
// latency). In this design it routes the values read from a distance LUT
// onto the inputs of a DRM unit (distance calculation); an index of N_IN or
// more gives 0. SW may be wider than needed to allow that index. The paper names the
// crossbar and its place between LUT/DCM and DRM; its insides are this
// design's choice.
module crossbar #(
  parameter int unsigned N_IN  = 64,
  parameter int unsigned N_OUT = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned SW    = (N_IN <= 2) ? 1 : $clog2(N_IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [W-1:0]   in_data [N_IN],
  input  logic [SW-1:0]  sel [N_OUT],
  output logic           out_valid,
  output logic [W-1:0]   out_data [N_OUT]
);
  localparam int unsigned IW = (N_IN <= 2) ? 1 : $clog2(N_IN);
  logic [W-1:0] routed [N_OUT];
  always_comb
    for (int o = 0; o < N_OUT; o++)
      routed[o] = (sel[o] < SW'(N_IN)) ? in_data[sel[o][IW-1:0]] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < N_OUT; o++) out_data[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= routed;
    end
  end
endmodule
