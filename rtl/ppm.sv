// ppm: Precision Prediction Module.
//
// Predicts the bit-width a sub-space needs from its features {d', r1, r2, n1,
// n2}: distance from the query to the sub-space, radius of the nearest
// sub-space and of this one, and the vector counts of both. The model is a
// support vector regression with a Gaussian kernel, trained offline:
//     y = bias + sum_i alpha_i * exp(-gamma * ||x - sv_i||^2)
// The exponential is never computed: ||x - sv_i||^2 >> gamma_sh indexes a
// table of kernel values (saturating at the last entry), as the paper
// prescribes. Support vectors, weights and the kernel table are written
// through the load port before use; n_sv (<= N_SV) selects how many are used.
//
// Datapath: one support vector per cycle through four stages (memory read,
// squared distance and table index, table read, multiply-accumulate). A
// prediction takes n_sv + 5 cycles from start to done.
// Number formats (this design's choice): features unsigned integers,
// alpha and bias signed Q8.8, kernel values unsigned Q0.16; y is Q8.8.
// The regression value is read as a bit count and rounded up to one of the
// supported precisions PREC_MIN, PREC_MIN+PREC_STEP, ... , capped at B
// (4, 6 and 8 bits by default, the classes of the paper's overview figure).
module ppm
  import anns_pkg::*;
#(
  parameter int unsigned N_FEAT      = 5,
  parameter int unsigned FEAT_W      = 16,
  parameter int unsigned N_SV        = 1280,
  parameter int unsigned EXP_ENTRIES = 256,
  parameter int unsigned PREC_MIN    = 4,
  parameter int unsigned PREC_STEP   = 2,
  parameter int unsigned SV_AW       = $clog2(N_SV),
  parameter int unsigned EXP_AW      = $clog2(EXP_ENTRIES),
  parameter int unsigned LD_AW       = (SV_AW > EXP_AW) ? SV_AW : EXP_AW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // model load port: sel 0 = support vector, 1 = alpha, 2 = kernel table
  input  logic                       load_we,
  input  logic [1:0]                 load_sel,
  input  logic [LD_AW-1:0]           load_addr,
  input  logic [N_FEAT*FEAT_W-1:0]   load_data,
  // configuration
  input  logic [SV_AW:0]             n_sv,
  input  logic [5:0]                 gamma_sh,
  input  logic signed [15:0]         bias,
  // one prediction
  input  logic                       start,
  input  logic [FEAT_W-1:0]          feat [N_FEAT],
  output logic                       busy,
  output logic                       done,
  output logic [PREC_W-1:0]          prec,
  output logic signed [31:0]         y
);
  localparam int unsigned D2_W = 2 * FEAT_W + $clog2(N_FEAT) + 1;

  logic [N_FEAT*FEAT_W-1:0] sv_mem    [N_SV];
  logic signed [15:0]       alpha_mem [N_SV];
  logic [15:0]              exp_mem   [EXP_ENTRIES];

  always_ff @(posedge clk) begin
    if (load_we) begin
      case (load_sel)
        2'd0: sv_mem[load_addr[SV_AW-1:0]]    <= load_data;
        2'd1: alpha_mem[load_addr[SV_AW-1:0]] <= load_data[15:0];
        default: exp_mem[load_addr[EXP_AW-1:0]] <= load_data[15:0];
      endcase
    end
  end

  logic [FEAT_W-1:0]        x [N_FEAT];
  logic [SV_AW:0]           issue;
  logic                     issuing;
  // stage A: memory read
  logic                     va;
  logic [N_FEAT*FEAT_W-1:0] sv_a;
  logic signed [15:0]       al_a;
  // stage B: squared distance -> index
  logic                     vb;
  logic [EXP_AW-1:0]        idx_b;
  logic signed [15:0]       al_b;
  // stage C: kernel read
  logic                     vc;
  logic [15:0]              k_c;
  logic signed [15:0]       al_c;
  // stage D: accumulate
  logic signed [47:0]       acc;
  logic                     draining;

  logic [D2_W-1:0]          d2;
  logic [D2_W-1:0]          d2_sh;
  always_comb begin
    d2 = '0;
    for (int f = 0; f < N_FEAT; f++) begin
      logic signed [FEAT_W:0] df;
      df = $signed({1'b0, x[f]}) - $signed({1'b0, sv_a[f*FEAT_W +: FEAT_W]});
      d2 += D2_W'(df * df);
    end
    d2_sh = d2 >> gamma_sh;
  end

  always_ff @(posedge clk) begin
    sv_a  <= sv_mem[issue[SV_AW-1:0]];
    al_a  <= alpha_mem[issue[SV_AW-1:0]];
    idx_b <= (d2_sh >= D2_W'(EXP_ENTRIES)) ? EXP_AW'(EXP_ENTRIES - 1) : EXP_AW'(d2_sh);
    al_b  <= al_a;
    k_c   <= exp_mem[idx_b];
    al_c  <= al_b;
  end

  // y in Q8.8: (alpha Q8.8 * k Q0.16) >> 16, plus bias
  logic signed [31:0] y_next;
  logic signed [31:0] y_ceil;
  logic [PREC_W-1:0]  p_next;
  always_comb begin
    y_next = 32'(acc >>> 16) + 32'(bias);
    y_ceil = (y_next + 32'sd255) >>> 8;
    if (y_ceil <= $signed(PREC_MIN))
      p_next = PREC_W'(PREC_MIN);
    else if (y_ceil >= $signed(B))
      p_next = PREC_W'(B);
    else
      p_next = PREC_W'(PREC_MIN + ((y_ceil - PREC_MIN + PREC_STEP - 1) / PREC_STEP) * PREC_STEP);
    if (p_next > PREC_W'(B)) p_next = PREC_W'(B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue <= '0; issuing <= 1'b0; va <= 1'b0; vb <= 1'b0; vc <= 1'b0;
      acc <= '0; draining <= 1'b0; done <= 1'b0; prec <= PREC_W'(B); y <= '0;
      for (int f = 0; f < N_FEAT; f++) x[f] <= '0;
    end else begin
      done <= 1'b0;
      va <= issuing; vb <= va; vc <= vb;
      if (vc) acc <= acc + 48'(al_c * $signed({1'b0, k_c}));
      if (start && !busy) begin
        x       <= feat;
        issue   <= '0;
        issuing <= (n_sv != '0);
        draining <= 1'b1;
        acc     <= '0;
      end else if (issuing) begin
        if (issue == n_sv - 1'b1) issuing <= 1'b0;
        issue <= issue + 1'b1;
      end else if (draining && !va && !vb && !vc) begin
        draining <= 1'b0;
        done     <= 1'b1;
        prec     <= p_next;
        y        <= y_next;
      end
    end
  end

  assign busy = draining;
endmodule
