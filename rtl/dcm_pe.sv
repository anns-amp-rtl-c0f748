// dcm_pe: one bit-serial processing element of the Distance Calculation Module.
//
// The PE computes the squared L2 distance between two vector slices, or in
// residual mode the per-dimension difference, at a run-time precision of
// `prec` bits (the top `prec` bits of each B-bit operand). Three stages follow
// each other as in the paper's DCM: subtractor, multiplier, adder.
//
//  * Subtractor: operands arrive one bit per cycle, most significant bit
//    first, for `prec` cycles per dimension. The difference is built by the
//    digit recurrence d = 2d + (q_bit - c_bit); in signed mode the first digit
//    carries the sign weight and is negated.
//  * Multiplier: squares |d| serially, one bit of |d| per cycle (LSB first):
//    the bit gates |d| (the AND-gate partial product) and the shifted product
//    is added into the accumulator. It also takes `prec` cycles, so the two
//    stages overlap and one dimension completes every `prec` cycles.
//  * Adder: the accumulator sums the squared differences of all dimensions of
//    the slice; it restarts on the dimension flagged first_dim and reports on
//    the one flagged last_dim.
//
// Results are rescaled to the full-precision scale: a difference of the top
// P bits is worth d << (B-P), its square (d*d) << 2(B-P). This alignment lets
// slices of different precision be summed later; it is this design's choice.
// In MODE_RC the multiplier and adder are bypassed and res_valid/res give the
// scaled residual of each dimension one cycle after its last bit.
//
// Timing: dist_valid pulses `prec` cycles after the last bit of the last
// dimension has been presented (bits back to back: nd*prec + prec cycles after
// the first bit). prec, signed_mode and mode must stay constant within a
// dimension.
module dcm_pe
  import anns_pkg::*;
#(
  parameter int unsigned BW    = B,    // operand bits at full precision
  parameter int unsigned ACC_W = 32    // accumulator width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PREC_W-1:0]     prec,        // 1..BW
  input  logic                  signed_mode, // operands are two's complement
  input  mode_e                 mode,
  input  logic                  bit_valid,
  input  logic                  q_bit,
  input  logic                  c_bit,
  input  logic                  first_dim,   // held for all bits of the first dimension
  input  logic                  last_dim,    // held for all bits of the last dimension
  output logic                  dist_valid,
  output logic [ACC_W-1:0]      pdist,
  output logic                  res_valid,
  output logic signed [BW:0]    res,
  output logic                  busy
);
  localparam int unsigned DW = BW + 2;   // signed difference width incl. margin

  // ---------------- subtractor stage ----------------
  logic [PREC_W-1:0]     s_cnt;
  logic signed [DW-1:0]  s_acc;
  logic signed [DW-1:0]  s_next;
  logic signed [1:0]     digit;
  logic                  s_done;
  logic [PREC_W-1:0]     sh;              // BW - prec

  always_comb begin
    digit  = $signed({1'b0, q_bit}) - $signed({1'b0, c_bit});
    if (s_cnt == '0) s_next = (signed_mode) ? -DW'(digit) : DW'(digit);
    else             s_next = (s_acc <<< 1) + DW'(digit);
    s_done = bit_valid && (s_cnt == prec - 1'b1);
    sh     = PREC_W'(BW) - prec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_cnt <= '0;
      s_acc <= '0;
    end else if (bit_valid) begin
      s_acc <= s_next;
      s_cnt <= s_done ? '0 : s_cnt + 1'b1;
    end
  end

  // residual bypass (RC)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      res_valid <= s_done && (mode == MODE_RC);
      if (s_done) res <= (BW+1)'(s_next <<< sh);
    end
  end

  // ---------------- multiplier + adder stages ----------------
  logic [BW-1:0]         m_mag;     // |d| at reduced precision
  logic [PREC_W-1:0]     m_cnt;
  logic [PREC_W-1:0]     m_prec;
  logic [PREC_W-1:0]     m_sh;
  logic                  m_busy, m_first, m_last;
  logic [ACC_W-1:0]      acc;
  logic [ACC_W-1:0]      pp;        // partial product of this step
  logic [ACC_W-1:0]      acc_next;
  logic                  m_step_last;

  always_comb begin
    pp = '0;
    if (m_mag[m_cnt[$clog2(BW)-1:0]])
      pp = ACC_W'(m_mag) << (m_cnt + 2 * m_sh);
    acc_next    = (m_first && m_cnt == '0) ? pp : acc + pp;
    m_step_last = m_busy && (m_cnt == m_prec - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_mag <= '0; m_cnt <= '0; m_prec <= '0; m_sh <= '0;
      m_busy <= 1'b0; m_first <= 1'b0; m_last <= 1'b0;
      acc <= '0; dist_valid <= 1'b0; pdist <= '0;
    end else begin
      dist_valid <= 1'b0;
      if (m_busy) begin
        acc   <= acc_next;
        m_cnt <= m_cnt + 1'b1;
        if (m_step_last) begin
          m_busy <= 1'b0;
          if (m_last) begin
            dist_valid <= 1'b1;
            pdist       <= acc_next;
          end
        end
      end
      // load a finished difference (may coincide with the last step above)
      if (s_done && mode != MODE_RC) begin
        m_mag   <= BW'((s_next < 0) ? -s_next : s_next);
        m_cnt   <= '0;
        m_prec  <= prec;
        m_sh    <= sh;
        m_busy  <= 1'b1;
        m_first <= first_dim;
        m_last  <= last_dim;
      end
    end
  end

  assign busy = m_busy || (s_cnt != '0);
endmodule
