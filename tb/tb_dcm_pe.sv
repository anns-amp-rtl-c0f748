// tb_dcm_pe: self-checking test of the bit-serial PE.
// Random slices (1..16 dimensions) at random precisions, unsigned and signed
// operands, are streamed MSB first with no gaps. Expected distances are the
// squared differences of the top P bits rescaled by 2^(2(8-P)), computed here
// with plain integer arithmetic. The latency nd*P + P (first bit to result)
// is checked, and residual mode is checked per dimension.
module tb_dcm_pe;
  import anns_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] prec; logic signed_mode; mode_e mode;
  logic bit_valid, q_bit, c_bit, first_dim, last_dim;
  logic dist_valid; logic [31:0] pdist; logic res_valid; logic signed [8:0] res; logic busy;

  dcm_pe dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] qv [16], cv [16];
  longint exp_dist;
  int exp_res [16];
  int n_res;

  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (res !== 9'(exp_res[n_res])) begin
      failures++; $display("res mismatch dim %0d: %0d vs %0d t=%0d", n_res, res, exp_res[n_res], cyc);
    end
    n_res++;
  end

  task automatic run(input int nd, input int p, input bit sgn, input mode_e m);
    int t0, d, qt, ct;
    exp_dist = 0; n_res = 0;
    for (int j = 0; j < nd; j++) begin
      qv[j] = 8'($urandom); cv[j] = 8'($urandom);
      if (sgn) begin
        qt = $signed(qv[j]) >>> (8 - p); ct = $signed(cv[j]) >>> (8 - p);
      end else begin
        qt = qv[j] >> (8 - p); ct = cv[j] >> (8 - p);
      end
      d = (qt - ct) * (1 << (8 - p));
      exp_res[j] = d;
      exp_dist += longint'(d) * d;
    end
    @(negedge clk);
    prec = 4'(p); signed_mode = sgn; mode = m;
    t0 = cyc;
    for (int j = 0; j < nd; j++)
      for (int b = 0; b < p; b++) begin
        bit_valid = 1; q_bit = qv[j][7-b]; c_bit = cv[j][7-b];
        first_dim = (j == 0); last_dim = (j == nd - 1);
        @(negedge clk);
      end
    bit_valid = 0; first_dim = 0; last_dim = 0;
    if (m != MODE_RC) begin
      while (!dist_valid) @(negedge clk);
      checks += 2;
      if (pdist !== 32'(exp_dist)) begin
        failures++; $display("pdist mismatch nd=%0d p=%0d s=%0d: %0d vs %0d", nd, p, sgn, pdist, exp_dist);
      end
      if (cyc - t0 != nd * p + p) begin
        failures++; $display("latency %0d expected %0d", cyc - t0, nd * p + p);
      end
    end else begin
      repeat (3) @(negedge clk);
      checks++;
      if (n_res != nd) begin failures++; $display("res count %0d vs %0d", n_res, nd); end
    end
  endtask

  initial begin
    bit_valid = 0; q_bit = 0; c_bit = 0; first_dim = 0; last_dim = 0;
    prec = 8; signed_mode = 0; mode = MODE_CL;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++)
      run(1 + $urandom_range(15), 1 + $urandom_range(7), 1'($urandom), (i % 5 == 4) ? MODE_RC : MODE_CL);
    // back-to-back slices: second slice starts while first is in the multiplier
    run(8, 8, 0, MODE_LC); run(8, 4, 1, MODE_LC); run(1, 1, 0, MODE_CL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
