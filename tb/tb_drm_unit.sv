// tb_drm_unit: self-checking test of the DRM adder tree.
// Random 32-lane vectors with random masks are issued one per cycle; each sum
// must appear exactly 5 cycles later with its tag. Then bypass vectors must
// return lane 0 after one cycle.
module tb_drm_unit;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; logic [31:0] in_data [N]; logic [N-1:0] in_mask; logic [31:0] in_tag; logic bypass;
  logic out_valid; logic [36:0] out_sum; logic [31:0] out_tag;
  drm_unit dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  longint exp_sum [int]; int exp_cyc [int];
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int seen = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2; seen++;
    if (!exp_sum.exists(int'(out_tag))) begin failures++; $display("unknown tag %0d", out_tag); end
    else begin
      if (out_sum !== 37'(exp_sum[int'(out_tag)])) begin failures++; $display("sum %0d vs %0d", out_sum, exp_sum[int'(out_tag)]); end
      if (cyc - exp_cyc[int'(out_tag)] != (bypass ? 1 : 5)) begin failures++; $display("latency %0d", cyc - exp_cyc[int'(out_tag)]); end
    end
  end
  initial begin
    in_valid = 0; bypass = 0; in_mask = 0; in_tag = 0;
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint s;
      if (t == 300) begin in_valid = 0; repeat (8) @(negedge clk); bypass = 1; end
      in_valid = ($urandom_range(3) != 0); in_mask = (t % 3 == 0) ? '1 : N'($urandom);
      in_tag = t; s = 0;
      for (int i = 0; i < N; i++) begin
        in_data[i] = $urandom;
        if (bypass ? (i == 0) : in_mask[i]) s += longint'(in_data[i]);
      end
      if (in_valid) begin exp_sum[t] = s; exp_cyc[t] = cyc; end
      @(negedge clk);
    end
    in_valid = 0; repeat (10) @(negedge clk);
    checks++; if (seen != exp_sum.num()) begin failures++; $display("count %0d vs %0d", seen, exp_sum.num()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
