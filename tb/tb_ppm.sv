// tb_ppm: self-checking test of the precision predictor.
// Loads 40 random support vectors, weights and a decaying kernel table,
// then runs predictions for random feature vectors and compares the raw
// regression value y and the rounded precision with an integer reference
// of the same fixed-point formula. Checks the n_sv + 5 cycle latency. Also
// checks that a large bias gives 8 bits and a negative one 4 bits.
module tb_ppm;
  localparam int NSV = 64, NF = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_we; logic [1:0] load_sel; logic [7:0] load_addr; logic [79:0] load_data;
  logic [6:0] n_sv; logic [5:0] gamma_sh; logic signed [15:0] bias;
  logic start; logic [15:0] feat [NF]; logic busy, done; logic [3:0] prec; logic signed [31:0] y;
  ppm #(.N_SV(NSV)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [15:0] sv [NSV][NF]; logic signed [15:0] al [NSV]; logic [15:0] ex [256];

  function automatic int ref_prec(input longint yv);
    longint yc;
    yc = (yv + 255) >>> 8;
    if (yc <= 4) return 4;
    if (yc >= 8) return 8;
    return 4 + ((yc - 4 + 1) / 2) * 2;
  endfunction

  task automatic predict(input int nsv);
    longint acc, yv; int t0;
    acc = 0;
    for (int i = 0; i < nsv; i++) begin
      longint d2, idx;
      d2 = 0;
      for (int f = 0; f < NF; f++) d2 += (longint'(feat[f]) - longint'(sv[i][f])) ** 2;
      idx = d2 >> gamma_sh; if (idx > 255) idx = 255;
      acc += longint'(al[i]) * longint'(ex[idx]);
    end
    yv = (acc >>> 16) + longint'(bias);
    n_sv = 7'(nsv); start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 3;
    if (y !== 32'(yv)) begin failures++; $display("y %0d vs %0d", y, yv); end
    if (prec !== 4'(ref_prec(yv))) begin failures++; $display("prec %0d vs %0d (y=%0d)", prec, ref_prec(yv), yv); end
    if (cyc - t0 != nsv + 5) begin failures++; $display("latency %0d vs %0d", cyc - t0, nsv + 5); end
  endtask

  initial begin
    load_we = 0; load_sel = 0; load_addr = 0; load_data = 0; n_sv = 0; gamma_sh = 4; bias = 0; start = 0;
    for (int f = 0; f < NF; f++) feat[f] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NSV; i++) begin
      for (int f = 0; f < NF; f++) sv[i][f] = 16'($urandom_range(63));
      al[i] = 16'($urandom_range(2047)) - 16'sd1024;
      load_we = 1; load_sel = 0; load_addr = 8'(i);
      load_data = {sv[i][4], sv[i][3], sv[i][2], sv[i][1], sv[i][0]};
      @(negedge clk);
      load_sel = 1; load_data = 80'(al[i]); @(negedge clk);
    end
    for (int e = 0; e < 256; e++) begin
      ex[e] = 16'(65535 >> (e / 16));
      load_sel = 2; load_addr = 8'(e); load_data = 80'(ex[e]); @(negedge clk);
    end
    load_we = 0;
    for (int r = 0; r < 60; r++) begin
      for (int f = 0; f < NF; f++) feat[f] = 16'($urandom_range(63));
      bias = 16'($urandom_range(2047));
      gamma_sh = 6'($urandom_range(3, 8));
      predict(1 + $urandom_range(NSV - 1));
    end
    bias = 16'sd4000; predict(3); checks++; if (prec != 8) begin failures++; $display("cap"); end
    bias = -16'sd4000; predict(3); checks++; if (prec != 4) begin failures++; $display("floor"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
