// tb_dist_lut: fills a 4-subspace, 16-entry LUT with random values, then
// reads random code vectors and checks every returned value and tag one cycle
// later; finally rewrites one entry and reads it back.
module tb_dist_lut;
  localparam int M = 4, E = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic we; logic [1:0] wsub; logic [3:0] wentry; logic [31:0] wdata;
  logic rd_valid; logic [3:0] codes [M]; logic [31:0] rd_tag;
  logic out_valid; logic [31:0] out_data [M]; logic [31:0] out_tag;
  dist_lut #(.M(M), .ENTRIES(E)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] r [M][E];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; wsub = 0; wentry = 0; wdata = 0; rd_valid = 0; rd_tag = 0;
    for (int j = 0; j < M; j++) codes[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < M; j++) for (int k = 0; k < E; k++) begin
      we = 1; wsub = 2'(j); wentry = 4'(k); wdata = $urandom; r[j][k] = wdata; @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 300; t++) begin
      logic [31:0] e [M];
      if (t == 200) begin we = 1; wsub = 2; wentry = 5; wdata = 32'hdead; r[2][5] = wdata; @(negedge clk); we = 0; end
      rd_valid = 1; rd_tag = t;
      for (int j = 0; j < M; j++) begin codes[j] = (t > 200) ? 4'd5 : 4'($urandom); e[j] = r[j][codes[j]]; end
      @(negedge clk);
      rd_valid = 0;
      checks += 2; if (!out_valid || out_tag !== 32'(t)) begin failures++; $display("valid/tag"); end
      for (int j = 0; j < M; j++) if (out_data[j] !== e[j]) begin failures++; $display("t%0d sub %0d: %h vs %h", t, j, out_data[j], e[j]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
