// tb_crossbar: random inputs and random routing every cycle; each output
// must equal the selected input one cycle later (out-of-range selects give 0).
module tb_crossbar;
  localparam int NI = 12, NO = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid, out_valid; logic [15:0] in_data [NI]; logic [3:0] sel [NO]; logic [15:0] out_data [NO];
  crossbar #(.N_IN(NI), .N_OUT(NO), .W(16)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [15:0] e [NO];
    in_valid = 0; for (int i = 0; i < NI; i++) in_data[i] = 0; for (int o = 0; o < NO; o++) sel[o] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      in_valid = 1;
      for (int i = 0; i < NI; i++) in_data[i] = 16'($urandom);
      for (int o = 0; o < NO; o++) begin sel[o] = 4'($urandom_range(13)); e[o] = (sel[o] < NI) ? in_data[sel[o]] : 0; end
      @(negedge clk);
      checks++; if (!out_valid) begin failures++; $display("valid"); end
      for (int o = 0; o < NO; o++) begin
        checks++; if (out_data[o] !== e[o]) begin failures++; $display("out %0d: %h vs %h", o, out_data[o], e[o]); end
      end
    end
    in_valid = 0; @(negedge clk); checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
