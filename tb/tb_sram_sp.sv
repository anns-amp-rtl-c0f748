// tb_sram_sp: writes random words to random addresses of a 256-word SRAM,
// reads them back in random order and checks data and the one-cycle read
// latency (read-first on a simultaneous write).
module tb_sram_sp;
  logic clk = 0; always #5 clk = ~clk;
  logic en, we; logic [7:0] addr; logic [31:0] wdata, rdata;
  sram_sp #(.WORDS(256), .W(32)) dut (.*);
  int checks = 0, failures = 0;
  logic [31:0] ref_m [256];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      en = 1; we = 1; addr = 8'(i); wdata = $urandom; ref_m[i] = wdata; @(negedge clk);
    end
    for (int i = 0; i < 2000; i++) begin
      logic [7:0] a; logic [31:0] old; bit w;
      a = 8'($urandom); w = ($urandom_range(3) == 0);
      en = 1; we = w; addr = a; wdata = $urandom; old = ref_m[a];
      if (w) ref_m[a] = wdata;
      @(negedge clk);
      en = 0; we = 0;
      checks++;
      if (rdata !== old) begin failures++; $display("addr %0d: %h vs %h", a, rdata, old); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
