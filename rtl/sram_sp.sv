// sram_sp: single-port synchronous SRAM, behaviour of an on-chip buffer.
//
// One access per cycle: with en and we the word is written, with en alone it
// is read and rdata holds it from the next cycle on (read-first, one cycle
// latency). The paper's buffers (cluster, query/residual, centroid, codebook)
// are SRAM macros of the target process; this array stands in for them and
// maps to a memory when synthesized. Contents are not reset.
module sram_sp #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned W     = 256,
  parameter int unsigned AW    = (WORDS <= 2) ? 1 : $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end
endmodule
