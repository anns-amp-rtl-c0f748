// mem_ctrl: memory controller of one memory pseudo channel.
//
// N_REQ data-fetch engines share one read channel of the stacked memory.
// Each cycle a round-robin arbiter grants one pending request (starting
// after the last one granted) and forwards it when the channel is ready and
// the response FIFO has room. The channel answers reads in order; the FIFO
// remembers who asked, so each response is returned to its requester. The
// paper names the memory controller and splits the memory into 32 pseudo
// channels; the arbiter and the FIFO depth are this design's choices.
module mem_ctrl #(
  parameter int unsigned N_REQ = 32,
  parameter int unsigned AW    = 32,
  parameter int unsigned DW    = 16,
  parameter int unsigned FD    = 8,
  parameter int unsigned RI_W  = (N_REQ <= 2) ? 1 : $clog2(N_REQ)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_REQ-1:0]  req,
  input  logic [AW-1:0]     addr [N_REQ],
  output logic [N_REQ-1:0]  gnt,
  output logic [N_REQ-1:0]  rvalid,
  output logic [DW-1:0]     rdata,
  // pseudo-channel side
  output logic              ch_req,
  output logic [AW-1:0]     ch_addr,
  input  logic              ch_ready,
  input  logic              ch_rvalid,
  input  logic [DW-1:0]     ch_rdata
);
  localparam int unsigned FW = $clog2(FD + 1);
  logic [RI_W-1:0] last, pick;
  logic            found;
  logic [RI_W-1:0] fifo [FD];
  logic [FW-1:0]   cnt;
  logic [$clog2(FD)-1:0] wp, rp;

  always_comb begin
    found = 1'b0; pick = '0;
    for (int k = 1; k <= N_REQ; k++) begin
      int i;
      i = (int'(last) + k) % N_REQ;
      if (!found && req[i]) begin found = 1'b1; pick = RI_W'(i); end
    end
  end

  logic fire;
  assign fire    = found && ch_ready && (cnt < FW'(FD) || ch_rvalid);
  assign ch_req  = found && (cnt < FW'(FD) || ch_rvalid);
  assign ch_addr = addr[pick];
  always_comb begin
    gnt = '0; rvalid = '0;
    if (fire) gnt[pick] = 1'b1;
    if (ch_rvalid) rvalid[fifo[rp]] = 1'b1;
  end
  assign rdata = ch_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= RI_W'(N_REQ - 1); cnt <= '0; wp <= '0; rp <= '0;
      for (int i = 0; i < FD; i++) fifo[i] <= '0;
    end else begin
      if (fire) begin
        last     <= pick;
        fifo[wp] <= pick;
        wp       <= (wp == $clog2(FD)'(FD - 1)) ? '0 : wp + 1'b1;
      end
      if (ch_rvalid) rp <= (rp == $clog2(FD)'(FD - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + FW'(fire) - FW'(ch_rvalid);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ch_rvalid |-> cnt != '0)
    else $error("mem_ctrl: response without request");
endmodule
