// dfm: Data Fetching Module of one DCM group.
//
// Data in memory use the bit-interleaved layout: for each slice (sub-space)
// the most significant bits of the vectors come first, then the next bit
// plane, down to the LSB. A task at precision P for a slice therefore needs
// only the first P planes, which are consecutive in memory, so a
// low-precision slice costs proportionally less bandwidth. A memory word is
// one bit plane of one slice (MAX_DIMS bits, bit j = dimension j); plane p of
// slice s of a task is at
//      addr + (s*B + p) * stride
// so stride = number of vectors stored side by side gives the paper's layout
// exactly, and stride = 1 stores each vector's planes contiguously.
//
// The DFM has a ping-pong buffer of two halves. While the group computes on
// one half, the next task's planes are fetched into the other (prefetching).
// A full half is streamed to the group when the group is idle: lane s gets,
// for each dimension j in turn, the P_s bits of the centroid/codebook word
// and of the query/residual, MSB first, with first/last-dimension flags.
// Lanes run at their own precision, so they finish at different times.
//
// Interface: task_valid/task_ready; mem_req/mem_gnt issue reads, mem_rvalid
// returns them in order. stream_tag names the task being streamed so that
// the query it needs is presented on `query` (dimension s*MAX_DIMS + j of
// the query belongs to lane s). The two-half buffer follows the paper; the
// word format, the address rule and starting a stream only when the group is
// idle are this design's choices.
module dfm
  import anns_pkg::*;
#(
  parameter int unsigned NPE      = 32,
  parameter int unsigned MAX_DIMS = 16,
  parameter int unsigned AW       = 32,
  parameter int unsigned TAG_W    = 32,
  parameter int unsigned ND_W     = $clog2(MAX_DIMS + 1),
  parameter int unsigned SI_W     = $clog2(NPE + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // task
  input  logic                   task_valid,
  output logic                   task_ready,
  input  mode_e                  t_mode,
  input  logic                   t_signed,
  input  logic [AW-1:0]          t_addr,
  input  logic [AW-1:0]          t_stride,
  input  logic [ND_W-1:0]        t_nd,
  input  logic [NPE-1:0]         t_mask,
  input  logic [PREC_W-1:0]      t_prec [NPE],
  input  logic [TAG_W-1:0]       t_tag,
  // memory
  output logic                   mem_req,
  output logic [AW-1:0]          mem_addr,
  input  logic                   mem_gnt,
  input  logic                   mem_rvalid,
  input  logic [MAX_DIMS-1:0]    mem_rdata,
  // query of the streaming task
  output logic [TAG_W-1:0]       stream_tag,
  output logic                   streaming,
  input  logic [B-1:0]           query [NPE*MAX_DIMS],
  // to the DCM group
  input  logic                   grp_busy,
  output logic                   g_start,
  output logic [NPE-1:0]         g_mask,
  output logic [TAG_W-1:0]       g_tag,
  output mode_e                  g_mode,
  output logic                   g_signed,
  output logic [NPE-1:0]         lane_valid,
  output logic [NPE-1:0]         lane_q,
  output logic [NPE-1:0]         lane_c,
  output logic [NPE-1:0]         lane_first,
  output logic [NPE-1:0]         lane_last,
  output logic [PREC_W-1:0]      lane_prec [NPE]
);
  typedef enum logic [1:0] {H_EMPTY, H_FILL, H_FULL, H_STREAM} hstate_e;

  hstate_e             hs       [2];
  mode_e               h_mode   [2];
  logic                h_signed [2];
  logic [AW-1:0]       h_addr   [2];
  logic [AW-1:0]       h_stride [2];
  logic [ND_W-1:0]     h_nd     [2];
  logic [NPE-1:0]      h_mask   [2];
  logic [PREC_W-1:0]   h_prec   [2][NPE];
  logic [TAG_W-1:0]    h_tag    [2];
  logic [MAX_DIMS-1:0] bufm     [2][NPE][B];

  logic nf, ns;           // next half to fill / to stream
  logic f_act;            // fetch in progress into half nf
  logic [SI_W-1:0]   is_s, rs_s;   // issue / response lane
  logic [PREC_W-1:0] is_p, rs_p;   // issue / response plane

  // first lane >= s0 that has work in half h
  function automatic logic [SI_W-1:0] first_lane(input logic [SI_W-1:0] s0,
                                                 input logic [NPE-1:0] mask,
                                                 input logic [NPE*PREC_W-1:0] precs);
    logic [SI_W-1:0] r;
    r = SI_W'(NPE);
    for (int s = NPE - 1; s >= 0; s--)
      if (SI_W'(s) >= s0 && mask[s] && precs[s*PREC_W +: PREC_W] != '0) r = SI_W'(s);
    return r;
  endfunction

  logic [NPE*PREC_W-1:0] fprec, tprec;
  always_comb
    for (int s = 0; s < NPE; s++) begin
      fprec[s*PREC_W +: PREC_W] = h_prec[nf][s];
      tprec[s*PREC_W +: PREC_W] = t_prec[s];
    end

  // ---------------- fetch ----------------
  assign task_ready = !f_act && hs[nf] == H_EMPTY;
  assign mem_req    = f_act && is_s != SI_W'(NPE);
  assign mem_addr   = h_addr[nf] + (AW'(is_s) * AW'(B) + AW'(is_p)) * h_stride[nf];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf <= 1'b0; f_act <= 1'b0;
      is_s <= '0; is_p <= '0; rs_s <= '0; rs_p <= '0;
      for (int h = 0; h < 2; h++) begin
        h_mode[h] <= MODE_CL; h_signed[h] <= 1'b0; h_addr[h] <= '0; h_stride[h] <= '0;
        h_nd[h] <= '0; h_mask[h] <= '0; h_tag[h] <= '0;
        for (int s = 0; s < NPE; s++) h_prec[h][s] <= '0;
      end
    end else begin
      if (task_valid && task_ready) begin
        h_mode[nf] <= t_mode; h_signed[nf] <= t_signed; h_addr[nf] <= t_addr;
        h_stride[nf] <= t_stride; h_nd[nf] <= t_nd; h_mask[nf] <= t_mask; h_tag[nf] <= t_tag;
        h_prec[nf] <= t_prec;
        f_act <= 1'b1;
        is_s  <= first_lane('0, t_mask, tprec); is_p <= '0;
        rs_s  <= first_lane('0, t_mask, tprec); rs_p <= '0;
      end else if (f_act) begin
        if (mem_req && mem_gnt) begin
          if (is_p + 1'b1 < h_prec[nf][is_s[SI_W-1:0] % NPE]) is_p <= is_p + 1'b1;
          else begin is_p <= '0; is_s <= first_lane(is_s + 1'b1, h_mask[nf], fprec); end
        end
        if (mem_rvalid) begin
          bufm[nf][rs_s % NPE][rs_p[$clog2(B)-1:0]] <= mem_rdata;
          if (rs_p + 1'b1 < h_prec[nf][rs_s % NPE]) rs_p <= rs_p + 1'b1;
          else begin rs_p <= '0; rs_s <= first_lane(rs_s + 1'b1, h_mask[nf], fprec); end
        end
        if (rs_s == SI_W'(NPE)) begin
          f_act <= 1'b0;
          nf    <= ~nf;
        end
      end
    end
  end

  // ---------------- stream ----------------
  logic [ND_W-1:0]   lj [NPE];
  logic [PREC_W-1:0] lp [NPE];
  logic [NPE-1:0]    lact;

  always_comb begin
    for (int s = 0; s < NPE; s++) begin
      int qi;
      qi = s * MAX_DIMS + int'(lj[s] % MAX_DIMS);
      lact[s]       = streaming && h_mask[ns][s] && h_prec[ns][s] != '0 && lj[s] < h_nd[ns];
      lane_valid[s] = lact[s];
      lane_c[s]     = bufm[ns][s][lp[s][$clog2(B)-1:0]][lj[s] % MAX_DIMS];
      lane_q[s]     = query[qi][B - 1 - int'(lp[s] % B)];
      lane_first[s] = lj[s] == '0;
      lane_last[s]  = lj[s] == h_nd[ns] - 1'b1;
      lane_prec[s]  = h_prec[ns][s];
    end
    g_mask     = h_mask[ns];
    g_tag      = h_tag[ns];
    g_mode     = h_mode[ns];
    g_signed   = h_signed[ns];
    stream_tag = h_tag[ns];
  end

  logic go;
  assign go      = !streaming && hs[ns] == H_FULL && !grp_busy;
  assign g_start = go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ns <= 1'b0; streaming <= 1'b0;
      for (int s = 0; s < NPE; s++) begin lj[s] <= '0; lp[s] <= '0; end
    end else begin
      if (go) begin
        streaming <= 1'b1;
        for (int s = 0; s < NPE; s++) begin lj[s] <= '0; lp[s] <= '0; end
      end else if (streaming) begin
        for (int s = 0; s < NPE; s++)
          if (lact[s]) begin
            if (lp[s] + 1'b1 < h_prec[ns][s]) lp[s] <= lp[s] + 1'b1;
            else begin lp[s] <= '0; lj[s] <= lj[s] + 1'b1; end
          end
        if (lact == '0) begin
          streaming <= 1'b0;
          ns        <= ~ns;
        end
      end
    end
  end

  // half states
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs[0] <= H_EMPTY; hs[1] <= H_EMPTY;
    end else begin
      for (int h = 0; h < 2; h++) begin
        if (task_valid && task_ready && nf == 1'(h))           hs[h] <= H_FILL;
        else if (f_act && nf == 1'(h) && rs_s == SI_W'(NPE))   hs[h] <= H_FULL;
        else if (go && ns == 1'(h))                            hs[h] <= H_STREAM;
        else if (streaming && ns == 1'(h) && lact == '0)       hs[h] <= H_EMPTY;
      end
    end
  end
endmodule
