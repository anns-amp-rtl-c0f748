// tb_anns_amp_top: end-to-end test of the accelerator at reduced size
// (8 DCM groups of 4 lanes, 4 dims per slice, 2 query slots, 2 channels).
//
// A memory model serves the pseudo channels from bit-plane images of the
// centroid and codebook vectors it holds. The test runs one search through
// every stage and compares each against a software model:
//   PPM      predicts precisions 4 and 6 for two sub-spaces (bias-only model)
//   CL       40 centroid tasks at mixed precision, some on one slice only
//            (DRM bypass); the union of the top-k queues must hold the
//            global top-k and only correct (distance, id) pairs
//   reorder  the top-k of one queue goes through the task reorder unit
//   RC       residual of the query to one centroid, checked in the slot
//   LC       16 codebook entries x 4 subspaces written to the LUT
//   DC       12 encoded vectors summed through LUT, crossbar and DRM units
// Every mechanism (input stall, LSM offload, DRM bypass, threshold pruning,
// low precision, prefetch during streaming, each of CL/RC/LC/DC, reorder
// output) is counted and a failure is counted for any that never happened.
// The paper gives no cycle count for a whole query, so none is checked.
`timescale 1ns/1ps
module tb_anns_amp_top;
  import anns_pkg::*;
  localparam int NG = 8, NPE = 4, MD = 4, GD = 2, NCH = 2, M = 4, LE = 16, DEPTH = 8;
  localparam int NSV = 16, NSUB = 8, NCL = 64, NEN = 64, QBW = 8, CBW = 64;
  localparam int D = NPE * MD;
  localparam int K_W = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #2_000_000; $display("WATCHDOG"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- DUT ----------------
  logic qb_we = 0, qload = 0; logic [2:0] qb_addr = 0, qload_addr = 0; logic [D*B-1:0] qb_wdata = 0;
  logic qload_slot = 0;
  logic ppm_load_we = 0; logic [1:0] ppm_load_sel = 0; logic [7:0] ppm_load_addr = 0; logic [79:0] ppm_load_data = 0;
  logic [4:0] ppm_n_sv = 1; logic [5:0] ppm_gamma_sh = 0; logic signed [15:0] ppm_bias = 0;
  logic ppm_start = 0; logic [15:0] ppm_feat [5]; logic [1:0] ppm_slice = 0; logic [2:0] ppm_sub = 0;
  logic ppm_busy, ppm_done; logic [PREC_W-1:0] ppm_prec;
  logic task_valid = 0, task_ready; mode_e task_mode = MODE_CL; logic task_slot = 0;
  logic [31:0] task_addr = 0, task_stride = 1; logic [2:0] task_nd = 4; logic [NPE-1:0] task_mask = '1;
  logic [2:0] task_sub [NPE]; logic [15:0] task_id = 0;
  logic dc_phase = 0, cb_we = 0, dc_valid = 0, dc_slot = 0; logic [5:0] cb_addr = 0, dc_addr = 0;
  logic [M*4-1:0] cb_wdata = 0; logic [15:0] dc_id = 0;
  logic pq_clear = 0; logic [K_W-1:0] k_sel = DEPTH; logic [2:0] pq_rd_idx = 0;
  logic [31:0] pq_rd_keys [DEPTH]; logic [15:0] pq_rd_ids [DEPTH]; logic pq_rd_full;
  logic ro_push = 0, ro_drain = 0; logic [K_W-1:0] ro_entry = 0; logic [15:0] ro_query = 0;
  logic ro_valid, ro_last, ro_ready; logic [5:0] ro_cluster; logic [15:0] ro_qid;
  logic ch_req [NCH]; logic [31:0] ch_addr [NCH]; logic ch_ready [NCH]; logic ch_rvalid [NCH]; logic [MD-1:0] ch_rdata [NCH];
  logic idle; logic [31:0] cnt_offload, cnt_pruned, cnt_bypass, cnt_lc_write, cnt_rc, cnt_lowprec;

  anns_amp_top #(.NG(NG), .NPE(NPE), .MAX_DIMS(MD), .G_DRM(GD), .NCH(NCH), .M(M), .LUT_ENTRIES(LE),
    .DEPTH(DEPTH), .N_SV(NSV), .N_SUB(NSUB), .N_CLUSTERS(NCL), .N_ENTRIES(NEN), .QB_WORDS(QBW), .CB_WORDS(CBW)) dut (.*);

  // ---------------- memory model ----------------
  // vector v (centroid c: v = c, codebook entry k: v = 256 + k) sits at
  // base (v+1) * 4096; plane p of slice s at base + s*8 + p.
  logic [7:0] vmem [512][D];
  function automatic logic [MD-1:0] mword(logic [31:0] a);
    int v, s, p; logic [MD-1:0] w;
    v = int'(a >> 12) - 1; s = int'(a[11:0]) / 8; p = int'(a[11:0]) % 8; w = '0;
    if (v >= 0 && v < 512 && s < NPE)
      for (int j = 0; j < MD; j++) w[j] = vmem[v][s*MD + j][7 - p];
    return w;
  endfunction
  logic [31:0] pend [NCH][$];
  int reads = 0;
  always @(negedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      ch_rvalid[c] = 1'b0;
      if (pend[c].size() > 0 && $urandom_range(0, 3) != 0) begin
        ch_rvalid[c] = 1'b1; ch_rdata[c] = mword(pend[c].pop_front());
      end
      ch_ready[c] = ($urandom_range(0, 4) != 0);
    end
    #1;
    for (int c = 0; c < NCH; c++)
      if (rst_n && ch_req[c] && ch_ready[c]) begin pend[c].push_back(ch_addr[c]); reads++; end
  end

  // ---------------- mechanism monitors ----------------
  int n_stall = 0, n_prefetch = 0, n_mode [4], n_dcres = 0, n_ro = 0;
  initial for (int i = 0; i < 4; i++) n_mode[i] = 0;
  always @(posedge clk) if (rst_n) begin
    if (task_valid && !task_ready) n_stall++;
    for (int g = 0; g < NG; g++) begin
      if (dut.g_streaming[g] && dut.m_req[g]) n_prefetch++;
      if (dut.g_start_v[g]) n_mode[int'(dut.g_smode[g])]++;
    end
    for (int q = 0; q < GD; q++) if (dut.lut_ov[q]) n_mode[int'(MODE_DC)]++;
  end

  // ---------------- reference ----------------
  function automatic longint pd(logic [7:0] q, logic [7:0] c, int P, bit sg);
    int sh, a, b;
    sh = B - P;
    a = sg ? (int'($signed(q)) >>> sh) : (int'(q) >> sh);
    b = sg ? (int'($signed(c)) >>> sh) : (int'(c) >> sh);
    return longint'((a - b) * (a - b)) << (2 * sh);
  endfunction
  int prec_tab [NPE][NSUB];
  logic [7:0] qv [D];

  task automatic tick(int n = 1); repeat (n) @(negedge clk); endtask
  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask
  task automatic wait_idle();
    int t, n; t = 0; tick(3);
    n = 0;
    while (n < 30 && t < 20000) begin tick(); t++; n = idle ? n + 1 : 0; end
  endtask
  task automatic send_task(mode_e md, int v, int sub_sel, logic [NPE-1:0] mask, int id);
    task_mode = md; task_slot = 0; task_addr = (v + 1) * 4096; task_stride = 1; task_nd = MD;
    task_mask = mask; task_id = 16'(id);
    for (int s = 0; s < NPE; s++) task_sub[s] = 3'((sub_sel >> s) & 1);
    task_valid = 1; #1;
    while (!task_ready) begin @(negedge clk); #1; end
    @(negedge clk); task_valid = 0;
  endtask

  longint exp_cl [$];
  int     exp_id [$];
  longint lut [M][LE];
  logic [7:0] resid [D];

  initial begin
    for (int i = 0; i < 5; i++) ppm_feat[i] = 16'(i * 100);
    for (int s = 0; s < NPE; s++) task_sub[s] = 0;
    for (int s = 0; s < NPE; s++) for (int k = 0; k < NSUB; k++) prec_tab[s][k] = B;
    for (int v = 0; v < 512; v++) for (int i = 0; i < D; i++) vmem[v][i] = 8'($urandom);
    for (int i = 0; i < D; i++) qv[i] = 8'($urandom);
    tick(5); rst_n = 1; tick(3);

    // query -> buffer word 3 -> slot 0
    for (int i = 0; i < D; i++) qb_wdata[i*B +: B] = qv[i];
    qb_we = 1; qb_addr = 3; tick(); qb_we = 0;
    qload = 1; qload_addr = 3; qload_slot = 0; tick(); qload = 0; tick(2);
    for (int i = 0; i < D; i++) chk(dut.qreg[0][i] == qv[i], "query slot load");

    // PPM: one support vector with alpha 0, prediction = bias
    ppm_load_we = 1; ppm_load_sel = 1; ppm_load_addr = 0; ppm_load_data = 0; tick(); ppm_load_we = 0;
    for (int s = 0; s < NPE; s++) begin
      ppm_bias = (s % 2 == 0) ? 16'sd768 : 16'sd1280;   // 3 -> 4 bits, 5 -> 6 bits
      ppm_slice = 2'(s); ppm_sub = 1; ppm_start = 1; tick(); ppm_start = 0;
      while (!ppm_done) tick();
      prec_tab[s][1] = (s % 2 == 0) ? 4 : 6;
      chk(ppm_prec == PREC_W'(prec_tab[s][1]), $sformatf("ppm prec %0d", ppm_prec));
      tick(2);
    end

    // ---------------- CL ----------------
    k_sel = 3; pq_clear = 1; tick(); pq_clear = 0;
    for (int c = 0; c < 40; c++) begin
      int sub_sel; logic [NPE-1:0] mask; longint e;
      sub_sel = (c % 3 == 0) ? 4'b0101 : (c % 3 == 1) ? 4'b1111 : 0;
      mask = (c % 7 == 5) ? 4'b0001 : 4'b1111;
      e = 0;
      for (int s = 0; s < NPE; s++) if (mask[s])
        for (int j = 0; j < MD; j++)
          e += pd(qv[s*MD+j], vmem[c][s*MD+j], prec_tab[s][(sub_sel >> s) & 1], 0);
      exp_cl.push_back(e); exp_id.push_back(c);
      send_task(MODE_CL, c, sub_sel, mask, c);
    end
    wait_idle();
    begin
      longint got [$]; int gid [$]; longint srt [$];
      for (int g = 0; g < NG; g++) begin
        pq_rd_idx = 3'(g); #1;
        for (int i = 0; i < 3; i++) if (pq_rd_keys[i] != '1) begin
          int f; f = -1;
          foreach (exp_id[x]) if (exp_id[x] == int'(pq_rd_ids[i])) f = x;
          chk(f >= 0 && exp_cl[f] == longint'(pq_rd_keys[i]),
              $sformatf("CL pq %0d id %0d key %0d", g, pq_rd_ids[i], pq_rd_keys[i]));
          if (i > 0) chk(pq_rd_keys[i] >= pq_rd_keys[i-1], "pq order");
          got.push_back(longint'(pq_rd_keys[i]));
        end
      end
      srt = exp_cl; srt.sort(); got.sort();
      for (int i = 0; i < 3; i++) chk(got[i] == srt[i], $sformatf("global top %0d", i));
    end

    // ---------------- task reorder: queue 0's entries for query 7 ----------------
    pq_rd_idx = 0; #1;
    begin
      int nent; nent = 0;
      for (int i = 0; i < 3; i++) if (pq_rd_keys[i] != '1) begin
        #1; while (!ro_ready) begin tick(); #1; end
        ro_entry = K_W'(i); ro_query = 7; ro_push = 1; tick(); ro_push = 0; nent++;
      end
      for (int t = 0; t < 50; t++) begin
        ro_drain = (t == 0);
        #1; if (ro_valid) begin n_ro++; chk(ro_qid == 7, "reorder qid"); end
        tick();
      end
      ro_drain = 0;
      chk(n_ro == nent, $sformatf("reorder count %0d/%0d", n_ro, nent));
    end

    // ---------------- RC: residual to centroid 5 ----------------
    send_task(MODE_RC, 5, 0, 4'b1111, 5);
    wait_idle();
    for (int i = 0; i < D; i++) begin
      int r; r = int'(qv[i]) - int'(vmem[5][i]);
      r = (r > 127) ? 127 : (r < -128) ? -128 : r;
      resid[i] = 8'(r);
      chk(dut.rreg[0][i] == resid[i], $sformatf("residual %0d: %0d vs %0d", i, dut.rreg[0][i], resid[i]));
    end

    // ---------------- LC: codebook entry k = vector 256 + k ----------------
    for (int k = 0; k < LE; k++) begin
      int sub_sel; sub_sel = (k % 2) ? 4'b0011 : 0;
      for (int s = 0; s < M; s++) begin
        lut[s][k] = 0;
        for (int j = 0; j < MD; j++)
          lut[s][k] += pd(resid[s*MD+j], vmem[256+k][s*MD+j], prec_tab[s][(sub_sel >> s) & 1], 1);
      end
      send_task(MODE_LC, 256 + k, sub_sel, 4'b1111, k);
    end
    wait_idle();

    // ---------------- DC ----------------
    k_sel = DEPTH; pq_clear = 1; tick(); pq_clear = 0;
    dc_phase = 1;
    begin
      logic [3:0] codes [12][M]; longint e [12]; longint got [$];
      for (int n = 0; n < 12; n++) begin
        e[n] = 0;
        for (int j = 0; j < M; j++) begin
          codes[n][j] = 4'($urandom); cb_wdata[j*4 +: 4] = codes[n][j]; e[n] += lut[j][codes[n][j]];
        end
        cb_we = 1; cb_addr = 6'(n); tick(); cb_we = 0;
      end
      for (int n = 0; n < 12; n++) begin
        dc_valid = 1; dc_slot = 0; dc_addr = 6'(n); dc_id = 16'(100 + n); tick();
      end
      dc_valid = 0; tick(20);
      for (int g = 0; g < NG; g++) begin
        pq_rd_idx = 3'(g); #1;
        for (int i = 0; i < DEPTH; i++) if (pq_rd_keys[i] != '1) begin
          int n; n = int'(pq_rd_ids[i]) - 100; n_dcres++;
          chk(g < NG / GD, "DC result in slot 0 units");
          chk(n >= 0 && n < 12 && e[n] == longint'(pq_rd_keys[i]),
              $sformatf("DC id %0d key %0d", pq_rd_ids[i], pq_rd_keys[i]));
        end
      end
      chk(n_dcres == 12, $sformatf("DC results %0d", n_dcres));
    end
    dc_phase = 0;

    // ---------------- mechanisms ----------------
    $display("stall=%0d offload=%0d bypass=%0d pruned=%0d lowprec=%0d prefetch=%0d CL=%0d RC=%0d LC=%0d DC=%0d lut_writes=%0d rc=%0d reorder=%0d reads=%0d cycles=%0d",
      n_stall, cnt_offload, cnt_bypass, cnt_pruned, cnt_lowprec, n_prefetch, n_mode[0], n_mode[1], n_mode[2], n_mode[3],
      cnt_lc_write, cnt_rc, n_ro, reads, cyc);
    chk(n_stall > 0, "no input stall");
    chk(cnt_offload > 0, "no offload");
    chk(cnt_bypass > 0, "no bypass");
    chk(cnt_pruned > 0, "no pruning");
    chk(cnt_lowprec > 0, "no low precision task");
    chk(n_prefetch > 0, "no prefetch during stream");
    chk(n_mode[0] == 40 && n_mode[1] == 1 && n_mode[2] == LE && n_mode[3] == 12, "mode counts");
    chk(cnt_lc_write == LE * M, "LUT write count");
    chk(cnt_rc == D, "residual count");
    chk(n_ro > 0, "no reorder output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
