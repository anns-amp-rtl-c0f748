// anns_amp_top: the ANNS-AMP accelerator.
//
// Cluster-based PQ search spends most of its time on distances to vectors
// that are not neighbours. This accelerator computes those distances with
// bit-serial arithmetic at a precision chosen per sub-space, so distant
// sub-spaces cost fewer cycles and fewer memory bits. The blocks and their
// links:
//
//   host -> task (CL/RC/LC) -> precision table (written by PPM) -> LSM
//        -> per-group DFM (ping-pong, bit-plane fetch via mem_ctrl per
//           pseudo channel) -> DCM group (NPE bit-serial lanes)
//   CL: group result -> DRM unit of that group -> TSM queue of that group
//   LC: group result -> distance LUT of the query's DRM group (DRM bypassed)
//   RC: lane residuals -> residual register of the query slot
//   DC: cluster buffer codes -> distance LUT -> crossbar -> DRM unit -> TSM
//   TSM contents -> task reorder (cluster -> list of queries)
//
// Interfaces (all host-driven, one command per cycle):
//   qb_*      write the query buffer (one query per word, D = NPE*MAX_DIMS
//             dims); qload copies a word into query slot qload_slot.
//   ppm_*     load the SVR model and predict the precision of sub-space
//             ppm_sub of slice ppm_slice; the result enters the precision
//             table ptab[slice][sub] (reset value B = full precision).
//   task_*    one vector pair (a centroid in CL/RC, a codebook entry in LC)
//             for query slot task_slot; task_sub[s] names the sub-space of
//             slice s, whose precision is looked up in the table.
//   dc_*      one encoded vector (address in the cluster buffer) for slot
//             dc_slot; meaningful while dc_phase is high, when the DRM units
//             take LUT values instead of DCM results.
//   cb_*      write the cluster buffer (M 8-bit codes per word).
//   pq_*      clear/read the top-k queues; k_sel is the active k (nprobe).
//   ro_*      push the read queue's entry ro_entry with query id ro_query
//             into the task reorder unit (when ro_ready), and drain it.
//   ch_*      NCH memory pseudo-channel read ports (to the stacked memory).
// Query slot q (0..G_DRM-1) is served by DRM group q: DRM units, TSM queues
// and DCM groups q*NG/G_DRM .. (q+1)*NG/G_DRM-1 and LUT q.
//
// Choices of this design where the paper is silent: command interfaces, the
// precision table, one RC task at a time, a DRM unit and a TSM queue per DCM
// group, the load estimate leaving the LSM when a task starts streaming, and
// results of LC written to the LUT through a single port, lowest group first.
module anns_amp_top
  import anns_pkg::*;
#(
  parameter int unsigned NG          = 1024,  // DCM groups = DRM units = TSM queues
  parameter int unsigned NPE         = 32,    // lanes per group = DRM inputs
  parameter int unsigned MAX_DIMS    = 32,    // dimensions per slice (32 x 32 >= 960)
  parameter int unsigned G_DRM       = 4,     // DRM groups = query slots = LUTs
  parameter int unsigned NCH         = 32,    // memory pseudo channels
  parameter int unsigned M           = 16,    // PQ subspaces
  parameter int unsigned LUT_ENTRIES = 256,   // codebook entries per subspace
  parameter int unsigned DEPTH       = 128,   // TSM queue depth
  parameter int unsigned N_SV        = 1280,  // SVR support vectors
  parameter int unsigned N_SUB       = 512,   // sub-spaces per slice
  parameter int unsigned N_CLUSTERS  = 65536, // nlist
  parameter int unsigned N_ENTRIES   = 4096,  // task reorder capacity
  parameter int unsigned QB_WORDS    = 256,   // query buffer: 256 KB / 1 KB per query
  parameter int unsigned CB_WORDS    = 65536, // cluster buffer: 1 MB / 16 B
  parameter int unsigned AW          = 32,
  // derived
  parameter int unsigned D           = NPE * MAX_DIMS,
  parameter int unsigned SLOT_W      = (G_DRM <= 2) ? 1 : $clog2(G_DRM),
  parameter int unsigned GI_W        = (NG <= 2) ? 1 : $clog2(NG),
  parameter int unsigned SUB_W       = $clog2(N_SUB),
  parameter int unsigned SLICE_W     = (NPE <= 2) ? 1 : $clog2(NPE),
  parameter int unsigned ND_W        = $clog2(MAX_DIMS + 1),
  parameter int unsigned DIM_W       = (MAX_DIMS <= 2) ? 1 : $clog2(MAX_DIMS),
  parameter int unsigned K_W         = $clog2(DEPTH + 1),
  parameter int unsigned CODE_W      = $clog2(LUT_ENTRIES),
  parameter int unsigned CID_W       = $clog2(N_CLUSTERS),
  parameter int unsigned QBA_W       = $clog2(QB_WORDS),
  parameter int unsigned CBA_W       = $clog2(CB_WORDS),
  parameter int unsigned SVA_W       = $clog2(N_SV),
  parameter int unsigned LDA_W       = (SVA_W > 8) ? SVA_W : 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // query buffer and query slots
  input  logic                  qb_we,
  input  logic [QBA_W-1:0]      qb_addr,
  input  logic [D*B-1:0]        qb_wdata,
  input  logic                  qload,
  input  logic [QBA_W-1:0]      qload_addr,
  input  logic [SLOT_W-1:0]     qload_slot,
  // precision prediction
  input  logic                  ppm_load_we,
  input  logic [1:0]            ppm_load_sel,
  input  logic [LDA_W-1:0]      ppm_load_addr,
  input  logic [79:0]           ppm_load_data,
  input  logic [SVA_W:0]        ppm_n_sv,
  input  logic [5:0]            ppm_gamma_sh,
  input  logic signed [15:0]    ppm_bias,
  input  logic                  ppm_start,
  input  logic [15:0]           ppm_feat [5],
  input  logic [SLICE_W-1:0]    ppm_slice,
  input  logic [SUB_W-1:0]      ppm_sub,
  output logic                  ppm_busy,
  output logic                  ppm_done,
  output logic [PREC_W-1:0]     ppm_prec,
  // distance tasks (CL, RC, LC)
  input  logic                  task_valid,
  output logic                  task_ready,
  input  mode_e                 task_mode,
  input  logic [SLOT_W-1:0]     task_slot,
  input  logic [AW-1:0]         task_addr,
  input  logic [AW-1:0]         task_stride,
  input  logic [ND_W-1:0]       task_nd,
  input  logic [NPE-1:0]        task_mask,
  input  logic [SUB_W-1:0]      task_sub [NPE],
  input  logic [15:0]           task_id,
  // distance calculation (DC)
  input  logic                  dc_phase,
  input  logic                  cb_we,
  input  logic [CBA_W-1:0]      cb_addr,
  input  logic [M*CODE_W-1:0]   cb_wdata,
  input  logic                  dc_valid,
  input  logic [SLOT_W-1:0]     dc_slot,
  input  logic [CBA_W-1:0]      dc_addr,
  input  logic [15:0]           dc_id,
  // top-k queues
  input  logic                  pq_clear,
  input  logic [K_W-1:0]        k_sel,
  input  logic [GI_W-1:0]       pq_rd_idx,
  output logic [31:0]           pq_rd_keys [DEPTH],
  output logic [15:0]           pq_rd_ids  [DEPTH],
  output logic                  pq_rd_full,
  // task reorder
  input  logic                  ro_push,
  input  logic [K_W-1:0]        ro_entry,
  input  logic [15:0]           ro_query,
  input  logic                  ro_drain,
  output logic                  ro_ready,
  output logic                  ro_valid,
  output logic [CID_W-1:0]      ro_cluster,
  output logic [15:0]           ro_qid,
  output logic                  ro_last,
  // memory pseudo channels
  output logic                  ch_req    [NCH],
  output logic [AW-1:0]         ch_addr   [NCH],
  input  logic                  ch_ready  [NCH],
  input  logic                  ch_rvalid [NCH],
  input  logic [MAX_DIMS-1:0]   ch_rdata  [NCH],
  // status and event counters
  output logic                  idle,
  output logic [31:0]           cnt_offload,   // LSM neighbour offloads
  output logic [31:0]           cnt_pruned,    // results dropped by the TSM threshold
  output logic [31:0]           cnt_bypass,    // DRM bypass uses (undivided space)
  output logic [31:0]           cnt_lc_write,  // LUT entries written
  output logic [31:0]           cnt_rc,        // residual values written
  output logic [31:0]           cnt_lowprec    // tasks with a lane below full precision
);
  localparam int unsigned GPD    = NG / G_DRM;     // DCM groups per DRM group
  localparam int unsigned GPC    = NG / NCH;       // DCM groups per channel
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned SUM_W  = ACC_W + $clog2(NPE);
  localparam int unsigned COST_W = 24;

  typedef struct packed {
    logic [COST_W-1:0] cost;
    mode_e             mode;
    logic [SLOT_W-1:0] slot;
    logic [15:0]       id;
  } tag_t;
  localparam int unsigned TAG_W = $bits(tag_t);

  typedef struct packed {
    tag_t                    tag;
    logic [AW-1:0]           addr;
    logic [AW-1:0]           stride;
    logic [ND_W-1:0]         nd;
    logic [NPE-1:0]          mask;
    logic [NPE*PREC_W-1:0]   prec;
  } pay_t;
  localparam int unsigned PAY_W = $bits(pay_t);

  // ---------------- query buffer and slots ----------------
  logic [D*B-1:0] qb_rdata;
  logic           qload_d;
  logic [SLOT_W-1:0] qload_slot_d;
  logic [B-1:0]   qreg [G_DRM][D];    // query of each slot
  logic [B-1:0]   rreg [G_DRM][D];    // residual of each slot (int8)

  sram_sp #(.WORDS(QB_WORDS), .W(D*B)) u_qbuf (
    .clk, .en(qb_we || qload), .we(qb_we), .addr(qb_we ? qb_addr : qload_addr),
    .wdata(qb_wdata), .rdata(qb_rdata));

  // ---------------- precision prediction and table ----------------
  logic [PREC_W-1:0] ptab [NPE][N_SUB];
  logic [SLICE_W-1:0] ppm_slice_q;
  logic [SUB_W-1:0]   ppm_sub_q;
  logic signed [31:0] ppm_y;

  ppm #(.N_SV(N_SV), .LD_AW(LDA_W)) u_ppm (
    .clk, .rst_n,
    .load_we(ppm_load_we), .load_sel(ppm_load_sel), .load_addr(ppm_load_addr), .load_data(ppm_load_data),
    .n_sv(ppm_n_sv), .gamma_sh(ppm_gamma_sh), .bias(ppm_bias),
    .start(ppm_start), .feat(ppm_feat), .busy(ppm_busy), .done(ppm_done), .prec(ppm_prec), .y(ppm_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ppm_slice_q <= '0; ppm_sub_q <= '0;
      for (int s = 0; s < NPE; s++)
        for (int k = 0; k < N_SUB; k++) ptab[s][k] <= PREC_W'(B);
    end else begin
      if (ppm_start && !ppm_busy) begin ppm_slice_q <= ppm_slice; ppm_sub_q <= ppm_sub; end
      if (ppm_done) ptab[ppm_slice_q][ppm_sub_q] <= ppm_prec;
    end
  end

  // ---------------- task -> LSM ----------------
  pay_t              in_pay;
  logic [PREC_W-1:0] pmax;
  logic              lowp;
  always_comb begin
    pmax = '0; lowp = 1'b0;
    in_pay.prec = '0;
    for (int s = 0; s < NPE; s++) begin
      logic [PREC_W-1:0] p;
      p = ptab[s][task_sub[s]];
      if (task_mode == MODE_RC) p = PREC_W'(B);     // residuals are exact
      in_pay.prec[s*PREC_W +: PREC_W] = p;
      if (task_mask[s] && p > pmax) pmax = p;
      if (task_mask[s] && p < PREC_W'(B)) lowp = 1'b1;
    end
    in_pay.addr     = task_addr;
    in_pay.stride   = task_stride;
    in_pay.nd       = task_nd;
    in_pay.mask     = task_mask;
    in_pay.tag.mode = task_mode;
    in_pay.tag.slot = task_slot;
    in_pay.tag.id   = task_id;
    in_pay.tag.cost = COST_W'(task_nd) * COST_W'(pmax);
  end

  logic [NG-1:0]     l_valid, l_ready, l_stolen, l_done;
  logic [PAY_W-1:0]  l_pay  [NG];
  logic [COST_W-1:0] l_cost [NG];
  logic [COST_W-1:0] l_dcost[NG];
  logic [GI_W-1:0]   l_group;

  lsm #(.NG(NG), .QD(2), .PAY_W(PAY_W), .COST_W(COST_W)) u_lsm (
    .clk, .rst_n,
    .in_valid(task_valid), .in_ready(task_ready),
    .in_nvec(16'd1), .in_nd(6'(task_nd)), .in_prec_max(pmax), .in_payload(PAY_W'(in_pay)),
    .in_group(l_group),
    .grp_valid(l_valid), .grp_ready(l_ready), .grp_payload(l_pay), .grp_cost(l_cost), .grp_stolen(l_stolen),
    .done_valid(l_done), .done_cost(l_dcost), .offloads(cnt_offload));

  // ---------------- memory controllers ----------------
  logic              m_req   [NG];
  logic [AW-1:0]     m_addr  [NG];
  logic              m_gnt   [NG];
  logic              m_rvalid[NG];
  logic [MAX_DIMS-1:0] m_rdata [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [GPC-1:0]  req, gnt, rvalid;
    logic [AW-1:0]   addr [GPC];
    for (genvar i = 0; i < GPC; i++) begin : g_map
      assign req[i]  = m_req[i*NCH + c];
      assign addr[i] = m_addr[i*NCH + c];
      assign m_gnt[i*NCH + c]    = gnt[i];
      assign m_rvalid[i*NCH + c] = rvalid[i];
    end
    mem_ctrl #(.N_REQ(GPC), .AW(AW), .DW(MAX_DIMS)) u_mc (
      .clk, .rst_n, .req, .addr, .gnt, .rvalid, .rdata(m_rdata[c]),
      .ch_req(ch_req[c]), .ch_addr(ch_addr[c]), .ch_ready(ch_ready[c]),
      .ch_rvalid(ch_rvalid[c]), .ch_rdata(ch_rdata[c]));
  end

  // ---------------- DFM + DCM group + DRM + TSM per group ----------------
  logic [NG-1:0]      g_outv, g_outr, g_busy, g_start_v, g_streaming;
  logic [ACC_W-1:0]   g_dist [NG][NPE];
  logic [NPE-1:0]     g_omask [NG];
  logic [TAG_W-1:0]   g_otag  [NG];
  logic [NPE-1:0]     g_resv  [NG];
  logic signed [B:0]  g_res   [NG][NPE];
  logic [DIM_W-1:0]   g_rdim  [NG][NPE];
  logic [TAG_W-1:0]   g_stag  [NG];
  mode_e              g_smode [NG];
  mode_e              g_omode [NG];
  logic [SLOT_W-1:0]  g_gslot [NG];   // query slot of the task starting in each group   // mode of each group's pending result

  // DC path per DRM group
  logic [M*CODE_W-1:0] cb_rdata;
  logic                dc_v1;
  logic [SLOT_W-1:0]   dc_slot1;
  logic [15:0]         dc_id1;
  logic                lut_ov   [G_DRM];
  logic [31:0]         lut_od   [G_DRM][M];
  logic [TAG_W-1:0]    lut_otag [G_DRM];
  logic                xb_ov    [G_DRM];
  logic [31:0]         xb_od    [G_DRM][NPE];
  logic [GI_W-1:0]     dc_unit  [G_DRM];   // next DRM unit of each group
  logic [GI_W-1:0]     xb_unit  [G_DRM];
  logic [TAG_W-1:0]    xb_tag   [G_DRM];   // tag aligned with the crossbar output

  logic [NG-1:0]       drm_ov;
  logic [SUM_W-1:0]    drm_sum [NG];
  logic [TAG_W-1:0]    drm_tag [NG];
  logic [31:0]         pq_keys [NG][DEPTH];
  logic [15:0]         pq_ids  [NG][DEPTH];
  logic [31:0]         pq_thr  [NG];
  logic [NG-1:0]       pq_full, pq_ins;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    pay_t lp;
    assign lp = pay_t'(l_pay[g]);
    logic [PREC_W-1:0] tprec [NPE];
    for (genvar s = 0; s < NPE; s++) begin : g_p
      assign tprec[s] = lp.prec[s*PREC_W +: PREC_W];
    end
    logic [B-1:0] qv [D];
    tag_t st;
    assign st = tag_t'(g_stag[g]);
    assign qv = (st.mode == MODE_LC) ? rreg[st.slot] : qreg[st.slot];

    logic        gs, gsg;
    logic [NPE-1:0] gmask, lv, lq, lc, lf, ll;
    logic [TAG_W-1:0] gtag;
    mode_e       gmode;
    logic [PREC_W-1:0] lpr [NPE];

    dfm #(.NPE(NPE), .MAX_DIMS(MAX_DIMS), .AW(AW), .TAG_W(TAG_W)) u_dfm (
      .clk, .rst_n,
      .task_valid(l_valid[g]), .task_ready(l_ready[g]),
      .t_mode(lp.tag.mode), .t_signed(lp.tag.mode == MODE_LC), .t_addr(lp.addr), .t_stride(lp.stride),
      .t_nd(lp.nd), .t_mask(lp.mask), .t_prec(tprec), .t_tag(TAG_W'(lp.tag)),
      .mem_req(m_req[g]), .mem_addr(m_addr[g]), .mem_gnt(m_gnt[g]), .mem_rvalid(m_rvalid[g]),
      .mem_rdata(m_rdata[g % NCH]),
      .stream_tag(g_stag[g]), .streaming(g_streaming[g]), .query(qv),
      .grp_busy(g_busy[g]), .g_start(gs), .g_mask(gmask), .g_tag(gtag), .g_mode(gmode), .g_signed(gsg),
      .lane_valid(lv), .lane_q(lq), .lane_c(lc), .lane_first(lf), .lane_last(ll), .lane_prec(lpr));
    assign g_start_v[g] = gs;
    assign g_smode[g]   = gmode;
    tag_t gt;
    assign gt = tag_t'(gtag);
    assign g_gslot[g]   = gt.slot;
    // the estimated load leaves the LSM when the task starts computing
    assign l_done[g]    = gs;
    assign l_dcost[g]   = st.cost;

    dcm_group #(.NPE(NPE), .ACC_W(ACC_W), .TAG_W(TAG_W), .DIM_W(DIM_W)) u_grp (
      .clk, .rst_n, .task_start(gs), .task_mask(gmask), .task_tag(gtag), .mode(gmode), .signed_mode(gsg),
      .lane_valid(lv), .lane_q(lq), .lane_c(lc), .lane_first(lf), .lane_last(ll), .lane_prec(lpr),
      .out_valid(g_outv[g]), .out_ready(g_outr[g]), .out_dist(g_dist[g]), .out_mask(g_omask[g]),
      .out_tag(g_otag[g]), .res_valid(g_resv[g]), .res(g_res[g]), .res_dim(g_rdim[g]), .busy(g_busy[g]));

    // DRM input: own group's slices (CL) or the LUT values routed by the
    // crossbar of this DRM group (DC)
    tag_t ot;
    assign ot = tag_t'(g_otag[g]);
    assign g_omode[g] = ot.mode;
    logic cl_in, dc_in;
    assign cl_in = !dc_phase && g_outv[g] && ot.mode == MODE_CL;
    assign dc_in = dc_phase && xb_ov[g / GPD] && xb_unit[g / GPD] == GI_W'(g);
    logic [31:0]    din  [NPE];
    logic [NPE-1:0] dmask;
    always_comb begin
      for (int s = 0; s < NPE; s++) din[s] = dc_in ? xb_od[g / GPD][s] : g_dist[g][s];
      dmask = dc_in ? NPE'((64'd1 << M) - 1) : g_omask[g];
    end

    drm_unit #(.N_IN(NPE), .IN_W(32), .TAG_W(TAG_W)) u_drm (
      .clk, .rst_n, .in_valid(cl_in || dc_in), .in_data(din), .in_mask(dmask),
      .in_tag(dc_in ? xb_tag[g / GPD] : g_otag[g]),
      .bypass(cl_in && g_omask[g] == NPE'(1)),
      .out_valid(drm_ov[g]), .out_sum(drm_sum[g]), .out_tag(drm_tag[g]));

    // results at or above the k-th best are pruned before insertion
    tag_t dt;
    assign dt = tag_t'(drm_tag[g]);
    logic [31:0] key;
    assign key = (drm_sum[g] > SUM_W'(32'hFFFF_FFFE)) ? 32'hFFFF_FFFE : 32'(drm_sum[g]);
    assign pq_ins[g] = drm_ov[g] && key < pq_thr[g];

    tsm_pq #(.DEPTH(DEPTH), .KEY_W(32), .ID_W(16)) u_pq (
      .clk, .rst_n, .clear(pq_clear), .in_valid(pq_ins[g]), .in_key(key), .in_id(dt.id),
      .k_sel(k_sel), .keys(pq_keys[g]), .ids(pq_ids[g]), .thr(pq_thr[g]), .full(pq_full[g]));
  end

  // ---------------- LC results -> LUT, one entry per cycle ----------------
  logic              lcw_act;
  logic [GI_W-1:0]   lcw_g;
  logic [SLICE_W:0]  lcw_s;
  logic [GI_W-1:0]   lc_pick;
  logic              lc_found;
  always_comb begin
    lc_found = 1'b0; lc_pick = '0;
    for (int g = 0; g < NG; g++)
      if (!lc_found && g_outv[g] && g_omode[g] == MODE_LC) begin
        lc_found = 1'b1; lc_pick = GI_W'(g);
      end
  end
  tag_t lcw_tag;
  assign lcw_tag = tag_t'(g_otag[lcw_g]);
  logic lut_we;
  assign lut_we = lcw_act && lcw_s < (SLICE_W+1)'(M) && g_omask[lcw_g][lcw_s[SLICE_W-1:0]];

  always_comb
    for (int g = 0; g < NG; g++)
      g_outr[g] = (g_omode[g] == MODE_CL) ? !dc_phase
                : (lcw_act && lcw_g == GI_W'(g) && lcw_s == (SLICE_W+1)'(NPE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lcw_act <= 1'b0; lcw_g <= '0; lcw_s <= '0;
    end else if (!lcw_act) begin
      if (lc_found) begin lcw_act <= 1'b1; lcw_g <= lc_pick; lcw_s <= '0; end
    end else begin
      lcw_s <= lcw_s + 1'b1;
      if (lcw_s == (SLICE_W+1)'(NPE - 1)) lcw_act <= 1'b0;
    end
  end

  // ---------------- DC: cluster buffer -> LUT -> crossbar ----------------
  sram_sp #(.WORDS(CB_WORDS), .W(M*CODE_W)) u_cbuf (
    .clk, .en(cb_we || dc_valid), .we(cb_we), .addr(cb_we ? cb_addr : dc_addr),
    .wdata(cb_wdata), .rdata(cb_rdata));

  for (genvar q = 0; q < G_DRM; q++) begin : g_q
    logic [CODE_W-1:0] codes [M];
    for (genvar j = 0; j < M; j++) begin : g_c
      assign codes[j] = cb_rdata[j*CODE_W +: CODE_W];
    end
    tag_t rt;
    always_comb begin
      rt = '0; rt.mode = MODE_DC; rt.slot = SLOT_W'(q); rt.id = dc_id1;
    end
    dist_lut #(.M(M), .ENTRIES(LUT_ENTRIES), .LUT_W(32), .TAG_W(TAG_W)) u_lut (
      .clk, .rst_n,
      .we(lut_we && lcw_tag.slot == SLOT_W'(q)),
      .wsub(($clog2(M))'(lcw_s)), .wentry(CODE_W'(lcw_tag.id)),
      .wdata(g_dist[lcw_g][lcw_s[SLICE_W-1:0]]),
      .rd_valid(dc_v1 && dc_slot1 == SLOT_W'(q)), .codes(codes), .rd_tag(TAG_W'(rt)),
      .out_valid(lut_ov[q]), .out_data(lut_od[q]), .out_tag(lut_otag[q]));

    logic [$clog2(M+1)-1:0] sel [NPE];
    logic [31:0] xin [M];
    always_comb
      for (int o = 0; o < NPE; o++) sel[o] = (o < M) ? ($clog2(M+1))'(o) : ($clog2(M+1))'(M);
    assign xin = lut_od[q];
    crossbar #(.N_IN(M), .N_OUT(NPE), .W(32), .SW($clog2(M+1))) u_xb (
      .clk, .rst_n, .in_valid(lut_ov[q]), .in_data(xin), .sel(sel),
      .out_valid(xb_ov[q]), .out_data(xb_od[q]));

    // round robin over the DRM units of this group; the crossbar output goes
    // to the unit chosen when its LUT read was issued
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dc_unit[q] <= GI_W'(q * GPD); xb_unit[q] <= '0; xb_tag[q] <= '0;
      end else begin
        if (lut_ov[q]) begin
          xb_unit[q] <= dc_unit[q];
          xb_tag[q]  <= lut_otag[q];
          dc_unit[q] <= (dc_unit[q] == GI_W'(q * GPD + GPD - 1)) ? GI_W'(q * GPD) : dc_unit[q] + 1'b1;
        end
      end
    end
  end

  // ---------------- RC residuals, query slot loading ----------------
  logic [GI_W-1:0]   rc_g;
  logic [SLOT_W-1:0] rc_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc_g <= '0; rc_slot <= '0; qload_d <= 1'b0; qload_slot_d <= '0; dc_v1 <= 1'b0; dc_slot1 <= '0; dc_id1 <= '0;
      cnt_rc <= '0; cnt_lc_write <= '0; cnt_pruned <= '0; cnt_bypass <= '0; cnt_lowprec <= '0;
      for (int q = 0; q < G_DRM; q++)
        for (int i = 0; i < D; i++) begin qreg[q][i] <= '0; rreg[q][i] <= '0; end
    end else begin
      qload_d <= qload && !qb_we; qload_slot_d <= qload_slot;
      if (qload_d)
        for (int i = 0; i < D; i++) qreg[qload_slot_d][i] <= qb_rdata[i*B +: B];
      dc_v1 <= dc_valid && !cb_we; dc_slot1 <= dc_slot; dc_id1 <= dc_id;
      for (int g = 0; g < NG; g++)
        if (g_start_v[g] && g_smode[g] == MODE_RC) begin
          rc_g <= GI_W'(g); rc_slot <= g_gslot[g];
        end
      for (int s = 0; s < NPE; s++)
        if (g_resv[rc_g][s]) begin
          logic signed [B:0] r;
          r = g_res[rc_g][s];
          rreg[rc_slot][s*MAX_DIMS + int'(g_rdim[rc_g][s])] <=
            (r > 9'sd127) ? 8'sd127 : (r < -9'sd128) ? -8'sd128 : B'(r);
        end
      cnt_rc       <= cnt_rc + 32'($countones(g_resv[rc_g]));
      cnt_lc_write <= cnt_lc_write + 32'(lut_we);
      cnt_pruned   <= cnt_pruned + 32'($countones(drm_ov & ~pq_ins));
      if (task_valid && task_ready && lowp) cnt_lowprec <= cnt_lowprec + 1'b1;
      for (int g = 0; g < NG; g++)
        if (!dc_phase && g_outv[g] && g_omode[g] == MODE_CL && g_omask[g] == NPE'(1))
          cnt_bypass <= cnt_bypass + 1'b1;
    end
  end

  // ---------------- TSM read port and task reorder ----------------
  assign pq_rd_keys = pq_keys[pq_rd_idx];
  assign pq_rd_ids  = pq_ids[pq_rd_idx];
  assign pq_rd_full = pq_full[pq_rd_idx];

  logic ro_busy;
  task_reorder #(.N_CLUSTERS(N_CLUSTERS), .N_ENTRIES(N_ENTRIES), .QID_W(16)) u_ro (
    .clk, .rst_n, .ins_valid(ro_push), .ins_ready(ro_ready),
    .ins_cluster(CID_W'(pq_rd_ids[ro_entry])), .ins_query(ro_query),
    .drain(ro_drain), .out_valid(ro_valid), .out_cluster(ro_cluster), .out_query(ro_qid),
    .out_last(ro_last), .busy(ro_busy));

  // tasks accepted but not yet started in a group
  logic [15:0] inflight;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 16'(task_valid && task_ready) - 16'($countones(g_start_v));

  assign idle = (inflight == '0) && !(|g_busy) && !(|l_valid) && !(|g_streaming) && !lcw_act && !ro_busy && !ppm_busy;
endmodule
