// decoder_datapath: list datapath of the LPSCL Fast-SSCL-SPC polar decoder.
//
// It holds everything the control unit steers, following the paper's
// decoder architecture:
//  * L_MAX sets of N_PE processing elements (one set per candidate path);
//  * the LLR memories: stages 0..TB (TB = n - log2 P) for each of the L_MAX
//    lower-layer paths, stages TB+1..n-1 for each of the L_UP upper-layer
//    paths (LPSCL: only L_UP < L_MAX paths are kept above stage TB);
//  * the path (partial-sum) memories: N/P bits per lower path, N bits per
//    upper path;
//  * the PM memory (one QPM-bit register per lower path), the PM
//    calculation of every path and the PM sorter;
//  * one LLR sorter per path, with the per-path list of the least reliable
//    positions of the Rate-1/SPC node being decoded (node-local state: node
//    codeword estimate, sorted positions, parity).
//
// Lower path l reads its upper-layer data through the pointer up[l]. When a
// path splits and the sorter keeps candidate (p, b) as surviving path r,
// all lower-layer state of path p is copied into slot r in the same cycle
// (the paper's memory copy) and the hypothesis b is applied on top. At the
// end of every subtree of N/P bits (OP_BOUNDARY) the PMs are sorted, the
// L_UP best paths are kept and their results are transferred into upper
// slots 0..L_UP-1, each taking the upper-layer state of the upper path it
// descends from (the paper's upper/lower stage transfer).
//
// One command per cycle (cmd_t from rf_pkg); every command completes in that
// cycle. Surviving path 0 after a sort always has the smallest PM, so upper
// slot 0 holds the decoded codeword x_hat once the root is complete.
// Reset: synchronous, active low; clears the path state (memories are not
// reset, they are written before they are read).
module decoder_datapath
  import rf_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned NPE   = 64,
  parameter int unsigned L_MAX = 4,
  parameter int unsigned P     = 4,
  parameter int unsigned L_UP  = 2,
  localparam int unsigned NL   = $clog2(N),
  localparam int unsigned TB   = NL - $clog2(P),
  localparam int unsigned NSUB = N / P,
  localparam int unsigned LW   = (L_MAX > 1) ? $clog2(L_MAX) : 1,
  localparam int unsigned UW   = (L_UP > 1) ? $clog2(L_UP) : 1,
  localparam int unsigned PPW  = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cmd_t           cmd,
  // channel memory read port
  output logic [NL-1:0]  ch_off_a,
  output logic [NL-1:0]  ch_off_b,
  input  llr_t           ch_a [NPE],
  input  llr_t           ch_b [NPE],
  // results
  output logic [N-1:0]   x_hat,      // codeword estimate of the best path
  output pm_t            best_pm,    // its path metric
  output logic [L_MAX-1:0] active    // live lower-layer paths
);

  localparam int unsigned LO_AW = $clog2((1 << (TB + 1)) - 1) + 1;
  localparam int unsigned UP_AW = $clog2((1 << NL) - (1 << (TB + 1))) + 1;

  // ---------------------------------------------------------------- state
  pm_t                pm      [L_MAX];
  logic [UW-1:0]      up      [L_MAX];
  logic [NPE-1:0]     nb      [L_MAX];   // node codeword estimate
  logic [NPE-1:0]     taken   [L_MAX];   // positions already sorted
  logic [PPW-1:0]     ord     [L_MAX][L_MAX];
  logic [MAGW-1:0]    ordmag  [L_MAX][L_MAX];
  logic               par     [L_MAX];   // SPC parity of the hard decisions
  logic [L_UP-1:0]    uactive;

  // ---------------------------------------------------------------- decode cmd
  op_e             op;
  logic [STW-1:0]  t;
  int unsigned     half, idx, chunk, step;
  logic [$clog2(NPE):0] cnt;
  logic            is_fg, upper_op, src_ch, src_up, split_op;

  always_comb begin
    op       = cmd.op;
    t        = cmd.stage;
    half     = 32'd1 << t;
    idx      = 32'(cmd.idx);
    chunk    = 32'(cmd.chunk);
    step     = 32'(cmd.step);
    cnt      = ($clog2(NPE)+1)'((half < NPE) ? half : NPE);
    is_fg    = (op == OP_F) || (op == OP_G);
    upper_op = is_fg && (32'(t) > TB);
    src_ch   = is_fg && (32'(t) + 1 == NL);
    src_up   = is_fg && (32'(t) + 1 > TB) && !src_ch;
    split_op = (op == OP_REP) || (op == OP_R1_EST) || (op == OP_SPC_EST);
  end

  assign ch_off_a = NL'(chunk * NPE);
  assign ch_off_b = NL'(half + chunk * NPE);

  // ---------------------------------------------------------------- memories
  llr_t               lo_rd_a [L_MAX][NPE];
  llr_t               lo_rd_b [L_MAX][NPE];
  llr_t               up_rd_a [L_UP][NPE];
  llr_t               up_rd_b [L_UP][NPE];
  llr_t               pe_out  [L_MAX][NPE];
  logic [L_MAX-1:0]   lo_wr_en;
  logic [L_UP-1:0]    up_wr_en;
  llr_t               up_wr_data [L_UP][NPE];
  logic               lo_cp_en, up_cp_en;
  logic [LW-1:0]      lo_cp_src [L_MAX];
  logic [UW-1:0]      up_cp_src [L_UP];
  logic [STW-1:0]     lo_rd_stage;
  logic [LO_AW-1:0]   lo_rd_off_a, lo_rd_off_b;

  assign lo_rd_stage = is_fg ? t + 1'b1 : t;
  assign lo_rd_off_a = is_fg ? LO_AW'(chunk * NPE) : '0;
  assign lo_rd_off_b = is_fg ? LO_AW'(half + chunk * NPE) : '0;

  llr_memory #(.N_INST(L_MAX), .S_LO(0), .S_HI(TB), .NPE(NPE)) u_llr_lo (
    .clk      (clk),
    .rd_stage (lo_rd_stage),
    .rd_off_a (lo_rd_off_a),
    .rd_off_b (lo_rd_off_b),
    .rd_a     (lo_rd_a),
    .rd_b     (lo_rd_b),
    .wr_en    (lo_wr_en),
    .wr_stage (t),
    .wr_off   (LO_AW'(chunk * NPE)),
    .wr_cnt   (cnt),
    .wr_data  (pe_out),
    .cp_en    (lo_cp_en),
    .cp_src   (lo_cp_src)
  );

  for (genvar u = 0; u < L_UP; u++) begin : g_upwd
    assign up_wr_data[u] = pe_out[u];
  end

  llr_memory #(.N_INST(L_UP), .S_LO(TB + 1), .S_HI(NL - 1), .NPE(NPE)) u_llr_up (
    .clk      (clk),
    .rd_stage (t + 1'b1),
    .rd_off_a (UP_AW'(chunk * NPE)),
    .rd_off_b (UP_AW'(half + chunk * NPE)),
    .rd_a     (up_rd_a),
    .rd_b     (up_rd_b),
    .wr_en    (up_wr_en),
    .wr_stage (t),
    .wr_off   (UP_AW'(chunk * NPE)),
    .wr_cnt   (cnt),
    .wr_data  (up_wr_data),
    .cp_en    (up_cp_en),
    .cp_src   (up_cp_src)
  );

  // path memories
  logic [NSUB-1:0]    lp_rd [L_MAX];
  logic [N-1:0]       upm_rd [L_UP];
  logic [L_MAX-1:0]   lp_wr_en;
  logic [NPE-1:0]     lp_wr_data [L_MAX];
  logic               lp_cb_en, lp_cp_en;
  logic [L_UP-1:0]    upm_wr_en;
  logic [NSUB-1:0]    upm_wr_data [L_UP];
  logic               upm_cb_en, upm_cp_en;

  path_memory #(.N_INST(L_MAX), .W(NSUB), .WIN(NPE)) u_path_lo (
    .clk     (clk),
    .wr_en   (lp_wr_en),
    .wr_pos  (($clog2(NSUB)+1)'(idx % NSUB)),
    .wr_t    (t),
    .wr_data (lp_wr_data),
    .cb_en   (lp_cb_en),
    .cb_pos  (($clog2(NSUB)+1)'((idx - half) % NSUB)),
    .cb_t    (t),
    .cp_en   (lp_cp_en),
    .cp_src  (lo_cp_src),
    .rd      (lp_rd)
  );

  path_memory #(.N_INST(L_UP), .W(N), .WIN(NSUB)) u_path_up (
    .clk     (clk),
    .wr_en   (upm_wr_en),
    .wr_pos  ((NL+1)'(idx)),
    .wr_t    (t),
    .wr_data (upm_wr_data),
    .cb_en   (upm_cb_en),
    .cb_pos  ((NL+1)'(idx - half)),
    .cb_t    (t),
    .cp_en   (upm_cp_en),
    .cp_src  (up_cp_src),
    .rd      (upm_rd)
  );

  // ---------------------------------------------------------------- PE sets
  llr_t           pe_a [L_MAX][NPE];
  llr_t           pe_b [L_MAX][NPE];
  logic [NPE-1:0] pe_c [L_MAX];

  always_comb
    for (int j = 0; j < L_MAX; j++) begin
      logic [UW-1:0] slot;
      slot = upper_op ? ((j < L_UP) ? UW'(j) : '0) : up[j];
      for (int k = 0; k < NPE; k++) begin
        int unsigned pos;
        if (src_ch) begin
          pe_a[j][k] = ch_a[k];
          pe_b[j][k] = ch_b[k];
        end else if (src_up) begin
          pe_a[j][k] = up_rd_a[slot][k];
          pe_b[j][k] = up_rd_b[slot][k];
        end else begin
          pe_a[j][k] = lo_rd_a[j][k];
          pe_b[j][k] = lo_rd_b[j][k];
        end
        // left-child partial sum for G: bit (idx - 2^t + chunk*NPE + k)
        pos = idx - half + chunk * NPE + k;
        if (32'(t) >= TB) pe_c[j][k] = upm_rd[slot][pos % N];
        else              pe_c[j][k] = lp_rd[j][pos % NSUB];
      end
    end

  for (genvar j = 0; j < L_MAX; j++) begin : g_pes
    pe_array #(.NPE(NPE)) u_pes (
      .a(pe_a[j]), .b(pe_b[j]), .c(pe_c[j]), .fsel(op == OP_G), .y(pe_out[j])
    );
  end

  // ---------------------------------------------------------------- sorters, PM calc
  logic [PPW-1:0]  srt_pos [L_MAX];
  logic [MAGW-1:0] srt_mag [L_MAX];
  logic [NPE-1:0]  srt_taken [L_MAX];
  logic [NPE-1:0]  hard [L_MAX];
  logic            hpar [L_MAX];
  pm_t             pm0 [L_MAX];
  pm_t             pm1 [L_MAX];

  for (genvar j = 0; j < L_MAX; j++) begin : g_path
    logic [MAGW-1:0] mag_sel, mag_min;
    logic            parity;

    assign srt_taken[j] = (step == 0) ? '0 : taken[j];

    llr_sorter #(.NPE(NPE)) u_lsort (
      .alpha(lo_rd_a[j]), .t(t), .taken(srt_taken[j]),
      .min_pos(srt_pos[j]), .min_mag(srt_mag[j]), .found()
    );

    always_comb begin
      hpar[j] = 1'b0;
      for (int k = 0; k < NPE; k++) begin
        hard[j][k] = (k < half) && lo_rd_a[j][k].s;
        hpar[j]    = hpar[j] ^ hard[j][k];
      end
    end

    assign mag_sel = ordmag[j][step % L_MAX];
    assign mag_min = (op == OP_SPC_SORT) ? srt_mag[j] : ordmag[j][0];
    assign parity  = (op == OP_SPC_SORT) ? hpar[j] : par[j];

    pm_calc #(.NPE(NPE)) u_pmc (
      .op(op), .t(t), .pm_in(pm[j]), .alpha(lo_rd_a[j]),
      .mag_sel(mag_sel), .mag_min(mag_min), .parity(parity),
      .pm0(pm0[j]), .pm1(pm1[j])
    );
  end

  // candidate list for the PM sorter: 2l = hypothesis 0, 2l+1 = hypothesis 1
  pm_t                cand_pm [2*L_MAX];
  logic [2*L_MAX-1:0] cand_valid;
  logic [$clog2(2*L_MAX)-1:0] sel_cand [L_MAX];
  pm_t                sel_pm [L_MAX];
  logic [L_MAX-1:0]   sel_valid;

  always_comb
    for (int l = 0; l < L_MAX; l++) begin
      cand_pm[2*l]        = split_op ? pm0[l] : pm[l];
      cand_pm[2*l+1]      = pm1[l];
      cand_valid[2*l]     = active[l];
      cand_valid[2*l+1]   = active[l] && split_op;
    end

  pm_sorter #(.L(L_MAX)) u_pmsort (
    .cand_pm(cand_pm), .cand_valid(cand_valid),
    .sel_cand(sel_cand), .sel_pm(sel_pm), .sel_valid(sel_valid)
  );

  logic [LW-1:0] par_of [L_MAX];  // parent path of surviving path r
  logic          hyp_of [L_MAX];  // hypothesis taken by surviving path r

  always_comb
    for (int r = 0; r < L_MAX; r++) begin
      par_of[r] = sel_valid[r] ? LW'(sel_cand[r] >> 1) : LW'(r);
      hyp_of[r] = sel_cand[r][0];
    end

  // ---------------------------------------------------------------- memory controls
  always_comb begin
    lo_wr_en  = '0;
    up_wr_en  = '0;
    lo_cp_en  = split_op;
    up_cp_en  = (op == OP_BOUNDARY);
    lp_cp_en  = split_op;
    upm_cp_en = (op == OP_BOUNDARY);
    lp_cb_en  = (op == OP_COMBINE);
    upm_cb_en = (op == OP_UCOMBINE);
    lp_wr_en  = '0;
    upm_wr_en = '0;
    for (int r = 0; r < L_MAX; r++) begin
      lo_cp_src[r]  = par_of[r];
      lp_wr_data[r] = '0;
    end
    for (int u = 0; u < L_UP; u++) begin
      up_cp_src[u]   = sel_valid[u] ? up[par_of[u]] : UW'(u);
      upm_wr_data[u] = lp_rd[par_of[u]];
    end

    if (is_fg) begin
      if (upper_op) up_wr_en = uactive;
      else          lo_wr_en = active;
    end

    unique case (op)
      OP_R0: begin
        lp_wr_en = active;
      end
      OP_REP: begin
        lp_wr_en = sel_valid;
        for (int r = 0; r < L_MAX; r++) lp_wr_data[r] = {NPE{hyp_of[r]}};
      end
      OP_R1_HARD, OP_SPC_HARD: begin
        lp_wr_en = active;
        for (int l = 0; l < L_MAX; l++) lp_wr_data[l] = nb[l];
      end
      OP_SPC_PAR: begin
        lp_wr_en = active;
        for (int l = 0; l < L_MAX; l++) begin
          lp_wr_data[l] = nb[l];
          lp_wr_data[l][ord[l][0]] = nb[l][ord[l][0]] ^ par[l];
        end
      end
      OP_BOUNDARY: begin
        for (int u = 0; u < L_UP; u++) upm_wr_en[u] = sel_valid[u];
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- path state update
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active  <= '0;
      uactive <= '0;
      for (int l = 0; l < L_MAX; l++) begin
        pm[l]  <= '0;
        up[l]  <= '0;
        par[l] <= 1'b0;
      end
    end else begin
      unique case (op)
        OP_INIT: begin
          active  <= L_MAX'(1);
          uactive <= L_UP'(1);
          for (int l = 0; l < L_MAX; l++) begin
            pm[l]  <= '0;
            up[l]  <= '0;
            par[l] <= 1'b0;
          end
        end
        OP_R0: begin
          for (int l = 0; l < L_MAX; l++) pm[l] <= pm0[l];
        end
        OP_REP, OP_R1_EST, OP_SPC_EST: begin
          for (int r = 0; r < L_MAX; r++) begin
            automatic logic [LW-1:0] p = par_of[r];
            automatic logic flip = (op != OP_REP) && hyp_of[r];
            active[r] <= sel_valid[r];
            pm[r]     <= sel_pm[r];
            up[r]     <= up[p];
            taken[r]  <= taken[p];
            ord[r]    <= ord[p];
            ordmag[r] <= ordmag[p];
            nb[r]     <= nb[p] ^ (NPE'(flip) << ord[p][step % L_MAX]);
            par[r]    <= par[p] ^ (flip && (op == OP_SPC_EST));
          end
        end
        OP_R1_SORT, OP_SPC_SORT: begin
          for (int l = 0; l < L_MAX; l++) begin
            ord[l][step % L_MAX]    <= srt_pos[l];
            ordmag[l][step % L_MAX] <= srt_mag[l];
            taken[l] <= srt_taken[l] | (NPE'(1) << srt_pos[l]);
            if (step == 0) begin
              nb[l] <= hard[l];
              if (op == OP_SPC_SORT) begin
                par[l] <= hpar[l];
                pm[l]  <= pm0[l];
              end
            end
          end
        end
        OP_SPC_PAR: begin
          for (int l = 0; l < L_MAX; l++) begin
            nb[l][ord[l][0]] <= nb[l][ord[l][0]] ^ par[l];
            par[l] <= 1'b0;
          end
        end
        OP_BOUNDARY: begin
          for (int l = 0; l < L_MAX; l++) begin
            if (l < L_UP) begin
              active[l] <= sel_valid[l];
              pm[l]     <= sel_pm[l];
              up[l]     <= UW'(l);
            end else begin
              active[l] <= 1'b0;
            end
          end
          for (int u = 0; u < L_UP; u++) uactive[u] <= sel_valid[u];
        end
        default: ;
      endcase
    end
  end

  assign x_hat   = upm_rd[0];
  assign best_pm = pm[0];

endmodule
