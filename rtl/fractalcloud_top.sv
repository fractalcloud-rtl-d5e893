// fractalcloud_top: the FractalCloud point-cloud accelerator.
//
// Point operations: the fractal engine partitions the loaded cloud into
// leaf blocks (depth-first order); the RSPU array runs farthest point
// sampling per leaf (inter-block parallel) and ball query / KNN over each
// leaf's search space (intra-block parallel, with search-space reuse); the
// two gather units fetch neighbour features block-wise from both ends of
// the leaf list. Feature computation: the 16 x 16 systolic array applies the
// shared MLP layer with ReLU and the pooling unit max-pools each group; the
// pooled rows return to the global buffer. Memory: the banked global buffer
// holds feature rows; the DMA moves points, features, weights and results
// between DRAM and the chip. Control: the configuration module receives the
// control CPU's words on the cfg port, splits them into instructions and
// dispatches each one when the accelerator is idle.
//
// Instruction words (bits [31:28] = target):
//   0 fractal engine, 1 word:  [27:14] points, [13:0] threshold
//   1 RSPU array,     2 words: [27] op (0 FPS, 1 search), [26:25] mode,
//                              [24:21] rate shift, [20:15] k; w1[15:0] r^2
//   2 gather + MLP,   2 words: [27] ReLU, [20:15] k, [13:0] feature base;
//                              w1[13:0] output base
//   3 DMA,            3 words: [27:26] kind, [13:0] on-chip address;
//                              w1 DRAM beat address; w2[15:0] count
//
// The control CPU (RV32IMAC in the paper), the network-on-chip and the
// DRAM itself are outside this module: the CPU is represented by the cfg
// port and DRAM by the dram_* port. Instructions run one at a time; the
// paper's overlapping of point operations with feature computation across
// layers is not scheduled here.
module fractalcloud_top
  import fc_pkg::*;
#(
  parameter int unsigned MAX_PTS   = 8192,
  parameter int unsigned FE_LANES  = 4,
  parameter int unsigned MAX_BLK   = 128,
  parameter int unsigned N_RSPU    = 4,
  parameter int unsigned RSPU_DEPTH = 256,
  parameter int unsigned SS_DEPTH  = 1024,
  parameter int unsigned KMAX      = 32,
  parameter int unsigned NBR_DEPTH = 65536,
  parameter int unsigned SA_N      = 16,
  parameter int unsigned FEAT_ROWS = 8192,
  parameter int unsigned BANKS     = 8,
  parameter int unsigned BEAT_W    = 128,
  parameter int unsigned AW        = $clog2(MAX_PTS),
  parameter int unsigned BW        = $clog2(MAX_BLK),
  parameter int unsigned FA        = $clog2(FEAT_ROWS),
  parameter int unsigned K_W       = $clog2(KMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control CPU
  input  logic              cfg_valid,
  input  logic [31:0]       cfg_data,
  output logic              cfg_ready,
  output logic              idle,
  // DRAM
  output logic              dram_req,
  output logic              dram_we,
  output logic [31:0]       dram_addr,
  output logic [BEAT_W-1:0] dram_wdata,
  input  logic              dram_gnt,
  input  logic              dram_rvalid,
  input  logic [BEAT_W-1:0] dram_rdata,
  // result inspection
  input  logic [AW-1:0]     pt_rd_addr,    // partitioned point, read while the RSPU array is idle
  output point_t            pt_rd_point,
  output logic [AW-1:0]     pt_rd_orig,
  input  logic [AW-1:0]     samp_rd,
  output logic [AW-1:0]     samp_addr,
  output logic [AW:0]       n_samples,
  output logic [BW:0]       n_blocks,
  output logic [7:0]        traversals,
  output logic              overflow,
  // mechanism counters
  output logic [31:0]       fps_visits,
  output logic [31:0]       fps_batches,
  output logic [31:0]       ns_batches,
  output logic [31:0]       ss_reuses,
  output logic [31:0]       bcast_reads,
  output logic [31:0]       served,
  output logic [31:0]       clamp_cnt,
  output logic [31:0]       g_blk_u0,
  output logic [31:0]       g_blk_u1,
  output logic [31:0]       g_lb_reuses,
  output logic [31:0]       g_rows_loaded,
  output logic [31:0]       g_rows_out,
  output logic [31:0]       bank_conflicts,
  output logic [31:0]       cfg_wait_cycles,
  output logic [31:0]       mlp_groups,
  output logic [31:0]       dma_beats
);
  localparam int unsigned NT = 4;

  // ---------------- configuration ----------------
  logic [NT-1:0]  ins_valid;
  logic [127:0]   ins;
  logic [NT-1:0]  tgt_ready;
  logic           cfg_empty;
  logic [31:0]    n_instrs, bad_tgt;
  logic           all_idle;

  config_module #(.NT(NT), .MAXW(4), .DEPTH(16), .HOLD(2), .LEN({4'd3, 4'd2, 4'd2, 4'd1})) u_cfg (
    .clk, .rst_n, .cfg_valid, .cfg_data, .cfg_ready, .tgt_ready, .ins_valid, .ins_data(ins),
    .empty(cfg_empty), .instrs(n_instrs), .wait_cycles(cfg_wait_cycles), .bad_target(bad_tgt)
  );

  // instruction registers
  logic [AW:0]    fe_n, fe_th;
  logic           ra_op;
  rspu_mode_e     ra_mode;
  logic [3:0]     ra_rs;
  logic [K_W-1:0] ra_k, ga_k;
  fp16_t          ra_r2;
  logic           g_relu;
  logic [FA-1:0]  g_fbase, g_obase, d_loc;
  logic [1:0]     d_kind;
  logic [31:0]    d_base;
  logic [15:0]    d_cnt;
  logic           fe_go, ra_go, ga_go, dma_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fe_n <= '0; fe_th <= '0; ra_op <= 1'b0; ra_mode <= MODE_FPS; ra_rs <= '0; ra_k <= '0; ra_r2 <= FP16_ZERO;
      ga_k <= '0; g_relu <= 1'b0; g_fbase <= '0; g_obase <= '0; d_kind <= '0; d_base <= '0; d_loc <= '0; d_cnt <= '0;
      fe_go <= 1'b0; ra_go <= 1'b0; ga_go <= 1'b0; dma_go <= 1'b0;
    end else begin
      fe_go  <= ins_valid[0];
      ra_go  <= ins_valid[1];
      ga_go  <= ins_valid[2];
      dma_go <= ins_valid[3];
      if (ins_valid[0]) begin
        fe_n  <= (AW+1)'(ins[27:14]);
        fe_th <= (AW+1)'(ins[13:0]);
      end
      if (ins_valid[1]) begin
        ra_op   <= ins[27];
        ra_mode <= rspu_mode_e'(ins[26:25]);
        ra_rs   <= ins[24:21];
        ra_k    <= K_W'(ins[20:15]);
        ra_r2   <= ins[47:32];
      end
      if (ins_valid[2]) begin
        g_relu  <= ins[27];
        ga_k    <= K_W'(ins[20:15]);
        g_fbase <= FA'(ins[13:0]);
        g_obase <= FA'(ins[45:32]);
      end
      if (ins_valid[3]) begin
        d_kind <= ins[27:26];
        d_loc  <= FA'(ins[13:0]);
        d_base <= ins[63:32];
        d_cnt  <= ins[79:64];
      end
    end
  end

  // ---------------- point operations ----------------
  logic            fe_busy, fe_done;
  logic [BW-1:0]   fe_blk_idx, ra_blk_idx, ga_blk_idx;
  logic [AW-1:0]   blk_start, blk_pstart;
  logic [AW:0]     blk_len, blk_plen;
  logic [4:0]      blk_depth;
  logic [AW-1:0]   pt_rd, ra_pt_rd;
  point_t          pt_point;
  logic            dma_pt_v;
  logic [AW-1:0]   dma_pt_a;
  point_t          dma_pt;

  fractal_engine #(.MAX_PTS(MAX_PTS), .LANES(FE_LANES), .MAX_BLK(MAX_BLK)) u_fe (
    .clk, .rst_n, .ld_valid(dma_pt_v), .ld_addr(dma_pt_a), .ld_point(dma_pt),
    .start(fe_go), .n_pts(fe_n), .th(fe_th), .busy(fe_busy), .done(fe_done),
    .n_blocks, .overflow, .traversals,
    .blk_idx(fe_blk_idx), .blk_start, .blk_len, .blk_pstart, .blk_plen, .blk_depth,
    .rd_addr(pt_rd), .rd_point(pt_point), .rd_orig(pt_rd_orig)
  );

  logic            ra_busy, ra_done, ga_busy, ga_done;
  logic [AW:0]     soff_tab [MAX_BLK];
  logic [AW:0]     scnt_tab [MAX_BLK];
  logic [$clog2(NBR_DEPTH)-1:0] nbr_rd;
  logic [AW-1:0]   nbr_addr;
  logic [31:0]     ss_loads;

  assign fe_blk_idx  = ga_busy ? ga_blk_idx : ra_blk_idx;
  assign pt_rd       = ra_busy ? ra_pt_rd : pt_rd_addr;
  assign pt_rd_point = pt_point;

  rspu_array #(
    .N_RSPU(N_RSPU), .DEPTH(RSPU_DEPTH), .SS_DEPTH(SS_DEPTH), .KMAX(KMAX),
    .MAX_PTS(MAX_PTS), .MAX_BLK(MAX_BLK), .NBR_DEPTH(NBR_DEPTH)
  ) u_ra (
    .clk, .rst_n, .start(ra_go), .op(ra_op), .ns_mode(ra_mode), .rate_shift(ra_rs), .k(ra_k), .radius2(ra_r2),
    .busy(ra_busy), .done(ra_done),
    .n_blocks, .blk_idx(ra_blk_idx), .blk_start, .blk_len, .blk_pstart, .blk_plen, .blk_depth,
    .pt_addr(ra_pt_rd), .pt_point,
    .n_samples, .samp_rd, .samp_addr, .soff_tab, .scnt_tab, .nbr_rd, .nbr_addr,
    .fps_batches, .ns_batches, .ss_loads, .ss_reuses, .bcast_reads, .served, .clamp_cnt,
    .fps_visits_total(fps_visits)
  );

  // ---------------- gathering and memory ----------------
  logic            mr_req   [3];
  logic [FA-1:0]   mr_addr  [3];
  logic            mr_gnt   [3];
  logic            mr_rvalid[3];
  fp16_t           mr_data  [3][SA_N];
  logic            gg_req   [2];
  logic [FA-1:0]   gg_addr  [2];
  logic            gg_gnt   [2];
  logic            gg_rvalid[2];
  fp16_t           gg_data  [2][SA_N];
  logic            g_valid, g_ready, g_last, g_unit;
  fp16_t           g_row [SA_N];
  logic [AW:0]     g_centre;
  logic [BW:0]     g_meet;
  logic [31:0]     g_miss;

  gather_array #(
    .LANES(SA_N), .LB_DEPTH(SS_DEPTH), .KMAX(KMAX), .MAX_PTS(MAX_PTS), .MAX_BLK(MAX_BLK),
    .FEAT_ROWS(FEAT_ROWS), .NBR_DEPTH(NBR_DEPTH)
  ) u_ga (
    .clk, .rst_n, .start(ga_go), .k(ga_k), .feat_base(g_fbase), .busy(ga_busy), .done(ga_done),
    .n_blocks, .blk_idx(ga_blk_idx), .blk_start, .blk_len, .blk_pstart, .blk_plen, .blk_depth,
    .soff_tab, .scnt_tab, .nbr_rd, .nbr_addr,
    .mr_req(gg_req), .mr_addr(gg_addr), .mr_gnt(gg_gnt), .mr_rvalid(gg_rvalid), .mr_data(gg_data),
    .g_valid, .g_ready, .g_row, .g_centre, .g_last, .g_unit,
    .blk_u0(g_blk_u0), .blk_u1(g_blk_u1), .meet(g_meet), .rows_loaded(g_rows_loaded),
    .lb_reuses(g_lb_reuses), .rows_out(g_rows_out), .miss_cnt(g_miss)
  );

  logic            dma_busy, dma_done, dma_wr, dma_rd_req, dma_wld;
  logic [FA-1:0]   dma_wr_a, dma_rd_a;
  fp16_t           dma_wr_d [SA_N];
  fp16_t           dma_w_d  [SA_N];
  logic [$clog2(SA_N)-1:0] dma_w_row;
  logic            m_wr, m_idle;
  logic [FA-1:0]   m_wr_a;
  fp16_t           m_wr_d [SA_N];
  logic            b_wr;
  logic [FA-1:0]   b_wr_a;
  fp16_t           b_wr_d [SA_N];
  logic [31:0]     m_rows;

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      mr_req[u]    = gg_req[u];
      mr_addr[u]   = gg_addr[u];
      gg_gnt[u]    = mr_gnt[u];
      gg_rvalid[u] = mr_rvalid[u];
      gg_data[u]   = mr_data[u];
    end
    mr_req[2]  = dma_rd_req;
    mr_addr[2] = dma_rd_a;
    // the feature computation's writes take priority over DMA loads
    b_wr   = m_wr || dma_wr;
    b_wr_a = m_wr ? m_wr_a : dma_wr_a;
    b_wr_d = m_wr ? m_wr_d : dma_wr_d;
  end

  global_buffer #(.LANES(SA_N), .ROWS(FEAT_ROWS), .BANKS(BANKS), .NRD(3)) u_gb (
    .clk, .rst_n, .wr_en(b_wr), .wr_addr(b_wr_a), .wr_data(b_wr_d),
    .rd_req(mr_req), .rd_addr(mr_addr), .rd_gnt(mr_gnt), .rd_valid(mr_rvalid), .rd_data(mr_data),
    .conflicts(bank_conflicts)
  );

  dma #(.LANES(SA_N), .BEAT_W(BEAT_W), .MAX_PTS(MAX_PTS), .FEAT_ROWS(FEAT_ROWS)) u_dma (
    .clk, .rst_n, .start(dma_go), .kind(d_kind), .dram_base(d_base), .loc_base(d_loc), .count(d_cnt),
    .busy(dma_busy), .done(dma_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .pt_valid(dma_pt_v), .pt_addr(dma_pt_a), .pt_point(dma_pt),
    .wr_en(dma_wr), .wr_addr(dma_wr_a), .wr_data(dma_wr_d),
    .rd_req(dma_rd_req), .rd_addr(dma_rd_a), .rd_gnt(mr_gnt[2]), .rd_valid(mr_rvalid[2]), .rd_data(mr_data[2]),
    .w_ld(dma_wld), .w_row(dma_w_row), .w_data(dma_w_d), .beats(dma_beats)
  );

  // ---------------- feature computation ----------------
  mlp_ctrl #(.N(SA_N), .MAX_PTS(MAX_PTS), .FEAT_ROWS(FEAT_ROWS)) u_mlp (
    .clk, .rst_n, .relu(g_relu), .out_base(g_obase),
    .w_ld(dma_wld), .w_row(dma_w_row), .w_data(dma_w_d),
    .in_valid(g_valid), .in_ready(g_ready), .in_row(g_row), .in_centre(g_centre), .in_last(g_last), .in_unit(g_unit),
    .wr_en(m_wr), .wr_addr(m_wr_a), .wr_data(m_wr_d),
    .idle(m_idle), .rows_in(m_rows), .groups_out(mlp_groups)
  );

  // ---------------- status ----------------
  assign all_idle  = !fe_busy && !ra_busy && !ga_busy && m_idle && !dma_busy &&
                     !fe_go && !ra_go && !ga_go && !dma_go && (ins_valid == '0);
  assign tgt_ready = {NT{all_idle}};
  assign idle      = all_idle && cfg_empty;
endmodule
