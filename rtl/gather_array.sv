// gather_array: two gather units working on the leaf list from both ends.
//
// Unit 0 takes leaves in depth-first order from the first leaf upward and
// unit 1 from the last leaf downward; each takes a new leaf as soon as it is
// idle, so the two meet wherever the load balances, as in the paper's
// block-wise gathering example. For each assignment the dispenser reads the
// leaf's record from the block table (`blk_idx`), derives the search space
// (leaf at depth <= 1, parent otherwise), the centre slice from the sample
// tables (`soff_tab`/`scnt_tab`) and hands the job to the unit.
//
// The single neighbour-table read port is shared by the two units with a
// round-robin arbiter, and their output rows are merged round-robin into one
// stream (`g_*`, tagged with the unit number in `g_unit`) for the feature
// computation. The two global-buffer read ports are passed straight through.
//
// Timing: `start` pulse; `done` pulses once every leaf has been gathered and
// the last row has left. `meet` holds the leaf index where the two
// directions met; `blk_u0`/`blk_u1` count leaves per unit.
module gather_array
  import fc_pkg::*;
#(
  parameter int unsigned LANES    = 16,
  parameter int unsigned LB_DEPTH = 1024,
  parameter int unsigned KMAX     = 32,
  parameter int unsigned MAX_PTS  = 8192,
  parameter int unsigned MAX_BLK  = 128,
  parameter int unsigned FEAT_ROWS = 8192,
  parameter int unsigned NBR_DEPTH = 65536,
  parameter int unsigned AW       = $clog2(MAX_PTS),
  parameter int unsigned BW       = $clog2(MAX_BLK),
  parameter int unsigned FA       = $clog2(FEAT_ROWS),
  parameter int unsigned NAW      = $clog2(NBR_DEPTH),
  parameter int unsigned K_W      = $clog2(KMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [K_W-1:0]  k,
  input  logic [FA-1:0]   feat_base,
  output logic            busy,
  output logic            done,
  // block table
  input  logic [BW:0]     n_blocks,
  output logic [BW-1:0]   blk_idx,
  input  logic [AW-1:0]   blk_start,
  input  logic [AW:0]     blk_len,
  input  logic [AW-1:0]   blk_pstart,
  input  logic [AW:0]     blk_plen,
  input  logic [4:0]      blk_depth,
  input  logic [AW:0]     soff_tab [MAX_BLK],
  input  logic [AW:0]     scnt_tab [MAX_BLK],
  // neighbour table
  output logic [NAW-1:0]  nbr_rd,
  input  logic [AW-1:0]   nbr_addr,
  // global buffer read ports
  output logic            mr_req   [2],
  output logic [FA-1:0]   mr_addr  [2],
  input  logic            mr_gnt   [2],
  input  logic            mr_rvalid[2],
  input  fp16_t           mr_data  [2][LANES],
  // merged gathered rows
  output logic            g_valid,
  input  logic            g_ready,
  output fp16_t           g_row [LANES],
  output logic [AW:0]     g_centre,
  output logic            g_last,
  output logic            g_unit,
  // statistics
  output logic [31:0]     blk_u0,
  output logic [31:0]     blk_u1,
  output logic [BW:0]     meet,
  output logic [31:0]     rows_loaded,
  output logic [31:0]     lb_reuses,
  output logic [31:0]     rows_out,
  output logic [31:0]     miss_cnt
);
  logic           run;
  logic [BW:0]    lo, hi;         // next leaf from the front / one past the back
  logic           jv   [2];
  logic           jr   [2];
  logic           nreq [2];
  logic [NAW-1:0] nidx [2];
  logic           ngnt [2];
  logic           ov   [2];
  logic           ordy [2];
  fp16_t          orow [2][LANES];
  logic [AW:0]    octr [2];
  logic           olst [2];
  logic [31:0]    s_ld [2], s_ru [2], s_out [2], s_blk [2], s_miss [2];
  logic           nrr, orr;       // round-robin pointers
  logic           pick;           // unit receiving a job this cycle
  logic           assign_ok;

  // dispenser: a job goes to an idle unit; unit 0 wins when both are idle
  assign assign_ok = run && (lo < hi) && (jr[0] || jr[1]);
  assign pick      = jr[0] ? 1'b0 : 1'b1;
  assign blk_idx   = pick ? BW'(hi - 1) : BW'(lo);

  logic [AW-1:0] j_ss;
  logic [AW:0]   j_len;
  assign j_ss  = (blk_depth <= 5'd1) ? blk_start : blk_pstart;
  assign j_len = (blk_depth <= 5'd1) ? blk_len   : blk_plen;

  always_comb begin
    jv[0] = assign_ok && !pick;
    jv[1] = assign_ok && pick;
  end

  for (genvar u = 0; u < 2; u++) begin : g_u
    gather_unit #(
      .LANES(LANES), .LB_DEPTH(LB_DEPTH), .KMAX(KMAX), .MAX_PTS(MAX_PTS),
      .FEAT_ROWS(FEAT_ROWS), .NBR_DEPTH(NBR_DEPTH)
    ) u_g (
      .clk, .rst_n,
      .job_valid(jv[u]), .job_ready(jr[u]), .ss_start(j_ss), .ss_len(j_len),
      .c_off(soff_tab[blk_idx]), .c_cnt(scnt_tab[blk_idx]), .k(k), .feat_base(feat_base),
      .mr_req(mr_req[u]), .mr_addr(mr_addr[u]), .mr_gnt(mr_gnt[u]), .mr_rvalid(mr_rvalid[u]), .mr_data(mr_data[u]),
      .nb_req(nreq[u]), .nb_idx(nidx[u]), .nb_gnt(ngnt[u]), .nb_addr(nbr_addr),
      .o_valid(ov[u]), .o_ready(ordy[u]), .o_row(orow[u]), .o_centre(octr[u]), .o_last(olst[u]),
      .rows_loaded(s_ld[u]), .lb_reuses(s_ru[u]), .rows_out(s_out[u]), .blocks_done(s_blk[u]), .miss_cnt(s_miss[u])
    );
  end

  // neighbour-table arbiter
  logic nsel;
  assign nsel    = (nreq[0] && nreq[1]) ? nrr : nreq[1];
  assign ngnt[0] = nreq[0] && (nsel == 1'b0);
  assign ngnt[1] = nreq[1] && (nsel == 1'b1);
  assign nbr_rd  = nidx[nsel];

  // output merge
  logic osel;
  assign osel     = (ov[0] && ov[1]) ? orr : ov[1];
  assign g_valid  = ov[osel];
  assign g_row    = orow[osel];
  assign g_centre = octr[osel];
  assign g_last   = olst[osel];
  assign g_unit   = osel;
  assign ordy[0]  = g_ready && (osel == 1'b0);
  assign ordy[1]  = g_ready && (osel == 1'b1);

  assign busy        = run;
  assign rows_loaded = s_ld[0] + s_ld[1];
  assign lb_reuses   = s_ru[0] + s_ru[1];
  assign rows_out    = s_out[0] + s_out[1];
  assign miss_cnt    = s_miss[0] + s_miss[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; lo <= '0; hi <= '0; nrr <= 1'b0; orr <= 1'b0; done <= 1'b0;
      blk_u0 <= '0; blk_u1 <= '0; meet <= '0;
    end else begin
      done <= 1'b0;
      if (nreq[0] && nreq[1]) nrr <= ~nrr;
      if (ov[0] && ov[1] && g_ready) orr <= ~orr;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          lo  <= '0;
          hi  <= n_blocks;
        end
      end else begin
        if (assign_ok) begin
          if (pick) begin hi <= hi - 1; blk_u1 <= blk_u1 + 1; end
          else      begin lo <= lo + 1; blk_u0 <= blk_u0 + 1; end
          if (lo + 1 >= hi) meet <= pick ? hi - 1 : lo;
        end else if (lo >= hi && jr[0] && jr[1] && !ov[0] && !ov[1]) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
