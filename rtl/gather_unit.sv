// gather_unit: block-wise feature gathering for one block at a time.
//
// For a leaf block the unit first copies the feature rows of the block's
// search space (the same leaf-or-parent window the point units searched)
// from the global buffer into its local block buffer, one row per grant.
// If the new block uses the same search space as the previous one (sibling
// leaves share their parent) the copy is skipped and the rows are reused.
// It then walks the neighbour table of every centre of the block
// (centres c_off .. c_off+c_cnt-1, k neighbours each) and for each entry
// reads the neighbour's row out of the local buffer and emits it. Because
// all neighbours of a leaf lie in its search space, each global-buffer row
// is fetched once per block instead of once per neighbour reference.
//
// Interface and timing:
//   job_*      accepted when `job_ready` (idle) and `job_valid` are high;
//   mr_*       global-buffer read: `mr_req`/`mr_addr`, granted by `mr_gnt`,
//              data returns with `mr_rvalid` one cycle after the grant;
//   nb_*       neighbour-table read: `nb_req`/`nb_idx`, granted by `nb_gnt`
//              with `nb_addr` valid in the same cycle;
//   o_*        output row with valid/ready; `o_last` marks the last
//              neighbour of a centre. One row per granted neighbour read.
// Rows outside the local buffer (search space larger than LB_DEPTH) are
// counted in `miss_cnt` and emitted as zero rows.
//
// Block-wise gathering follows the paper; the local-buffer reuse between
// sibling blocks, the buffer depth and the handshakes are this design's.
module gather_unit
  import fc_pkg::*;
#(
  parameter int unsigned LANES    = 16,
  parameter int unsigned LB_DEPTH = 1024,
  parameter int unsigned KMAX     = 32,
  parameter int unsigned MAX_PTS  = 8192,
  parameter int unsigned FEAT_ROWS = 8192,
  parameter int unsigned NBR_DEPTH = 65536,
  parameter int unsigned AW       = $clog2(MAX_PTS),
  parameter int unsigned FA       = $clog2(FEAT_ROWS),
  parameter int unsigned NAW      = $clog2(NBR_DEPTH),
  parameter int unsigned LBW      = $clog2(LB_DEPTH),
  parameter int unsigned K_W      = $clog2(KMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // job
  input  logic            job_valid,
  output logic            job_ready,
  input  logic [AW-1:0]   ss_start,
  input  logic [AW:0]     ss_len,
  input  logic [AW:0]     c_off,
  input  logic [AW:0]     c_cnt,
  input  logic [K_W-1:0]  k,
  input  logic [FA-1:0]   feat_base,
  // global buffer read
  output logic            mr_req,
  output logic [FA-1:0]   mr_addr,
  input  logic            mr_gnt,
  input  logic            mr_rvalid,
  input  fp16_t           mr_data [LANES],
  // neighbour table read
  output logic            nb_req,
  output logic [NAW-1:0]  nb_idx,
  input  logic            nb_gnt,
  input  logic [AW-1:0]   nb_addr,
  // gathered rows
  output logic            o_valid,
  input  logic            o_ready,
  output fp16_t           o_row [LANES],
  output logic [AW:0]     o_centre,
  output logic            o_last,
  // statistics
  output logic [31:0]     rows_loaded,
  output logic [31:0]     lb_reuses,
  output logic [31:0]     rows_out,
  output logic [31:0]     blocks_done,
  output logic [31:0]     miss_cnt
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_FLUSH} state_e;
  state_e state;

  fp16_t          lb [LB_DEPTH][LANES];
  logic [AW-1:0]  ss_q;
  logic [AW:0]    len_q, ld_n, issued, filled;
  logic           have_ss;
  logic [AW-1:0]  last_ss;
  logic [AW:0]    last_len;
  logic [AW:0]    ci, cend;
  logic [K_W-1:0] j, k_q;
  logic [FA-1:0]  base_q;
  logic [AW:0]    rel;

  assign job_ready = (state == S_IDLE);
  assign mr_req    = (state == S_LOAD) && (issued < ld_n);
  assign mr_addr   = base_q + FA'(ss_q) + FA'(issued);
  assign nb_req    = (state == S_RUN) && (ci < cend) && (!o_valid || o_ready);
  assign nb_idx    = NAW'(ci) * NAW'(k_q) + NAW'(j);
  assign rel       = {1'b0, nb_addr} - {1'b0, ss_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ss_q <= '0; len_q <= '0; ld_n <= '0; issued <= '0; filled <= '0;
      have_ss <= 1'b0; last_ss <= '0; last_len <= '0; ci <= '0; cend <= '0; j <= '0; k_q <= '0;
      base_q <= '0; o_valid <= 1'b0; o_centre <= '0; o_last <= 1'b0;
      rows_loaded <= '0; lb_reuses <= '0; rows_out <= '0; blocks_done <= '0; miss_cnt <= '0;
      for (int l = 0; l < LANES; l++) o_row[l] <= FP16_ZERO;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (job_valid) begin
          ss_q   <= ss_start;
          len_q  <= ss_len;
          ld_n   <= (ss_len > (AW+1)'(LB_DEPTH)) ? (AW+1)'(LB_DEPTH) : ss_len;
          issued <= '0;
          filled <= '0;
          ci     <= c_off;
          cend   <= c_off + c_cnt;
          j      <= '0;
          k_q    <= k;
          base_q <= feat_base;
          if (have_ss && last_ss == ss_start && last_len == ss_len && base_q == feat_base) begin
            lb_reuses <= lb_reuses + 1;
            state     <= S_RUN;
          end else begin
            state <= S_LOAD;
          end
          have_ss  <= 1'b1;
          last_ss  <= ss_start;
          last_len <= ss_len;
        end

        S_LOAD: begin
          if (mr_req && mr_gnt) issued <= issued + 1;
          if (mr_rvalid) begin
            for (int l = 0; l < LANES; l++) lb[LBW'(filled)][l] <= mr_data[l];
            filled      <= filled + 1;
            rows_loaded <= rows_loaded + 1;
            if (filled + 1 >= ld_n) state <= S_RUN;
          end
          if (ld_n == '0) state <= S_RUN;
        end

        S_RUN: begin
          if (nb_req && nb_gnt) begin
            o_valid  <= 1'b1;
            o_centre <= ci;
            o_last   <= (j + 1 >= k_q);
            rows_out <= rows_out + 1;
            if (rel < ld_n) begin
              for (int l = 0; l < LANES; l++) o_row[l] <= lb[LBW'(rel)][l];
            end else begin
              for (int l = 0; l < LANES; l++) o_row[l] <= FP16_ZERO;
              miss_cnt <= miss_cnt + 1;
            end
            if (j + 1 >= k_q) begin
              j  <= '0;
              ci <= ci + 1;
            end else begin
              j <= j + 1;
            end
          end
          if (ci >= cend) state <= S_FLUSH;
        end

        S_FLUSH: if (!o_valid || o_ready) begin
          blocks_done <= blocks_done + 1;
          state       <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
