// dma: moves data between external DRAM and the on-chip stores.
//
// One descriptor per job: `kind`, DRAM beat address, on-chip address and a
// count of items. Kinds:
//   K_COORD  points  -> fractal engine load port, one beat per point
//                       (x, y, z in the low 48 bits);
//   K_FEAT   rows    -> global buffer writes, BPR beats per row;
//   K_WGT    rows    -> systolic-array weight rows, BPR beats per row;
//   K_STORE  rows    <- global buffer reads, written to DRAM, BPR beats each.
// Loads keep issuing read requests while the DRAM accepts them (`dram_gnt`)
// and assemble returning beats (`dram_rvalid`, in order, any latency) into
// rows, so a DRAM accepting one beat per cycle is used every cycle. Stores
// read one buffer row, then issue its write beats.
//
// BEAT_W = 128 bits per cycle at 1 GHz is 16 GB/s, close to the paper's
// DDR4-2133 17 GB/s; the beat width, descriptor format and request
// protocol are this design's choices. Buffer writes assume the feature
// computation is not writing at the same time (the controller runs jobs one
// after another).
module dma
  import fc_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned BEAT_W    = 128,
  parameter int unsigned MAX_PTS   = 8192,
  parameter int unsigned FEAT_ROWS = 8192,
  parameter int unsigned AW        = $clog2(MAX_PTS),
  parameter int unsigned FA        = $clog2(FEAT_ROWS),
  parameter int unsigned RW        = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // descriptor
  input  logic              start,
  input  logic [1:0]        kind,
  input  logic [31:0]       dram_base,
  input  logic [FA-1:0]     loc_base,
  input  logic [15:0]       count,
  output logic              busy,
  output logic              done,
  // DRAM
  output logic              dram_req,
  output logic              dram_we,
  output logic [31:0]       dram_addr,
  output logic [BEAT_W-1:0] dram_wdata,
  input  logic              dram_gnt,
  input  logic              dram_rvalid,
  input  logic [BEAT_W-1:0] dram_rdata,
  // fractal engine point load
  output logic              pt_valid,
  output logic [AW-1:0]     pt_addr,
  output point_t            pt_point,
  // global buffer write / read
  output logic              wr_en,
  output logic [FA-1:0]     wr_addr,
  output fp16_t             wr_data [LANES],
  output logic              rd_req,
  output logic [FA-1:0]     rd_addr,
  input  logic              rd_gnt,
  input  logic              rd_valid,
  input  fp16_t             rd_data [LANES],
  // weights
  output logic              w_ld,
  output logic [RW-1:0]     w_row,
  output fp16_t             w_data [LANES],
  // statistics
  output logic [31:0]       beats
);
  localparam int unsigned ROW_W = 16 * LANES;
  localparam int unsigned BPR   = (ROW_W + BEAT_W - 1) / BEAT_W;
  localparam int unsigned EPB   = BEAT_W / 16;          // FP16 values per beat
  localparam logic [1:0] K_COORD = 2'd0, K_FEAT = 2'd1, K_WGT = 2'd2, K_STORE = 2'd3;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WAIT, S_ST_WR} state_e;
  state_e state;

  logic [1:0]  kind_q;
  logic [31:0] base_q;
  logic [FA-1:0] loc_q;
  logic [31:0] total, nreq, nrcv;
  logic [15:0] item;        // current item (row or point)
  logic [15:0] cnt_q;
  logic [7:0]  bi;          // beat within row
  fp16_t       row [LANES];

  assign busy = (state != S_IDLE);

  always_comb begin
    dram_req   = 1'b0;
    dram_we    = 1'b0;
    dram_addr  = base_q + nreq;
    dram_wdata = '0;
    if (state == S_LOAD) dram_req = (nreq < total);
    if (state == S_ST_WR) begin
      dram_req = 1'b1;
      dram_we  = 1'b1;
      for (int e = 0; e < EPB; e++)
        if (int'(bi) * EPB + e < LANES) dram_wdata[16*e +: 16] = row[int'(bi) * EPB + e];
    end
  end
  assign rd_req  = (state == S_ST_RD);
  assign rd_addr = loc_q + FA'(item);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; kind_q <= K_COORD; base_q <= '0; loc_q <= '0;
      total <= '0; nreq <= '0; nrcv <= '0; item <= '0; cnt_q <= '0; bi <= '0; beats <= '0;
      pt_valid <= 1'b0; pt_addr <= '0; pt_point <= '0;
      wr_en <= 1'b0; wr_addr <= '0; w_ld <= 1'b0; w_row <= '0;
      for (int l = 0; l < LANES; l++) begin row[l] <= FP16_ZERO; wr_data[l] <= FP16_ZERO; w_data[l] <= FP16_ZERO; end
    end else begin
      done     <= 1'b0;
      pt_valid <= 1'b0;
      wr_en    <= 1'b0;
      w_ld     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          kind_q <= kind;
          base_q <= dram_base;
          loc_q  <= loc_base;
          cnt_q  <= count;
          total  <= (kind == K_COORD) ? 32'(count) : 32'(count) * BPR;
          nreq   <= '0;
          nrcv   <= '0;
          item   <= '0;
          bi     <= '0;
          if (count == 0) done <= 1'b1;
          else state <= (kind == K_STORE) ? S_ST_RD : S_LOAD;
        end

        S_LOAD: begin
          if (dram_req && dram_gnt) nreq <= nreq + 1;
          if (dram_rvalid) begin
            nrcv  <= nrcv + 1;
            beats <= beats + 1;
            if (kind_q == K_COORD) begin
              pt_valid <= 1'b1;
              pt_addr  <= AW'(loc_q) + AW'(item);
              pt_point <= dram_rdata[47:0];
              item     <= item + 1;
            end else begin
              for (int e = 0; e < EPB; e++)
                if (int'(bi) * EPB + e < LANES) row[int'(bi) * EPB + e] <= dram_rdata[16*e +: 16];
              if (int'(bi) == BPR - 1) begin
                bi <= '0;
                item <= item + 1;
                for (int l = 0; l < LANES; l++) begin
                  if (l >= int'(bi) * EPB && l < int'(bi) * EPB + EPB)
                    wr_data[l] <= dram_rdata[16*(l - int'(bi) * EPB) +: 16];
                  else
                    wr_data[l] <= row[l];
                  w_data[l] <= (l >= int'(bi) * EPB && l < int'(bi) * EPB + EPB) ?
                               dram_rdata[16*(l - int'(bi) * EPB) +: 16] : row[l];
                end
                if (kind_q == K_FEAT) begin
                  wr_en   <= 1'b1;
                  wr_addr <= loc_q + FA'(item);
                end else begin
                  w_ld  <= 1'b1;
                  w_row <= RW'(item);
                end
              end else begin
                bi <= bi + 1;
              end
            end
            if (nrcv + 1 >= total) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end

        S_ST_RD: if (rd_gnt) state <= S_ST_WAIT;

        S_ST_WAIT: if (rd_valid) begin
          for (int l = 0; l < LANES; l++) row[l] <= rd_data[l];
          bi    <= '0;
          state <= S_ST_WR;
        end

        S_ST_WR: if (dram_gnt) begin
          nreq  <= nreq + 1;
          beats <= beats + 1;
          if (int'(bi) == BPR - 1) begin
            bi   <= '0;
            item <= item + 1;
            if (item + 1 >= cnt_q) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ST_RD;
            end
          end else begin
            bi <= bi + 1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
