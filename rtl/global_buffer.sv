// global_buffer: multi-banked on-chip feature/weight buffer.
//
// ROWS rows of LANES FP16 values, interleaved over BANKS single-ported
// banks by the low address bits (row r lives in bank r mod BANKS). NRD read
// ports and one write port share the banks. Each cycle every bank serves at
// most one access: the write has priority, then read ports in a rotating
// order. A granted read (`rd_gnt`) returns its row with `rd_valid` on the
// next cycle; a refused request must be held and is counted in `conflicts`.
//
// The paper specifies a 274 KB multi-banked global buffer holding features,
// weights and coordinates. Here coordinates live in the fractal engine and
// weights in the systolic array cells, so this buffer is the feature part;
// the bank count and port arrangement are not given in the paper and are
// this design's choice.
module global_buffer
  import fc_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned ROWS  = 8192,
  parameter int unsigned BANKS = 8,
  parameter int unsigned NRD   = 3,
  parameter int unsigned FA    = $clog2(ROWS),
  parameter int unsigned BKW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  parameter int unsigned PW    = (NRD > 1) ? $clog2(NRD) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [FA-1:0] wr_addr,
  input  fp16_t         wr_data [LANES],
  input  logic          rd_req  [NRD],
  input  logic [FA-1:0] rd_addr [NRD],
  output logic          rd_gnt  [NRD],
  output logic          rd_valid[NRD],
  output fp16_t         rd_data [NRD][LANES],
  output logic [31:0]   conflicts
);
  localparam int unsigned BD = ROWS / BANKS;
  localparam int unsigned RWB = (BD > 1) ? $clog2(BD) : 1;

  fp16_t mem [BANKS][BD][LANES];

  logic [PW-1:0] prio;
  logic [BANKS-1:0] taken;
  logic [31:0] nconf;

  function automatic logic [BKW-1:0] bank_of(logic [FA-1:0] a);
    return BKW'(a % FA'(BANKS));
  endfunction

  // row inside the bank
  function automatic logic [RWB-1:0] row_of(logic [FA-1:0] a);
    return RWB'(a / FA'(BANKS));
  endfunction

  always_comb begin
    taken = '0;
    nconf = '0;
    if (wr_en) taken[bank_of(wr_addr)] = 1'b1;
    for (int p = 0; p < NRD; p++) rd_gnt[p] = 1'b0;
    for (int s = 0; s < NRD; s++) begin
      int p;
      p = (int'(prio) + s) % NRD;
      if (rd_req[p]) begin
        if (!taken[bank_of(rd_addr[p])]) begin
          rd_gnt[p] = 1'b1;
          taken[bank_of(rd_addr[p])] = 1'b1;
        end else begin
          nconf = nconf + 1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio      <= '0;
      conflicts <= '0;
      for (int p = 0; p < NRD; p++) begin
        rd_valid[p] <= 1'b0;
        for (int l = 0; l < LANES; l++) rd_data[p][l] <= FP16_ZERO;
      end
    end else begin
      prio      <= (int'(prio) == NRD - 1) ? '0 : prio + 1;
      conflicts <= conflicts + nconf;
      if (wr_en)
        for (int l = 0; l < LANES; l++) mem[bank_of(wr_addr)][row_of(wr_addr)][l] <= wr_data[l];
      for (int p = 0; p < NRD; p++) begin
        rd_valid[p] <= rd_gnt[p];
        if (rd_gnt[p])
          for (int l = 0; l < LANES; l++) rd_data[p][l] <= mem[bank_of(rd_addr[p])][row_of(rd_addr[p])][l];
      end
    end
  end
endmodule
