// config_module: turns the control CPU's word stream into module instructions.
//
// The CPU writes 32-bit control words (`cfg_valid`/`cfg_data`, accepted
// while `cfg_ready`) into a FIFO. The first word of an instruction names
// its target module in bits [31:28]; each target has a fixed instruction
// length (LEN[target] words, at most MAXW). The module collects that many
// words, then waits until the target reports ready (`tgt_ready`) and issues
// the instruction with a one-cycle `ins_valid[target]` pulse and the words
// in `ins_data` (word 0 in the low 32 bits). After an issue it waits HOLD
// cycles so the target's busy flag is visible before the next issue.
// `wait_cycles` counts cycles a complete instruction waited for its target.
//
// Buffering, segmenting by per-module instruction length and dispatching
// are the paper's description of the configuration module; the word
// format, FIFO depth and hold-off are this design's.
module config_module #(
  parameter int unsigned NT    = 4,
  parameter int unsigned MAXW  = 4,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned HOLD  = 2,
  parameter logic [NT-1:0][3:0] LEN = {4'd3, 4'd2, 4'd2, 4'd1}  // target 0 in the low nibble
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_valid,
  input  logic [31:0]        cfg_data,
  output logic               cfg_ready,
  input  logic [NT-1:0]      tgt_ready,
  output logic [NT-1:0]      ins_valid,
  output logic [32*MAXW-1:0] ins_data,
  output logic               empty,
  output logic [31:0]        instrs,
  output logic [31:0]        wait_cycles,
  output logic [31:0]        bad_target
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned TW = (NT > 1) ? $clog2(NT) : 1;

  logic [31:0] fifo [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          pop;

  logic [32*MAXW-1:0] acc;
  logic [3:0]         nw, need, tgt;
  logic               full_ins;
  logic [3:0]         hold;

  assign cfg_ready = (cnt < (PW+1)'(DEPTH));
  assign pop       = (cnt != 0) && !full_ins;
  assign empty     = (cnt == 0) && !full_ins && (nw == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      acc <= '0; nw <= '0; need <= '0; tgt <= '0; full_ins <= 1'b0; hold <= '0;
      ins_valid <= '0; ins_data <= '0; instrs <= '0; wait_cycles <= '0; bad_target <= '0;
      for (int i = 0; i < DEPTH; i++) fifo[i] <= '0;
    end else begin
      ins_valid <= '0;
      if (hold != 0) hold <= hold - 1;
      if (cfg_valid && cfg_ready) begin
        fifo[wp] <= cfg_data;
        wp <= wp + 1;
      end
      cnt <= cnt + ((cfg_valid && cfg_ready) ? 1 : 0) - (pop ? 1 : 0);

      // segmenting
      if (pop) begin
        rp <= rp + 1;
        if (nw == 0) begin
          if (int'(fifo[rp][31:28]) >= NT) begin
            bad_target <= bad_target + 1;      // dropped
          end else begin
            tgt  <= fifo[rp][31:28];
            need <= LEN[fifo[rp][31:28]];
            acc  <= {{(32*(MAXW-1)){1'b0}}, fifo[rp]};
            if (LEN[fifo[rp][31:28]] <= 1) full_ins <= 1'b1;
            else nw <= 1;
          end
        end else begin
          acc[32*nw +: 32] <= fifo[rp];
          if (nw + 1 >= need) begin
            nw       <= '0;
            full_ins <= 1'b1;
          end else begin
            nw <= nw + 1;
          end
        end
      end

      // dispatching
      if (full_ins) begin
        if (tgt_ready[tgt[TW-1:0]] && hold == 0) begin
          ins_valid[tgt[TW-1:0]] <= 1'b1;
          ins_data       <= acc;
          full_ins       <= 1'b0;
          hold           <= 4'(HOLD);
          instrs         <= instrs + 1;
        end else begin
          wait_cycles <= wait_cycles + 1;
        end
      end
    end
  end
endmodule
