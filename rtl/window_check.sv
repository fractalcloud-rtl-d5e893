// window_check: skip logic of the RSPU for farthest point sampling.
//
// The local buffer keeps one mask bit per point: 1 = still a candidate,
// 0 = already sampled. During an FPS traversal the unit looks at a window of
// the mask bits that follow the current address, and a lowest-one detector
// (a priority encoder) finds the nearest remaining candidate. The next
// address is the current address plus that offset, so sampled points are
// never read or recomputed. If the window holds no 1, the address advances
// by the full window width and the search continues from there.
//
// Interface: `window[i]` is the mask bit of address addr+1+i. Purely
// combinational; the RSPU registers `next_addr`.
//
// The window/LOD/adder structure follows the paper's description of the
// window-check module. The window width W is not given there and is a
// parameter of this design (default 8).
module window_check #(
  parameter int unsigned W      = 8,
  parameter int unsigned ADDR_W = 10
) (
  input  logic [W-1:0]      window,
  input  logic [ADDR_W-1:0] addr,
  output logic [ADDR_W-1:0] next_addr,
  output logic              hit
);
  logic [ADDR_W-1:0] offset;

  // Lowest-one detector.
  always_comb begin
    offset = ADDR_W'(W);
    hit    = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (window[i]) begin
        offset = ADDR_W'(i + 1);
        hit    = 1'b1;
      end
    end
  end

  assign next_addr = addr + offset;
endmodule
