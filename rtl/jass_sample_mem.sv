// jass_sample_mem -- receive-sample buffer: DEPTH = 1024 words of one
// receive vector y[k] each (B = 16 antennas x 2 x 15 b = 480 b).
//
// On the chip this is a set of SRAM macros; here it is a plain synchronous
// memory array with one write port and one read port and a registered read
// (data appear the cycle after rd_en), which is how such macros behave. The
// depth is the paper's; the port arrangement is this design's choice.
module jass_sample_mem
  import jass_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  cy_t                       wdata [B],
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output cy_t                       rdata [B]
);

  typedef logic [B*2*YW-1:0] word_t;
  word_t mem [DEPTH];
  word_t rword, wword;

  always_comb begin
    for (int n = 0; n < B; n++) wword[n*2*YW +: 2*YW] = {wdata[n].re, wdata[n].im};
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wword;
    if (rd_en) rword <= mem[raddr];
  end

  always_comb begin
    for (int n = 0; n < B; n++) {rdata[n].re, rdata[n].im} = rword[n*2*YW +: 2*YW];
  end

endmodule
