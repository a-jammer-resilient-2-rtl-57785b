// jass_adder_tree -- adder-tree configuration of the PE array: sums the N = 16
// complex products of the PEs' multipliers into one TRW-bit complex sum.
//
// Four adder levels (16 -> 8 -> 4 -> 2 -> 1). Levels 1 and 2 are combinational
// and registered together; levels 3 and 4 are each registered. Counted from
// the issue of the operation to the PEs (operand register, product register,
// then these three registers) an inner product takes 5 cycles, the latency the
// paper quotes. A tag travels with the data so that the consumer knows which
// quantity the sum is. In the chip the adders of the PEs themselves form the
// tree; here it is a separate block with its own adders, which is this
// design's simplification (the function and latency are unchanged).
//
// Interface: in_valid/in/tag_in each cycle, out_valid/out/tag_out 3 cycles
// later. Fully pipelined: one sum per cycle.
module jass_adder_tree
  import jass_pkg::*;
#(
  parameter int unsigned N     = B,
  parameter int unsigned TAGW  = $bits(pe_cmd_t)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cpr_t             in [N],
  input  logic [TAGW-1:0]  tag_in,
  output logic             out_valid,
  output ctr_t             out,
  output logic [TAGW-1:0]  tag_out
);

  localparam int unsigned N4 = N / 4;
  localparam int unsigned N8 = N / 8;

  ctr_t l2 [N4];
  ctr_t l2_c [N4];
  ctr_t l3 [N8];
  logic [2:0] vld;
  logic [TAGW-1:0] tg [3];

  always_comb begin
    for (int j = 0; j < N4; j++) begin
      l2_c[j].re = TRW'(in[4*j].re) + TRW'(in[4*j+1].re) + TRW'(in[4*j+2].re) + TRW'(in[4*j+3].re);
      l2_c[j].im = TRW'(in[4*j].im) + TRW'(in[4*j+1].im) + TRW'(in[4*j+2].im) + TRW'(in[4*j+3].im);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      tg  <= '{default: '0};
    end else begin
      vld <= {vld[1:0], in_valid};
      tg  <= '{tag_in, tg[0], tg[1]};
    end
  end

  always_ff @(posedge clk) begin
    l2 <= l2_c;
    for (int j = 0; j < N8; j++) begin
      l3[j].re <= l2[2*j].re + l2[2*j+1].re;
      l3[j].im <= l2[2*j].im + l2[2*j+1].im;
    end
    out.re <= l3[0].re + l3[1].re;
    out.im <= l3[0].im + l3[1].im;
  end

  assign out_valid = vld[2];
  assign tag_out   = tg[2];

endmodule
