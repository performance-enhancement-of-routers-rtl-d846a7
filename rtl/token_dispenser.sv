// token_dispenser: hands out downstream virtual-channel numbers ("tokens")
// for one output port. It sits inside the VC allocator, as in the paper, and
// works from the VC availability tracer's free vector.
//
// The dispenser is clocked: it keeps the next token ready in a register
// (`token`, valid when `token_valid`), so the allocator does not need a
// priority encoder on its critical path. When the allocator uses the token
// (`take` high on a rising edge) the dispenser reports it to the tracer
// (`alloc_en`, `alloc_vc`, same cycle) and on that edge loads a new token chosen
// from the free vector with the one just taken masked out, because the
// tracer itself only marks it busy on that same edge. The token is the
// lowest-numbered free VC (this design's choice). A VC released on an edge is
// offered from the following cycle at the earliest. Reset: no token.
module token_dispenser
  import noc_pkg::*;
#(
  parameter int VCS  = noc_pkg::NUM_VCS,
  localparam int VW  = $clog2(VCS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [VCS-1:0] vc_free,
  input  logic           take,
  output logic [VW-1:0]  token,
  output logic           token_valid,
  output logic           alloc_en,
  output logic [VW-1:0]  alloc_vc
);

  logic [VCS-1:0] cand;
  logic [VW-1:0]  next_token;
  logic           next_valid;

  always_comb begin
    cand = vc_free;
    if (take && token_valid) cand[token] = 1'b0;
    next_valid = 1'b0;
    next_token = '0;
    for (int v = VCS - 1; v >= 0; v--) begin
      if (cand[v]) begin
        next_valid = 1'b1;
        next_token = VW'(v);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      token       <= '0;
      token_valid <= 1'b0;
    end else begin
      token       <= next_token;
      token_valid <= next_valid;
    end
  end

  assign alloc_en = take && token_valid;
  assign alloc_vc = token;

  a_token_free : assert property (@(posedge clk) disable iff (!rst_n)
                                   alloc_en |-> vc_free[token]);

endmodule
