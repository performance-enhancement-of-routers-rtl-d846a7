// rr_arbiter: N:1 arbiter used by both allocators of the router.
//
// As the paper describes its arbiters, each one is sequential and made of two
// simple (fixed-)priority arbiters and a mask. The first priority arbiter sees
// only the requests at or above the mask pointer, the second sees all requests;
// the first one's grant wins when it has one. When `advance` is high and a
// request was granted, the mask register moves to the position just past the
// winner, so the last winner has the lowest priority next time (round robin).
// Lower index wins inside each priority arbiter.
//
// Interface: `req` (N requests), `gnt` (one-hot grant, combinational, same
// cycle), `gnt_idx` (its index), `gnt_valid`. `advance` commits the grant to the
// mask register on the rising clock edge; an allocator raises it only when the
// grant is actually used, so an input that loses a later stage keeps its turn.
// Reset: mask pointer 0 (plain priority order until the first grant).
module rr_arbiter #(
  parameter int N = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 gnt_valid
);
  localparam int IW = $clog2(N);

  logic [N-1:0]  mask;       // 1 for the positions at or above the pointer
  logic [IW-1:0] ptr_q;
  logic [N-1:0]  req_masked;
  logic [IW-1:0] idx_masked, idx_plain;
  logic          any_masked, any_plain;

  always_comb begin
    for (int i = 0; i < N; i++) mask[i] = (i >= int'(ptr_q));
    req_masked = req & mask;
  end

  // Two simple priority arbiters: lowest index first.
  always_comb begin
    any_masked = 1'b0;
    idx_masked = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req_masked[i]) begin
        any_masked = 1'b1;
        idx_masked = IW'(i);
      end
    end
  end

  always_comb begin
    any_plain = 1'b0;
    idx_plain = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        any_plain = 1'b1;
        idx_plain = IW'(i);
      end
    end
  end

  always_comb begin
    gnt_valid = any_plain;
    gnt_idx   = any_masked ? idx_masked : idx_plain;
    gnt       = '0;
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
    end else if (advance && gnt_valid) begin
      ptr_q <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
    end
  end

  // A grant is always one of the requests, and only one.
  a_gnt_in_req : assert property (@(posedge clk) disable iff (!rst_n)
                                   (gnt & ~req) == '0);
  a_gnt_onehot : assert property (@(posedge clk) disable iff (!rst_n)
                                   $onehot0(gnt));

endmodule
