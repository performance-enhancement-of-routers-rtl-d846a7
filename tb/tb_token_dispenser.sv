// tb_token_dispenser: the dispenser is driven from a free-VC vector kept here
// the way the availability tracer keeps it (a taken token turns busy on the
// taking edge; random releases). After every edge the token must be the
// lowest VC that was free on that edge, minus the token just taken; it must
// be valid exactly when such a VC existed, and `alloc_en`/`alloc_vc` must
// report each take in the same cycle. No token may ever be handed out twice
// before it is released.
module tb_token_dispenser;
  import noc_pkg::*;
  localparam int V = NUM_VCS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [V-1:0] vc_free = '1;
  logic take = 0, token_valid, alloc_en;
  logic [3:0] token, alloc_vc;

  token_dispenser dut (.clk, .rst_n, .vc_free, .take, .token, .token_valid, .alloc_en, .alloc_vc);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_tok; bit exp_ok; int taken = 0, empty_seen = 0;
    repeat (2) @(posedge clk);
    #1 chk(!token_valid, "no token in reset");
    rst_n = 1'b1;
    @(posedge clk);   // first token loads
    for (int t = 0; t < 10000; t++) begin
      logic [V-1:0] cand;
      @(negedge clk);
      take = ($urandom % 100) < 60;
      #1;
      chk(alloc_en == (take && token_valid), "alloc_en");
      if (token_valid) begin
        chk(vc_free[token], "token not free");
        chk(alloc_vc == token, "alloc_vc");
      end else empty_seen++;
      // expected next token: lowest of (free & ~taken)
      cand = vc_free;
      if (take && token_valid) begin cand[token] = 1'b0; taken++; end
      exp_ok = cand != '0; exp_tok = 0;
      for (int v = V - 1; v >= 0; v--) if (cand[v]) exp_tok = v;
      @(posedge clk);
      #1;
      chk(token_valid == exp_ok, "token_valid");
      if (exp_ok) chk(int'(token) == exp_tok, $sformatf("token %0d expected %0d", token, exp_tok));
      // tracer model: taken VC busy from this edge on; random releases
      vc_free = cand;
      if ($urandom % 100 < 45) vc_free[$urandom % V] = 1'b1;
    end
    chk(taken > 100 && empty_seen > 0, "takes or the empty case never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
