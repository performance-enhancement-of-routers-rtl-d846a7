// tb_rr_arbiter: self-checking test of the masked round-robin arbiter at the
// two sizes the router uses, 16:1 and 5:1. A reference pointer kept here
// predicts every grant: the lowest request at or above the pointer, else the
// lowest request; the pointer moves past the winner only when `advance` is set.
// Also checks strict rotation: with all requests set and advance high, a 16:1
// arbiter grants 0,1,...,15,0,...
module tb_rr_arbiter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] req16, gnt16; logic [3:0] idx16; logic ok16, adv16;
  logic [4:0]  req5,  gnt5;  logic [2:0] idx5;  logic ok5,  adv5;

  rr_arbiter #(.N(16)) u16 (.clk, .rst_n, .req(req16), .advance(adv16), .gnt(gnt16), .gnt_idx(idx16), .gnt_valid(ok16));
  rr_arbiter #(.N(5))  u5  (.clk, .rst_n, .req(req5),  .advance(adv5),  .gnt(gnt5),  .gnt_idx(idx5),  .gnt_valid(ok5));

  function automatic int ref_pick(logic [15:0] r, int n, int ptr);
    for (int k = 0; k < n; k++) if (k >= ptr && r[k]) return k;
    for (int k = 0; k < n; k++) if (r[k]) return k;
    return -1;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int p16 = 0, p5 = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req16 = '0; req5 = '0; adv16 = 0; adv5 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // rotation with all requests
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      req16 = '1; adv16 = 1;
      #1;
      chk(ok16 && idx16 == 4'(k % 16), $sformatf("rotation step %0d got %0d", k, idx16));
      @(posedge clk);
    end
    p16 = 40 % 16;
    // random
    for (int t = 0; t < 20000; t++) begin
      int e16, e5;
      @(negedge clk);
      req16 = 16'($urandom); if ($urandom % 4 == 0) req16 = '0;
      req5  = 5'($urandom);
      adv16 = $urandom % 2; adv5 = $urandom % 2;
      #1;
      e16 = ref_pick(req16, 16, p16);
      e5  = ref_pick({11'b0, req5}, 5, p5);
      chk(ok16 == (e16 >= 0), "16:1 valid");
      if (e16 >= 0) chk(int'(idx16) == e16 && gnt16 == 16'(1 << e16), $sformatf("16:1 grant %0d expected %0d", idx16, e16));
      chk(ok5 == (e5 >= 0), "5:1 valid");
      if (e5 >= 0) chk(int'(idx5) == e5 && gnt5 == 5'(1 << e5), $sformatf("5:1 grant %0d expected %0d", idx5, e5));
      @(posedge clk);
      if (adv16 && e16 >= 0) p16 = (e16 + 1) % 16;
      if (adv5 && e5 >= 0)   p5  = (e5 + 1) % 5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
