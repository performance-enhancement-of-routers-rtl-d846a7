// tb_vc_availability_tracer: random allocations of free VCs and releases of
// busy ones, sometimes both in one cycle; a busy-bit model kept here must
// match `vc_free` after every edge. Runs until all 16 VCs were busy at once
// at least once, and checks that this happened.
module tb_vc_availability_tracer;
  import noc_pkg::*;
  localparam int V = NUM_VCS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic alloc_en = 0, rel_en = 0;
  logic [3:0] alloc_vc = 0, rel_vc = 0;
  logic [V-1:0] vc_free;

  vc_availability_tracer dut (.clk, .rst_n, .alloc_en, .alloc_vc, .rel_en, .rel_vc, .vc_free);

  bit busy [V];
  int full_seen = 0;

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
    for (int v = 0; v < V; v++) busy[v] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10000; t++) begin
      int nb;
      @(negedge clk);
      nb = 0;
      for (int v = 0; v < V; v++) begin
        chk(vc_free[v] == !busy[v], $sformatf("vc_free[%0d]", v));
        nb += int'(busy[v]);
      end
      if (nb == V) full_seen++;
      alloc_en = 0; rel_en = 0;
      // phases: fill mostly, then empty mostly
      if ($urandom % 100 < ((t / 500) % 2 == 0 ? 70 : 30)) begin
        int v0; v0 = $urandom % V;
        for (int j = 0; j < V; j++) if (!alloc_en && !busy[(v0 + j) % V]) begin alloc_en = 1; alloc_vc = 4'((v0 + j) % V); end
      end
      if ($urandom % 100 < ((t / 500) % 2 == 0 ? 30 : 70)) begin
        int v0; v0 = $urandom % V;
        for (int j = 0; j < V; j++) if (!rel_en && busy[(v0 + j) % V]) begin rel_en = 1; rel_vc = 4'((v0 + j) % V); end
      end
      @(posedge clk);
      if (alloc_en) busy[alloc_vc] = 1;
      if (rel_en)   busy[rel_vc] = 0;
    end
    chk(full_seen > 0, "all VCs never busy at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
