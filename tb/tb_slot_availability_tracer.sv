// tb_slot_availability_tracer: random test of the slot tracer. For a random
// free-slot vector it must pick the lowest free slot at once, report whether
// any slot is free, count the free slots on the next cycle, and give one
// credit pulse on the cycle after each flit leaves. Includes the all-full and
// all-free vectors.
module tb_slot_availability_tracer;
  import noc_pkg::*;
  localparam int S = NUM_SLOTS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [S-1:0] slot_free = '1;
  logic flit_out = 0, has_free, credit_out;
  logic [3:0] alloc_slot;
  logic [4:0] free_count;

  slot_availability_tracer dut (.clk, .rst_n, .slot_free, .flit_out, .alloc_slot, .has_free, .free_count, .credit_out);

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
    int prev_cnt; bit prev_out;
    repeat (2) @(posedge clk);
    #1 chk(free_count == 5'(S), "reset count");
    rst_n = 1'b1;
    prev_cnt = S; prev_out = 0;
    for (int t = 0; t < 10000; t++) begin
      int lo, cnt;
      @(negedge clk);
      chk(int'(free_count) == prev_cnt, $sformatf("free_count %0d expected %0d", free_count, prev_cnt));
      chk(credit_out == prev_out, "credit pulse");
      case (t % 50)
        0: slot_free = '0;
        1: slot_free = '1;
        default: slot_free = 16'($urandom) & 16'($urandom);
      endcase
      flit_out = 1'($urandom);
      #1;
      lo = -1; cnt = 0;
      for (int s = S - 1; s >= 0; s--) if (slot_free[s]) lo = s;
      for (int s = 0; s < S; s++) cnt += int'(slot_free[s]);
      chk(has_free == (lo >= 0), "has_free");
      if (lo >= 0) chk(int'(alloc_slot) == lo, $sformatf("alloc_slot %0d expected %0d", alloc_slot, lo));
      @(posedge clk);
      prev_cnt = cnt; prev_out = flit_out;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
