// tb_ubs: random test of the unified buffer structure (16 slots x 128 bits).
// A shadow copy of the slots, kept here, predicts `slot_free` (TYPE bits 00)
// every cycle and the data of every read, which must appear with `rd_valid`
// exactly one cycle after the read request. Writes go to random free slots
// with random non-free TYPE bits; reads take random used slots; both may
// happen in the same cycle. The slot freed by a read must show free on the
// next cycle.
module tb_ubs;
  import noc_pkg::*;
  localparam int S = NUM_SLOTS, FW = FLIT_WIDTH;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [3:0] wr_slot = 0, rd_slot = 0;
  logic [FW-1:0] wr_flit = '0, rd_flit;
  logic [S-1:0] slot_free;

  ubs dut (.clk, .rst_n, .wr_en, .wr_slot, .wr_flit, .rd_en, .rd_slot, .rd_flit, .rd_valid, .slot_free);

  logic [FW-1:0] shadow [S];
  bit used [S];
  bit exp_rv = 0;
  logic [FW-1:0] exp_rd;

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
    for (int s = 0; s < S; s++) used[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      // outputs of the previous edge
      chk(rd_valid == exp_rv, "rd_valid timing");
      if (exp_rv) chk(rd_flit == exp_rd, "read data");
      for (int s = 0; s < S; s++) chk(slot_free[s] == !used[s], $sformatf("slot_free[%0d]", s));
      // new requests
      wr_en = 0; rd_en = 0;
      if ($urandom % 100 < 55) begin
        int s0; s0 = $urandom % S;
        for (int j = 0; j < S; j++) if (!wr_en && !used[(s0 + j) % S]) begin
          wr_en = 1; wr_slot = 4'((s0 + j) % S);
        end
      end
      if ($urandom % 100 < 50) begin
        int s0; s0 = $urandom % S;
        for (int j = 0; j < S; j++) if (!rd_en && used[(s0 + j) % S]) begin
          rd_en = 1; rd_slot = 4'((s0 + j) % S);
        end
      end
      for (int w = 0; w < FW / 32; w++) wr_flit[w*32 +: 32] = $urandom;
      wr_flit[1:0] = 2'(1 + $urandom % 3);
      @(posedge clk);
      exp_rv = rd_en;
      if (rd_en) begin exp_rd = shadow[rd_slot]; used[rd_slot] = 0; end
      if (wr_en) begin shadow[wr_slot] = wr_flit; used[wr_slot] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
