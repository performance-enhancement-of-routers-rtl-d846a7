// tb_flit_widths: the router at the four flit widths compared in the power
// study, 16, 32, 64 and 128 bits, each in its own harness with 300 packets per
// input port under random traffic and back-pressure. Every flit of every
// packet is checked bit for bit; all packets must arrive.
module tb_flit_widths;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int NW = 4;
  logic done [NW];
  int   c [NW], f [NW];
  int   npkts = 300;

  flit_width_harness #(.FW(16))  h16  (.clk, .rst_n, .npkts, .done(done[0]), .checks(c[0]), .failures(f[0]));
  flit_width_harness #(.FW(32))  h32  (.clk, .rst_n, .npkts, .done(done[1]), .checks(c[1]), .failures(f[1]));
  flit_width_harness #(.FW(64))  h64  (.clk, .rst_n, .npkts, .done(done[2]), .checks(c[2]), .failures(f[2]));
  flit_width_harness #(.FW(128)) h128 (.clk, .rst_n, .npkts, .done(done[3]), .checks(c[3]), .failures(f[3]));

  int checks, failures;
  task automatic report(bit timeout);
    checks = 0; failures = timeout ? 1 : 0;
    for (int k = 0; k < NW; k++) begin
      checks += c[k]; failures += f[k];
      if (!done[k]) begin failures++; $display("FAIL: width %0d did not finish", 16 << k); end
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog expired");
    report(1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);
    repeat (5) @(posedge clk);
    for (int k = 0; k < NW; k++) $display("width %0d: checks %0d failures %0d", 16 << k, c[k], f[k]);
    report(0);
    $finish;
  end
endmodule
