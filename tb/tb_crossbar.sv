// tb_crossbar: random test of the 5 x 5, 128-bit crossbar. Each output gets
// a random input selection; its flit must equal that input's flit, and the
// valid bit and VC number must pass with it. Every permutation-free pattern
// is allowed, including several outputs reading one input.
module tb_crossbar;
  import noc_pkg::*;
  localparam int P = NUM_PORTS;
  int checks = 0, failures = 0;
  logic [FLIT_WIDTH-1:0] in_flit [P], out_flit [P];
  logic valid [P], out_valid [P];
  logic [2:0] sel [P];
  logic [3:0] vc_in [P], out_vc [P];

  crossbar dut (.in_flit, .valid, .sel, .vc_in, .out_valid, .out_vc, .out_flit);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < P; i++) begin
        for (int w = 0; w < FLIT_WIDTH / 32; w++) in_flit[i][w*32 +: 32] = $urandom;
        sel[i] = 3'($urandom % P); valid[i] = 1'($urandom); vc_in[i] = 4'($urandom);
      end
      #1;
      for (int o = 0; o < P; o++) begin
        checks++;
        if (out_flit[o] !== in_flit[sel[o]] || out_valid[o] !== valid[o] || out_vc[o] !== vc_in[o]) begin
          failures++;
          if (failures < 10) $display("FAIL: output %0d sel %0d", o, sel[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
