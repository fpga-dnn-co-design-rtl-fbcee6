// tb_workload_16bit: runs a network shaped like the 16-bit result of the
// co-design flow (4 Bundle replications, at most 384 channels, 16-bit feature
// maps, plain ReLU) on the accelerator built with FM_W = 16 and every other
// parameter at its default. Channels 48 -> 96 -> 192 -> 384 -> 384 on a 32x32
// input, down-sampling after the first two Bundles; every output value of
// every pass is compared with the reference model.
`timescale 1ns/1ps
module tb_workload_16bit;
  import tile_arch_pkg::*;

  bundle_harness #(.FMW(16)) h ();

  initial begin
    #(2_000_000_000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end

  initial begin
    bundle_cfg_t c;
    int hw = 32, ch = 48;
    logic [31:0] src = 32'h0;
    c = '0;
    c.h = 16'(hw); c.w = 16'(hw); c.cin = 11'(ch); c.in_base = src;
    h.fill_input(c, 16384);
    for (int b = 0; b < 4; b++) begin
      int cout;
      cout = (2 * ch > 384) ? 384 : 2 * ch;
      c.h = 16'(hw); c.w = 16'(hw); c.cin = 11'(ch); c.cout = 11'(cout);
      c.pool_en = (b < 2);
      c.act = ACT_RELU;
      c.shift_dw = 5'd3;
      c.shift_pw = 5'(1 + $clog2(ch) / 2);
      c.in_base = src;
      c.w_base = 32'h20000;
      c.out_base = (src == 32'h0) ? 32'h10000 : 32'h0;
      h.fill_weights(c, -6, 7);
      h.run_pass(c, $sformatf("DNN2 bundle %0d", b + 1));
      src = c.out_base;
      if (b < 2) hw = hw / 2;
      ch = cout;
    end
    h.checks++;
    if (h.n_all_stages == 0) begin h.failures++; $display("never three stages at once"); end
    h.checks++;
    if (h.n_overlap == 0) begin h.failures++; $display("stages only ever started together"); end
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
