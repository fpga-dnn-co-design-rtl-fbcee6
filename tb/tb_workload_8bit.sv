// tb_workload_8bit: runs the two 8-bit networks of the co-design results on
// the accelerator at its default parameters, as chains of Bundle passes
// through DRAM, and checks every output value of every pass:
//   DNN1-shaped: 5 Bundle replications, channels 32 -> 64 -> 128 -> 256 -> 512
//                -> 512, ReLU4, down-sampling after the first two Bundles;
//   DNN3-shaped: 4 Bundle replications, channels 48 -> 96 -> 192 -> 384 -> 384,
//                ReLU4, down-sampling after the first two Bundles.
// The published networks' input resolution and per-layer channel counts are
// not known here; the number of Bundles, the largest channel count, the map
// width and the activation are theirs, the 32x32 input and the channel
// doubling are chosen to keep the simulation short.
`timescale 1ns/1ps
module tb_workload_8bit;
  import tile_arch_pkg::*;

  bundle_harness #(.FMW(8)) h ();

  initial begin
    #(2_000_000_000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end

  task automatic run_net(input string name, input int c0, input int n_bundles,
                         input int max_ch);
    bundle_cfg_t c;
    int hw = 32, ch = c0;
    logic [31:0] src = 32'h0;
    c = '0;
    c.h = 16'(hw); c.w = 16'(hw); c.cin = 11'(ch); c.in_base = src;
    h.fill_input(c, 64);
    for (int b = 0; b < n_bundles; b++) begin
      int cout;
      cout = (2 * ch > max_ch) ? max_ch : 2 * ch;
      c.h = 16'(hw); c.w = 16'(hw); c.cin = 11'(ch); c.cout = 11'(cout);
      c.pool_en = (b < 2);
      c.act = ACT_RELU4;
      c.shift_dw = 5'd3;
      c.shift_pw = 5'(1 + $clog2(ch) / 2);
      c.in_base = src;
      c.w_base = 32'h20000;
      c.out_base = (src == 32'h0) ? 32'h10000 : 32'h0;
      h.fill_weights(c, -6, 7);
      h.run_pass(c, $sformatf("%s bundle %0d", name, b + 1));
      src = c.out_base;
      if (b < 2) hw = hw / 2;
      ch = cout;
    end
  endtask

  initial begin
    run_net("DNN1", 32, 5, 512);
    run_net("DNN3", 48, 4, 384);
    h.checks++;
    if (h.n_all_stages == 0) begin h.failures++; $display("never three stages at once"); end
    h.checks++;
    if (h.n_overlap == 0) begin h.failures++; $display("stages only ever started together"); end
    h.checks++;
    if (h.n_clip == 0) begin h.failures++; $display("ReLU4 never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
