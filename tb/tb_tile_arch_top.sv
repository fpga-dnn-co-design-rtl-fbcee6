// tb_tile_arch_top: end-to-end test of the Tile-Arch Bundle accelerator at its
// default parameters (PF = 16, 8x8 tiles, 8-bit feature maps, up to 512
// channels).
//
// Three Bundle passes run back to back on the same accelerator, each reading
// the previous pass's output from the DRAM model, as Bundle replications of a
// network do:
//   pass 0: 16x32 map, 32 -> 48 channels, ReLU4, 2x2 down-sampling
//   pass 1:  8x16 map (pass 0's output), 48 -> 32 channels, ReLU8, no down-sampling
//   pass 2: 16x16 map generated fresh, 16 -> 16 channels, ReLU
// Before each pass a reference model in this file computes the expected
// output from the DRAM contents (zero-padded depth-wise 3x3, requantize,
// activation, 1x1 convolution, requantize, activation, max-pool); after the
// pass every output word is compared. The DRAM model withholds ready at random
// cycles. The test also counts the mechanisms of the design and fails if one
// never occurred: the tile pipeline with three or more stages running at once, zero
// halo fill, DRAM back-pressure on both channels, pooling and copy modes,
// clipping by the bounded activations, channel expansion, and stages starting
// a tile while another stage is still in the middle of one (the decoupled,
// not lock-step, pipeline). It checks that each pass loaded and wrote back
// exactly n_tiles tiles.
`timescale 1ns/1ps
module tb_tile_arch_top;
  import tile_arch_pkg::*;

  localparam int unsigned DW    = tile_arch_pkg::PF * tile_arch_pkg::FM_W;
  localparam int unsigned NPF   = tile_arch_pkg::PF;
  localparam int unsigned FRAC  = tile_arch_pkg::FM_W - 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  bundle_cfg_t cfg;
  logic busy, done;
  logic [4:0] stage_active;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, wr_addr;
  logic [DW-1:0] rd_resp_data, wr_data;

  tile_arch_top dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .stage_active,
    .mem_rd_req_valid(rd_req_valid), .mem_rd_req_ready(rd_req_ready),
    .mem_rd_req_addr(rd_req_addr), .mem_rd_resp_valid(rd_resp_valid),
    .mem_rd_resp_ready(rd_resp_ready), .mem_rd_resp_data(rd_resp_data),
    .mem_wr_valid(wr_valid), .mem_wr_ready(wr_ready), .mem_wr_addr(wr_addr),
    .mem_wr_data(wr_data));

  dram_model #(.WORDS(65536), .DW(DW), .ADDR_W(32), .LAT(3), .STALL(1'b1)) u_dram (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_ready,
    .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;

  // mechanism counters
  int max_conc = 0;
  int n_all_stages = 0, n_zero_fill = 0, n_pool_pass = 0, n_copy_pass = 0;
  int n_clip = 0, n_expand = 0, n_ld_tiles = 0, n_wb_tiles = 0, n_overlap = 0, n_zero_out = 0, n_mid_out = 0;
  always @(posedge clk) begin
    if ($countones(stage_active) >= 3) n_all_stages++;
    if ($countones(stage_active) > max_conc) max_conc = $countones(stage_active);
    if (dut.u_dma.pop && dut.u_dma.head.zero) n_zero_fill++;
    if (dut.u_ctrl.ld_t_start) n_ld_tiles++;
    if (dut.u_ctrl.wb_start) n_wb_tiles++;
    // a stage starts while another stage is in the middle of a tile
    if ((dut.u_ctrl.can != '0) && ((stage_active & ~dut.u_ctrl.dones) != '0)) n_overlap++;
  end

  initial begin
    #(400_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference
  function automatic int lane(input logic [DW-1:0] w, input int j);
    return int'(w[j*tile_arch_pkg::FM_W +: tile_arch_pkg::FM_W]);
  endfunction
  function automatic int wlane(input logic [DW-1:0] w, input int j);
    logic signed [tile_arch_pkg::W_W-1:0] b;
    b = w[j*tile_arch_pkg::W_W +: tile_arch_pkg::W_W];
    return int'(b);
  endfunction
  function automatic int ref_act(input longint acc, input int shift, input act_mode_e m);
    longint r;
    longint cap;
    r = (shift == 0) ? acc : ((acc + (64'sd1 <<< (shift - 1))) >>> shift);
    case (m)
      ACT_RELU4: cap = 4 << FRAC;
      ACT_RELU8: cap = (8 << FRAC) > 255 ? 255 : (8 << FRAC);
      default:   cap = (1 << tile_arch_pkg::FM_W) - 1;
    endcase
    if (r < 0) r = 0;
    if (r > cap) r = cap;
    return int'(r);
  endfunction

  // Expected output [oy][ox][c] of one pass, computed from the DRAM image.
  int exp_out [][][];
  function automatic int fm_in(input bundle_cfg_t c, input int y, input int x, input int ch);
    int cg;
    cg = int'(c.cin) / NPF;
    if (y < 0 || x < 0 || y >= int'(c.h) || x >= int'(c.w)) return 0;
    return lane(u_dram.mem[int'(c.in_base) + (y * int'(c.w) + x) * cg + ch / NPF], ch % NPF);
  endfunction

  task automatic compute_ref(input bundle_cfg_t c);
    int h, w, cin, cout, cgi, cgo, oh, ow;
    int dwo [][][];
    int pwo [][][];
    h = int'(c.h); w = int'(c.w); cin = int'(c.cin); cout = int'(c.cout);
    cgi = cin / NPF; cgo = cout / NPF;
    dwo = new[h]; pwo = new[h];
    for (int y = 0; y < h; y++) begin
      dwo[y] = new[w]; pwo[y] = new[w];
      for (int x = 0; x < w; x++) begin
        dwo[y][x] = new[cin]; pwo[y][x] = new[cout];
        for (int ch = 0; ch < cin; ch++) begin
          longint acc = 0;
          for (int k = 0; k < 9; k++)
            acc += longint'(fm_in(c, y + k / 3 - 1, x + k % 3 - 1, ch)) *
                   longint'(wlane(u_dram.mem[int'(c.w_base) + (ch / NPF) * 9 + k], ch % NPF));
          dwo[y][x][ch] = ref_act(acc, int'(c.shift_dw), c.act);
        end
        for (int co = 0; co < cout; co++) begin
          longint acc = 0;
          for (int ci = 0; ci < cin; ci++)
            acc += longint'(dwo[y][x][ci]) *
                   longint'(wlane(u_dram.mem[int'(c.w_base) + cgi * 9 + (co / NPF) * cin + ci],
                                  co % NPF));
          pwo[y][x][co] = ref_act(acc, int'(c.shift_pw), c.act);
          if (c.act != ACT_RELU && pwo[y][x][co] == (c.act == ACT_RELU4 ? 64 : 128)) n_clip++;
          if (pwo[y][x][co] == 0) n_zero_out++;
          else if (pwo[y][x][co] < 64) n_mid_out++;
        end
      end
    end
    oh = c.pool_en ? h / 2 : h;
    ow = c.pool_en ? w / 2 : w;
    exp_out = new[oh];
    for (int y = 0; y < oh; y++) begin
      exp_out[y] = new[ow];
      for (int x = 0; x < ow; x++) begin
        exp_out[y][x] = new[cout];
        for (int co = 0; co < cout; co++) begin
          if (c.pool_en) begin
            int m = 0;
            for (int k = 0; k < 4; k++)
              if (pwo[2*y + k/2][2*x + k%2][co] > m) m = pwo[2*y + k/2][2*x + k%2][co];
            exp_out[y][x][co] = m;
          end else exp_out[y][x][co] = pwo[y][x][co];
        end
      end
    end
    if (cgo == 0) $display("bad configuration");
  endtask

  task automatic fill_weights(input bundle_cfg_t c, input int range_w);
    int n = int'(c.cin) / NPF * 9 + int'(c.cin) * (int'(c.cout) / NPF);
    for (int i = 0; i < n; i++) begin
      logic [DW-1:0] wd = '0;
      for (int j = 0; j < NPF; j++)
        wd[j*tile_arch_pkg::W_W +: tile_arch_pkg::W_W] =
          8'(int'($urandom % (2 * range_w + 1)) - range_w);
      u_dram.mem[int'(c.w_base) + i] = wd;
    end
  endtask

  task automatic fill_input(input bundle_cfg_t c);
    int n = int'(c.h) * int'(c.w) * (int'(c.cin) / NPF);
    for (int i = 0; i < n; i++) begin
      logic [DW-1:0] d;
      for (int j = 0; j < DW / 32; j++) d[j*32 +: 32] = $urandom;
      u_dram.mem[int'(c.in_base) + i] = d;
    end
  endtask

  task automatic run_pass(input bundle_cfg_t c, input string name);
    int oh, ow, cgo, bad, ld0, wb0, n_t;
    longint t0;
    compute_ref(c);
    if (c.cout != c.cin) n_expand++;
    if (c.pool_en) n_pool_pass++; else n_copy_pass++;
    cfg = c;
    ld0 = n_ld_tiles;
    wb0 = n_wb_tiles;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = $time;
    wait (done === 1'b1);
    @(posedge clk);
    n_t = (int'(c.h) / tile_arch_pkg::TILE_H) * (int'(c.w) / tile_arch_pkg::TILE_W);
    checks++;
    if (n_ld_tiles - ld0 != n_t || n_wb_tiles - wb0 != n_t) begin
      failures++;
      $display("%s: %0d tiles loaded, %0d written back, expected %0d", name,
               n_ld_tiles - ld0, n_wb_tiles - wb0, n_t);
    end
    oh = c.pool_en ? int'(c.h) / 2 : int'(c.h);
    ow = c.pool_en ? int'(c.w) / 2 : int'(c.w);
    cgo = int'(c.cout) / NPF;
    bad = 0;
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int co = 0; co < int'(c.cout); co++) begin
          int got = lane(u_dram.mem[int'(c.out_base) + (y * ow + x) * cgo + co / NPF], co % NPF);
          checks++;
          if (got != exp_out[y][x][co]) begin
            failures++;
            if (bad < 10) $display("%s: out[%0d][%0d][%0d] = %0d, expected %0d",
                                   name, y, x, co, got, exp_out[y][x][co]);
            bad++;
          end
        end
    $display("%s: %0d cycles, %0d mismatches", name, ($time - t0) / 10, bad);
  endtask

  initial begin
    bundle_cfg_t c0, c1, c2;
    cfg = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    c0 = '{h: 16'd16, w: 16'd32, cin: 11'd32, cout: 11'd48, pool_en: 1'b1, act: ACT_RELU4,
           shift_dw: 5'd5, shift_pw: 5'd6, in_base: 32'h0000, w_base: 32'h4000,
           out_base: 32'h8000};
    fill_input(c0);
    fill_weights(c0, 20);
    run_pass(c0, "pass0");

    c1 = '{h: 16'd8, w: 16'd16, cin: 11'd48, cout: 11'd32, pool_en: 1'b0, act: ACT_RELU8,
           shift_dw: 5'd4, shift_pw: 5'd6, in_base: 32'h8000, w_base: 32'h5000,
           out_base: 32'hC000};
    fill_weights(c1, 20);
    run_pass(c1, "pass1");

    c2 = '{h: 16'd16, w: 16'd16, cin: 11'd16, cout: 11'd16, pool_en: 1'b0, act: ACT_RELU,
           shift_dw: 5'd4, shift_pw: 5'd7, in_base: 32'h1000, w_base: 32'h6000,
           out_base: 32'hE000};
    fill_input(c2);
    fill_weights(c2, 12);
    run_pass(c2, "pass2");

    // every mechanism must have occurred
    checks++; if (n_all_stages == 0) begin failures++; $display("never three stages at once"); end
    checks++; if (n_overlap == 0) begin failures++; $display("stages only ever started together"); end
    checks++; if (n_zero_fill == 0) begin failures++; $display("halo zero fill never seen"); end
    checks++; if (u_dram.rd_stalls == 0) begin failures++; $display("no read back-pressure"); end
    checks++; if (u_dram.wr_stalls == 0) begin failures++; $display("no write back-pressure"); end
    checks++; if (n_pool_pass == 0 || n_copy_pass == 0) begin failures++; $display("pool/copy"); end
    checks++; if (n_clip == 0) begin failures++; $display("activation clipping never seen"); end
    checks++; if (n_mid_out == 0 || n_zero_out == 0) begin failures++; $display("outputs not spread"); end
    checks++; if (n_expand == 0) begin failures++; $display("no channel expansion"); end
    $display("mechanisms: 3+-stage cycles=%0d max running=%0d overlapped starts=%0d zero-fill=%0d rd-stalls=%0d wr-stalls=%0d pool=%0d copy=%0d clip=%0d zero=%0d mid=%0d expand=%0d",
             n_all_stages, max_conc, n_overlap, n_zero_fill, u_dram.rd_stalls, u_dram.wr_stalls, n_pool_pass,
             n_copy_pass, n_clip, n_zero_out, n_mid_out, n_expand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
