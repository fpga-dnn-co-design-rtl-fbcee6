// bundle_harness: test bench harness for whole-network runs of the Bundle
// accelerator. It holds one tile_arch_top (feature-map width FMW, all other
// parameters at their defaults), the behavioural DRAM model, and a reference
// model of one Bundle pass (zero-padded depth-wise 3x3, requantize,
// activation, 1x1 convolution, requantize, activation, optional 2x2 max pool)
// computed directly from the DRAM contents. A testbench calls fill_input,
// fill_weights and run_pass through hierarchical references; run_pass starts
// the accelerator, waits for done, checks the loaded and written tile counts and
// compares every output value, accumulating checks and failures here.
`timescale 1ns/1ps
module bundle_harness #(
  parameter int unsigned FMW = 8
) ();
  import tile_arch_pkg::*;

  localparam int unsigned NPF  = tile_arch_pkg::PF;
  localparam int unsigned DW   = NPF * FMW;
  localparam int unsigned FRAC = FMW - 4;
  localparam int unsigned WWID = tile_arch_pkg::W_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  bundle_cfg_t cfg = '0;
  logic busy, done;
  logic [4:0] stage_active;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, wr_addr;
  logic [DW-1:0] rd_resp_data, wr_data;

  tile_arch_top #(.FM_W(FMW)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .stage_active,
    .mem_rd_req_valid(rd_req_valid), .mem_rd_req_ready(rd_req_ready),
    .mem_rd_req_addr(rd_req_addr), .mem_rd_resp_valid(rd_resp_valid),
    .mem_rd_resp_ready(rd_resp_ready), .mem_rd_resp_data(rd_resp_data),
    .mem_wr_valid(wr_valid), .mem_wr_ready(wr_ready), .mem_wr_addr(wr_addr),
    .mem_wr_data(wr_data));

  dram_model #(.WORDS(262144), .DW(DW), .ADDR_W(32), .LAT(3), .STALL(1'b1)) u_dram (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_ready,
    .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  int max_conc = 0;
  int n_ld_tiles = 0, n_wb_tiles = 0, n_overlap = 0, n_all_stages = 0, n_nonzero = 0, n_clip = 0;
  always @(posedge clk) begin
    if (rst_n && dut.u_ctrl.ld_t_start) n_ld_tiles++;
    if (rst_n && dut.u_ctrl.wb_start) n_wb_tiles++;
    // a stage starts while another stage is in the middle of a tile
    if (rst_n && (dut.u_ctrl.can != '0) && ((stage_active & ~dut.u_ctrl.dones) != '0)) n_overlap++;
    if (rst_n && $countones(stage_active) >= 3) n_all_stages++;
    if (rst_n && $countones(stage_active) > max_conc) max_conc = $countones(stage_active);
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
  end

  function automatic int lane(input logic [DW-1:0] w, input int j);
    return int'(w[j*FMW +: FMW]);
  endfunction
  function automatic int wlane(input logic [DW-1:0] w, input int j);
    logic signed [WWID-1:0] b;
    b = w[j*WWID +: WWID];
    return int'(b);
  endfunction
  function automatic int cap_of(input act_mode_e m);
    longint mx = (longint'(1) << FMW) - 1;
    longint c;
    case (m)
      ACT_RELU4: c = longint'(4) << FRAC;
      ACT_RELU8: c = longint'(8) << FRAC;
      default:   c = mx;
    endcase
    return int'((c > mx) ? mx : c);
  endfunction
  function automatic int ref_act(input longint acc, input int shift, input act_mode_e m);
    longint r;
    r = (shift == 0) ? acc : ((acc + (64'sd1 <<< (shift - 1))) >>> shift);
    if (r < 0) r = 0;
    if (r > longint'(cap_of(m))) r = longint'(cap_of(m));
    return int'(r);
  endfunction

  int exp_out [][][];
  function automatic int fm_in(input bundle_cfg_t c, input int y, input int x, input int ch);
    if (y < 0 || x < 0 || y >= int'(c.h) || x >= int'(c.w)) return 0;
    return lane(u_dram.mem[int'(c.in_base) + (y * int'(c.w) + x) * (int'(c.cin) / NPF) + ch / NPF],
                ch % NPF);
  endfunction

  task automatic compute_ref(input bundle_cfg_t c);
    int h, w, cin, cout, cgi;
    int dwo [][][];
    int pwo [][][];
    h = int'(c.h); w = int'(c.w); cin = int'(c.cin); cout = int'(c.cout);
    cgi = cin / NPF;
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
        end
      end
    end
    begin
      int oh = c.pool_en ? h / 2 : h;
      int ow = c.pool_en ? w / 2 : w;
      exp_out = new[oh];
      for (int y = 0; y < oh; y++) begin
        exp_out[y] = new[ow];
        for (int x = 0; x < ow; x++) begin
          exp_out[y][x] = new[cout];
          for (int co = 0; co < cout; co++) begin
            int m = 0;
            if (c.pool_en) begin
              for (int k = 0; k < 4; k++)
                if (pwo[2*y + k/2][2*x + k%2][co] > m) m = pwo[2*y + k/2][2*x + k%2][co];
            end else m = pwo[y][x][co];
            exp_out[y][x][co] = m;
          end
        end
      end
    end
  endtask

  // random weights in lo .. hi
  task automatic fill_weights(input bundle_cfg_t c, input int lo, input int hi);
    int n = int'(c.cin) / NPF * 9 + int'(c.cin) * (int'(c.cout) / NPF);
    for (int i = 0; i < n; i++) begin
      logic [DW-1:0] wd = '0;
      for (int j = 0; j < NPF; j++)
        wd[j*WWID +: WWID] = WWID'(int'($urandom % (hi - lo + 1)) + lo);
      u_dram.mem[int'(c.w_base) + i] = wd;
    end
  endtask

  // random input with values below max_val
  task automatic fill_input(input bundle_cfg_t c, input int max_val);
    int n = int'(c.h) * int'(c.w) * (int'(c.cin) / NPF);
    for (int i = 0; i < n; i++) begin
      logic [DW-1:0] d = '0;
      for (int j = 0; j < NPF; j++) d[j*FMW +: FMW] = FMW'($urandom % max_val);
      u_dram.mem[int'(c.in_base) + i] = d;
    end
  endtask

  task automatic run_pass(input bundle_cfg_t c, input string name);
    int oh, ow, cgo, bad, ld0, wb0, n_t, nz, clip;
    longint t0;
    compute_ref(c);
    cfg = c;
    ld0 = n_ld_tiles;
    wb0 = n_wb_tiles;
    wait (rst_n === 1'b1);
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
    bad = 0; nz = 0; clip = 0;
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int co = 0; co < int'(c.cout); co++) begin
          int got = lane(u_dram.mem[int'(c.out_base) + (y * ow + x) * cgo + co / NPF], co % NPF);
          checks++;
          if (got != 0) nz++;
          if (got == cap_of(c.act)) clip++;
          if (got != exp_out[y][x][co]) begin
            failures++;
            if (bad < 10) $display("%s: out[%0d][%0d][%0d] = %0d, expected %0d",
                                   name, y, x, co, got, exp_out[y][x][co]);
            bad++;
          end
        end
    // a pass whose outputs are all zero or all clipped would test little
    checks++;
    if (nz == 0 || nz == clip) begin
      failures++;
      $display("%s: outputs degenerate (%0d nonzero, %0d clipped)", name, nz, clip);
    end
    n_nonzero += nz;
    n_clip += clip;
    $display("%s: %0dx%0dx%0d -> %0dx%0dx%0d, %0d cycles, %0d nonzero, %0d clipped, %0d mismatches",
             name, c.h, c.w, c.cin, oh, ow, c.cout, ($time - t0) / 10, nz, clip, bad);
  endtask

endmodule
