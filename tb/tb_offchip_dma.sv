// tb_offchip_dma: exercises the off-chip data transfer unit (PF = 4, 4x4
// tiles, up to 16 channels) against the DRAM model with random back-pressure.
// It loads a Bundle's weights and checks both weight-buffer regions word by
// word; loads halo tiles at a corner and in the interior of an 8x12 map and
// checks every buffer word, including the zero words outside the map; and
// writes output tiles back with and without down-sampling, concurrently with a
// tile load, checking every DRAM word of the tile.
`timescale 1ns/1ps
module tb_offchip_dma;
  import tile_arch_pkg::*;
  localparam int unsigned PF = 4, TH = 4, TW = 4, MC = 16, DW = PF * 8;
  localparam int unsigned HW = TW + 2, HP = (TH + 2) * HW, TP = TH * TW, CG = MC / PF;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  bundle_cfg_t cfg;
  logic ld_w_start = 0, ld_t_start = 0, wb_start = 0, ld_busy, ld_done, wb_busy, wb_done;
  logic [15:0] ld_tr = 0, ld_tc = 0, wb_tr = 0, wb_tc = 0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, wr_addr;
  logic [DW-1:0] rd_resp_data, wr_data;
  logic wgt_wr_en, wgt_wr_pw, in_wr_en;
  logic [$clog2(MC*CG)-1:0] wgt_wr_addr;
  logic [DW-1:0] wgt_wr_data, in_wr_data, out_rd_data;
  logic [$clog2(CG*HP)-1:0] in_wr_addr;
  logic [$clog2(CG*TP)-1:0] out_rd_addr;

  offchip_dma #(.PF(PF), .TILE_H(TH), .TILE_W(TW), .MAX_CH(MC)) dut (.*);
  dram_model #(.WORDS(4096), .DW(DW), .LAT(2), .STALL(1'b1)) u_dram (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_ready,
    .rd_resp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  logic [DW-1:0] dwm [CG*9];
  logic [DW-1:0] pwm [MC*CG];
  logic [DW-1:0] inm [CG*HP];
  logic [DW-1:0] outm [CG*TP];
  always_ff @(posedge clk) begin
    if (wgt_wr_en && !wgt_wr_pw) dwm[wgt_wr_addr] <= wgt_wr_data;
    if (wgt_wr_en && wgt_wr_pw)  pwm[wgt_wr_addr] <= wgt_wr_data;
    if (in_wr_en) inm[in_wr_addr] <= in_wr_data;
    out_rd_data <= outm[out_rd_addr];
  end

  int checks = 0, failures = 0;
  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: %h expected %h", what, got, exp);
    end
  endtask

  task automatic check_tile(input int tr, input int tc);
    int cgi = int'(cfg.cin) / PF;
    for (int g = 0; g < cgi; g++)
      for (int ty = 0; ty < TH + 2; ty++)
        for (int tx = 0; tx < TW + 2; tx++) begin
          int iy = tr * TH + ty - 1, ix = tc * TW + tx - 1;
          logic [DW-1:0] e;
          if (iy < 0 || ix < 0 || iy >= int'(cfg.h) || ix >= int'(cfg.w)) e = '0;
          else e = u_dram.mem[int'(cfg.in_base) + (iy * int'(cfg.w) + ix) * cgi + g];
          chk(inm[g*HP + ty*HW + tx], e, $sformatf("tile %0d,%0d g%0d (%0d,%0d)", tr, tc, g, ty, tx));
        end
  endtask

  task automatic check_wb(input int tr, input int tc);
    int cgo = int'(cfg.cout) / PF;
    int oh = cfg.pool_en ? TH / 2 : TH, ow = cfg.pool_en ? TW / 2 : TW;
    int wo = cfg.pool_en ? int'(cfg.w) / 2 : int'(cfg.w);
    for (int g = 0; g < cgo; g++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++)
          chk(u_dram.mem[int'(cfg.out_base) + ((tr*oh + y) * wo + tc*ow + x) * cgo + g],
              outm[g*TP + y*ow + x], $sformatf("wb %0d,%0d g%0d (%0d,%0d)", tr, tc, g, y, x));
  endtask

  initial begin
    int n_dw, n_pw;
    cfg = '{h: 16'd8, w: 16'd12, cin: 11'd8, cout: 11'd12, pool_en: 1'b0, act: ACT_RELU,
            shift_dw: 5'd0, shift_pw: 5'd0, in_base: 32'd0, w_base: 32'd1024, out_base: 32'd2048};
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // weights
    ld_w_start <= 1'b1; @(posedge clk); ld_w_start <= 1'b0;
    wait (ld_done); @(posedge clk);
    n_dw = 2 * 9; n_pw = 8 * 3;
    for (int i = 0; i < n_dw; i++) chk(dwm[i], u_dram.mem[1024 + i], "dw weight");
    for (int i = 0; i < n_pw; i++) chk(pwm[i], u_dram.mem[1024 + n_dw + i], "pw weight");
    // tiles: top-right corner, then interior
    ld_tr <= 0; ld_tc <= 2; ld_t_start <= 1'b1; @(posedge clk); ld_t_start <= 1'b0;
    wait (ld_done); @(posedge clk);
    check_tile(0, 2);
    ld_tr <= 1; ld_tc <= 1; ld_t_start <= 1'b1; @(posedge clk); ld_t_start <= 1'b0;
    wait (ld_done); @(posedge clk);
    check_tile(1, 1);
    // write-back without down-sampling, overlapped with a tile load
    for (int i = 0; i < CG * TP; i++) outm[i] = $urandom;
    wb_tr <= 1; wb_tc <= 2; wb_start <= 1'b1;
    ld_tr <= 1; ld_tc <= 0; ld_t_start <= 1'b1;
    @(posedge clk); wb_start <= 1'b0; ld_t_start <= 1'b0;
    fork
      begin wait (ld_done); end
      begin wait (wb_done); end
    join
    @(posedge clk);
    check_tile(1, 0);
    check_wb(1, 2);
    // write-back with down-sampling
    cfg.pool_en = 1'b1;
    for (int i = 0; i < CG * TP; i++) outm[i] = $urandom;
    wb_tr <= 0; wb_tc <= 1; wb_start <= 1'b1; @(posedge clk); wb_start <= 1'b0;
    wait (wb_done); @(posedge clk);
    check_wb(0, 1);
    checks++;
    if (u_dram.rd_stalls == 0 || u_dram.wr_stalls == 0) begin
      failures++; $display("no back-pressure seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
