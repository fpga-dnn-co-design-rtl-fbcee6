// tb_tile_pipeline_ctrl: drives the tile-pipeline controller with model
// stages that answer each start with a done pulse after a random delay, and
// with model ping-pong buffers that count the tiles each one holds (wr_ready
// while fewer than two, rd_valid while at least one). It checks that the
// weights are loaded before any tile; that a stage is never restarted while
// busy; that stage k starts tile t only when stage k-1 has finished tile t
// and buffer k has a free bank; that every stage is started no later than two
// cycles after it becomes able to run; that commit / release follow the done
// pulses; that loads and write-backs visit the tiles in row-major order; that
// some stage starts while another is in the middle of a tile; and that done
// comes after exactly n_tiles tiles were written back, for maps of 2x3 tiles
// and of one tile.
`timescale 1ns/1ps
module tb_tile_pipeline_ctrl;
  import tile_arch_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  bundle_cfg_t cfg;
  logic [4:0] active;
  logic [3:0] buf_wr_ready, buf_rd_valid, buf_commit, buf_release;
  logic ld_w_start, ld_t_start, wb_start, dw_start, pw_start, pool_start;
  logic ld_done, wb_done, dw_done, pw_done, pool_done;
  logic [15:0] ld_tr, ld_tc, wb_tr, wb_tc;

  tile_pipeline_ctrl dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model stages: done pulse 2..30 cycles after the start
  int cnt [5];
  logic [4:0] st_in, d_out;
  assign st_in = {wb_start, pool_start, pw_start, dw_start, ld_w_start | ld_t_start};
  assign {wb_done, pool_done, pw_done, dw_done, ld_done} = d_out;
  always @(posedge clk) begin
    for (int k = 0; k < 5; k++) begin
      d_out[k] <= 1'b0;
      if (st_in[k] && rst_n) begin
        if (cnt[k] != 0 || d_out[k]) begin failures++; $display("stage %0d restarted while busy", k); end
        cnt[k] <= 2 + int'($urandom % 29);
      end else if (cnt[k] == 1) begin
        d_out[k] <= 1'b1;
        cnt[k] <= 0;
      end else if (cnt[k] > 1) cnt[k] <= cnt[k] - 1;
    end
  end

  // model buffers and monitor
  int held [4];
  int nstart [5], ndone [5], elig_run [5];
  int n_tiles, tiles_w, n_overlap = 0;
  bit wloading, wload_done;
  logic [4:0] tile_done;
  always_comb begin
    for (int b = 0; b < 4; b++) begin
      buf_wr_ready[b] = held[b] < 2;
      buf_rd_valid[b] = held[b] > 0;
    end
  end
  assign tile_done = {wb_done, pool_done, pw_done, dw_done, ld_done && !wloading};

  always @(posedge clk) if (rst_n) begin
    logic [4:0] ts;
    ts = {wb_start, pool_start, pw_start, dw_start, ld_t_start};
    checks++;
    if (buf_commit !== (wload_done ? tile_done[3:0] : 4'b0) ||
        buf_release !== (wload_done ? tile_done[4:1] : 4'b0)) begin
      failures++; $display("%0t commit %b release %b for done %b", $time, buf_commit, buf_release, tile_done);
    end
    if (ld_w_start) begin
      wloading = 1; wload_done = 0;
      for (int k = 0; k < 5; k++) begin nstart[k] = 0; ndone[k] = 0; elig_run[k] = 0; end
    end
    if (ld_done && wloading) begin wloading = 0; wload_done = 1; end
    if (done) wload_done = 0;
    for (int k = 0; k < 5; k++) begin
      if (ts[k]) begin
        checks++;
        if (!wload_done) begin failures++; $display("stage %0d before weights were loaded", k); end
        if (k > 0 && ndone[k-1] < nstart[k] + 1) begin
          failures++; $display("stage %0d started tile %0d before its input", k, nstart[k]);
        end
        if (k < 4 && nstart[k] - ndone[k+1] > 1) begin
          failures++; $display("stage %0d started tile %0d with buffer %0d full", k, nstart[k], k);
        end
        if ((cnt[0] != 0) + (cnt[1] != 0) + (cnt[2] != 0) + (cnt[3] != 0) + (cnt[4] != 0) > 0)
          n_overlap++;
        nstart[k]++;
      end
    end
    if (ld_t_start) begin
      checks++;
      if (int'(ld_tr) != (nstart[0] - 1) / tiles_w || int'(ld_tc) != (nstart[0] - 1) % tiles_w) begin
        failures++; $display("load tile %0d at (%0d,%0d)", nstart[0] - 1, ld_tr, ld_tc);
      end
    end
    if (wb_start) begin
      checks++;
      if (int'(wb_tr) != (nstart[4] - 1) / tiles_w || int'(wb_tc) != (nstart[4] - 1) % tiles_w) begin
        failures++; $display("write-back tile %0d at (%0d,%0d)", nstart[4] - 1, wb_tr, wb_tc);
      end
    end
    for (int k = 0; k < 5; k++) if (tile_done[k]) ndone[k]++;
    for (int b = 0; b < 4; b++) held[b] += int'(buf_commit[b]) - int'(buf_release[b]);
    // eagerness: a stage able to run must be started within two cycles
    for (int k = 0; k < 5; k++) begin
      bit elig;
      elig = wload_done && cnt[k] == 0 && !d_out[k] && !ts[k] && nstart[k] < n_tiles &&
             (k == 0 || ndone[k-1] > nstart[k]) && (k == 4 || nstart[k] - ndone[k+1] < 2);
      elig_run[k] = elig ? elig_run[k] + 1 : 0;
      if (elig_run[k] == 3) begin
        failures++; $display("%0t stage %0d idle although able to run", $time, k);
      end
    end
  end

  task automatic run(input int h, input int w);
    int cyc = 0;
    cfg = '0;
    cfg.h = 16'(h); cfg.w = 16'(w); cfg.cin = 11'd16; cfg.cout = 11'd16;
    n_tiles = (h / 8) * (w / 8); tiles_w = w / 8;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    while (!done && cyc < 100000) begin @(posedge clk); cyc++; end
    checks++;
    if (ndone[4] != n_tiles || nstart[0] != n_tiles) begin
      failures++; $display("%0d tiles loaded, %0d written back, expected %0d", nstart[0], ndone[4], n_tiles);
    end
    checks++;
    if (held[0] + held[1] + held[2] + held[3] != 0) begin failures++; $display("buffers not empty"); end
    @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    foreach (cnt[k]) cnt[k] = 0;
    foreach (held[b]) held[b] = 0;
    d_out = '0; wloading = 0; wload_done = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < 6; r++) begin
      run(16, 24);
      run(8, 8);
    end
    checks++;
    if (n_overlap == 0) begin failures++; $display("stages only ever started together"); end
    $display("overlapped starts=%0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
