// tile_pipeline_ctrl: tile-level pipeline controller of one Bundle pass.
//
// A Bundle pass first loads the Bundle's weights, then streams the tiles of
// the feature map, in row-major tile order, through five stages:
//   0 load (DRAM -> input buffer), 1 depth-wise 3x3, 2 point-wise 1x1,
//   3 pooling / copy, 4 write-back (output buffer -> DRAM).
// Stage k and stage k+1 share ping-pong buffer k (k = 0..3). Each stage runs
// on its own: it starts its next tile (one-cycle start pulse) as soon as it is
// idle, has tiles left, its input buffer holds a finished tile (rd_valid) and
// its output buffer has a free bank (wr_ready). When the stage's done pulse
// arrives, the same cycle commits its output buffer and releases its input
// buffer (buf_commit / buf_release are combinational from the done pulses, so
// the buffer flags are current one cycle later, when the stage may start
// again). The IPs raise done one cycle after their last buffer write, so a
// committed tile is complete. Up to five tiles are in flight, and a fast stage
// never waits for a slow stage that is not its direct neighbour in the
// buffer chain. `active` shows which stages are running. `done` pulses once
// at the end of the pass, when the last tile has been written back. cfg must
// stay constant while `busy` is high. Tile-level pipelining within a layer and
// across the IPs of a Bundle, with each stage moving on as soon as its input
// tile is ready (the load / compute / write-back overlap of the paper's
// pipeline figure), is the paper's scheme; the flag handshake and the order
// of tiles are this design's own choices.
module tile_pipeline_ctrl #(
  parameter int unsigned TILE_H = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W = tile_arch_pkg::TILE_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  tile_arch_pkg::bundle_cfg_t cfg,
  output logic                       busy,
  output logic                       done,
  output logic [4:0]                 active,
  // ping-pong buffers 0..3 (input, depth-wise out, point-wise out, output)
  input  logic [3:0]                 buf_wr_ready,
  input  logic [3:0]                 buf_rd_valid,
  output logic [3:0]                 buf_commit,
  output logic [3:0]                 buf_release,
  // off-chip data transfer
  output logic                       ld_w_start,
  output logic                       ld_t_start,
  output logic [15:0]                ld_tr,
  output logic [15:0]                ld_tc,
  input  logic                       ld_done,
  output logic                       wb_start,
  output logic [15:0]                wb_tr,
  output logic [15:0]                wb_tc,
  input  logic                       wb_done,
  // compute IPs
  output logic                       dw_start,
  input  logic                       dw_done,
  output logic                       pw_start,
  input  logic                       pw_done,
  output logic                       pool_start,
  input  logic                       pool_done
);
  import tile_arch_pkg::ST_LOAD;
  import tile_arch_pkg::ST_DW;
  import tile_arch_pkg::ST_PW;
  import tile_arch_pkg::ST_POOL;
  import tile_arch_pkg::ST_WB;

  typedef enum logic [1:0] {C_IDLE, C_WLOAD, C_RUN, C_DONE} cst_e;
  cst_e cst;

  logic [15:0] tiles_w, tiles_h;
  logic [31:0] n_tiles;
  logic [31:0] cnt [5];          // tiles started per stage
  logic [4:0]  can, dones, run_dones;

  assign tiles_w = 16'(32'(cfg.w) / TILE_W);
  assign tiles_h = 16'(32'(cfg.h) / TILE_H);

  assign dones     = {wb_done, pool_done, pw_done, dw_done, ld_done};
  assign run_dones = (cst == C_RUN) ? dones : '0;   // ld_done of the weights is not a tile
  assign buf_commit  = run_dones[3:0];
  assign buf_release = run_dones[4:1];

  always_comb begin
    for (int k = 0; k < 5; k++) begin
      can[k] = (cst == C_RUN) && !active[k] && (cnt[k] < n_tiles);
      if (k > 0) can[k] = can[k] && buf_rd_valid[k-1];
      if (k < 4) can[k] = can[k] && buf_wr_ready[k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cst <= C_IDLE; n_tiles <= '0; active <= '0;
      for (int k = 0; k < 5; k++) cnt[k] <= '0;
      ld_tr <= '0; ld_tc <= '0; wb_tr <= '0; wb_tc <= '0;
      ld_w_start <= 1'b0; ld_t_start <= 1'b0; wb_start <= 1'b0;
      dw_start <= 1'b0; pw_start <= 1'b0; pool_start <= 1'b0;
      done <= 1'b0;
    end else begin
      ld_w_start <= 1'b0; ld_t_start <= 1'b0; wb_start <= 1'b0;
      dw_start <= 1'b0; pw_start <= 1'b0; pool_start <= 1'b0;
      done <= 1'b0;
      unique case (cst)
        C_IDLE: if (start) begin
          cst        <= C_WLOAD;
          n_tiles    <= 32'(tiles_w) * 32'(tiles_h);
          for (int k = 0; k < 5; k++) cnt[k] <= '0;
          ld_tr <= '0; ld_tc <= '0; wb_tr <= '0; wb_tc <= '0;
          ld_w_start <= 1'b1;
        end
        C_WLOAD: if (ld_done) cst <= C_RUN;
        C_RUN: begin
          ld_t_start <= can[ST_LOAD];
          dw_start   <= can[ST_DW];
          pw_start   <= can[ST_PW];
          pool_start <= can[ST_POOL];
          wb_start   <= can[ST_WB];
          active     <= (active & ~dones) | can;
          for (int k = 0; k < 5; k++)
            if (can[k]) cnt[k] <= cnt[k] + 32'd1;
          // the DMA latches the tile coordinates with its start pulse
          if (ld_t_start) begin
            if (ld_tc == tiles_w - 16'd1) begin ld_tc <= '0; ld_tr <= ld_tr + 16'd1; end
            else ld_tc <= ld_tc + 16'd1;
          end
          if (wb_start) begin
            if (wb_tc == tiles_w - 16'd1) begin wb_tc <= '0; wb_tr <= wb_tr + 16'd1; end
            else wb_tc <= wb_tc + 16'd1;
          end
          if (cnt[ST_WB] == n_tiles && active == '0 && !wb_start) cst <= C_DONE;
        end
        C_DONE: begin
          done <= 1'b1;
          cst  <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  assign busy = (cst != C_IDLE);

  // a stage reports completion only while it is running
  a_done_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                    (cst == C_RUN) |-> ((dones & ~active) == '0));

endmodule
