// maxpool2x2_ip: pooling IP instance, the Bundle's down-sampling spot.
//
// With pool_en set it reduces a TILE_H x TILE_W tile of cg_n channel groups
// to (TILE_H/2) x (TILE_W/2) by 2x2 max pooling with stride 2, lane by lane;
// the output tile is stored compactly as word g*TILE_PIX + oy*(TILE_W/2) + ox.
// With pool_en clear the tile is copied unchanged (word g*TILE_PIX + pixel),
// so a Bundle without down-sampling uses the same pipeline. One buffer word is
// read per cycle: a tile takes 4*cg_n*TILE_PIX/4 = cg_n*TILE_PIX read cycles
// either way, and `done` pulses cg_n*TILE_PIX + 2 clock edges after the edge
// that sampled `start`. The paper lists max pooling among the IPs and places
// down-sampling between Bundles with a factor chosen by the search; the fixed
// factor of 2 and the copy mode are this design's own choices.
module maxpool2x2_ip #(
  parameter int unsigned PF     = tile_arch_pkg::PF,
  parameter int unsigned FM_W   = tile_arch_pkg::FM_W,
  parameter int unsigned TILE_H = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W = tile_arch_pkg::TILE_W,
  parameter int unsigned MAX_CH = tile_arch_pkg::MAX_CH,
  localparam int unsigned TILE_PIX = TILE_H * TILE_W,
  localparam int unsigned CG_MAX   = MAX_CH / PF,
  localparam int unsigned BUF_AW   = $clog2(CG_MAX * TILE_PIX)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [10:0]          cg_n,
  input  logic                 pool_en,
  output logic                 busy,
  output logic                 done,
  output logic [BUF_AW-1:0]    in_rd_addr,
  input  logic [PF*FM_W-1:0]   in_rd_data,
  output logic                 out_wr_en,
  output logic [BUF_AW-1:0]    out_wr_addr,
  output logic [PF*FM_W-1:0]   out_wr_data
);

  localparam int unsigned OH = TILE_H / 2;
  localparam int unsigned OW = TILE_W / 2;

  logic        running;
  logic [10:0] g;
  logic [$clog2(TILE_H)-1:0] oy;
  logic [$clog2(TILE_W)-1:0] ox;
  logic [1:0]  k;                     // window position, row-major

  logic last_k, last_x, last_y, last_g;
  assign last_k = pool_en ? (k == 2'd3) : 1'b1;
  assign last_x = pool_en ? (32'(ox) == OW - 1) : (32'(ox) == TILE_W - 1);
  assign last_y = pool_en ? (32'(oy) == OH - 1) : (32'(oy) == TILE_H - 1);
  assign last_g = (g == cg_n - 11'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0; g <= '0; oy <= '0; ox <= '0; k <= '0;
    end else if (start && !running) begin
      running <= 1'b1; g <= '0; oy <= '0; ox <= '0; k <= '0;
    end else if (running) begin
      if (!last_k) k <= k + 2'd1;
      else begin
        k <= '0;
        if (!last_x) ox <= ox + 1'b1;
        else begin
          ox <= '0;
          if (!last_y) oy <= oy + 1'b1;
          else begin
            oy <= '0;
            if (!last_g) g <= g + 11'd1;
            else running <= 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    if (pool_en)
      in_rd_addr = BUF_AW'(32'(g) * TILE_PIX + (2 * 32'(oy) + 32'(k[1])) * TILE_W
                           + 2 * 32'(ox) + 32'(k[0]));
    else
      in_rd_addr = BUF_AW'(32'(g) * TILE_PIX + 32'(oy) * TILE_W + 32'(ox));
  end

  logic              v1, first1, last1, final1;
  logic [BUF_AW-1:0] oaddr1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; final1 <= 1'b0; oaddr1 <= '0;
    end else begin
      v1     <= running;
      first1 <= (k == 2'd0);
      last1  <= last_k;
      final1 <= last_k && last_x && last_y && last_g;
      oaddr1 <= pool_en ? BUF_AW'(32'(g) * TILE_PIX + 32'(oy) * OW + 32'(ox))
                        : BUF_AW'(32'(g) * TILE_PIX + 32'(oy) * TILE_W + 32'(ox));
    end
  end

  logic [PF*FM_W-1:0] mx, mx_next;
  always_comb begin
    for (int j = 0; j < PF; j++) begin
      if (first1 || in_rd_data[j*FM_W +: FM_W] > mx[j*FM_W +: FM_W])
        mx_next[j*FM_W +: FM_W] = in_rd_data[j*FM_W +: FM_W];
      else
        mx_next[j*FM_W +: FM_W] = mx[j*FM_W +: FM_W];
    end
  end

  always_ff @(posedge clk) begin
    if (v1) mx <= mx_next;
  end

  assign out_wr_en   = v1 && last1;
  assign out_wr_addr = oaddr1;
  assign out_wr_data = mx_next;

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v1 && last1 && final1;
  end

  assign busy = running || v1;

endmodule
