// dwconv3x3_ip: depth-wise 3x3 convolution IP instance.
//
// Computes one tile of a depth-wise 3x3 convolution (stride 1, zero padding
// already present in the halo tile) for cg_n groups of PF channels, followed
// by requantization and activation. Its input is a halo tile of
// (TILE_H+2) x (TILE_W+2) pixels held in the input data buffer, laid out as
// word g*HALO_PIX + ty*(TILE_W+2) + tx; its output, a TILE_H x TILE_W tile,
// goes to the next data buffer as word g*TILE_PIX + y*TILE_W + x.
// Operation: the PF lanes of a channel group work in parallel; the nine taps
// of the window are taken one per cycle, so the IP uses PF multipliers and
// needs 9 * cg_n * TILE_H * TILE_W cycles per tile. After a one-cycle `start`
// pulse `busy` is high and `done` pulses once, 9*cg_n*TILE_H*TILE_W + 2 clock
// edges after the edge that sampled `start`. Buffer and weight reads have one
// cycle of latency. The IP type, the 3x3 depth-wise kernel and the reuse of one
// instance for all tiles and layers come from the paper; the one-tap-per-cycle
// schedule and the buffer layout are this design's own choices.
module dwconv3x3_ip
#(
  parameter int unsigned PF     = tile_arch_pkg::PF,
  parameter int unsigned FM_W   = tile_arch_pkg::FM_W,
  parameter int unsigned W_W    = tile_arch_pkg::W_W,
  parameter int unsigned ACC_W  = tile_arch_pkg::ACC_W,
  parameter int unsigned TILE_H = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W = tile_arch_pkg::TILE_W,
  parameter int unsigned MAX_CH = tile_arch_pkg::MAX_CH,
  localparam int unsigned HALO_W   = TILE_W + 2,
  localparam int unsigned HALO_PIX = (TILE_H + 2) * HALO_W,
  localparam int unsigned TILE_PIX = TILE_H * TILE_W,
  localparam int unsigned CG_MAX   = MAX_CH / PF,
  localparam int unsigned IN_AW    = $clog2(CG_MAX * HALO_PIX),
  localparam int unsigned OUT_AW   = $clog2(CG_MAX * TILE_PIX),
  localparam int unsigned WAW      = $clog2(CG_MAX * 9)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [10:0]          cg_n,      // channel groups of PF channels, >= 1
  input  logic [4:0]           shift,
  input  tile_arch_pkg::act_mode_e            act,
  output logic                 busy,
  output logic                 done,
  // input data buffer (halo tile)
  output logic [IN_AW-1:0]     in_rd_addr,
  input  logic [PF*FM_W-1:0]   in_rd_data,
  // depth-wise weights
  output logic [WAW-1:0]       w_rd_addr,
  input  logic [PF*W_W-1:0]    w_rd_data,
  // output data buffer
  output logic                 out_wr_en,
  output logic [OUT_AW-1:0]    out_wr_addr,
  output logic [PF*FM_W-1:0]   out_wr_data
);

  // Issue-side loop counters.
  logic        running;
  logic [10:0] g;
  logic [$clog2(TILE_H)-1:0] y;
  logic [$clog2(TILE_W)-1:0] x;
  logic [1:0]  ky, kx;

  logic last_tap, last_x, last_y, last_g;
  assign last_tap = (ky == 2'd2) && (kx == 2'd2);
  assign last_x   = (32'(x) == TILE_W - 1);
  assign last_y   = (32'(y) == TILE_H - 1);
  assign last_g   = (g == cg_n - 11'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      g <= '0; y <= '0; x <= '0; ky <= '0; kx <= '0;
    end else if (start && !running) begin
      running <= 1'b1;
      g <= '0; y <= '0; x <= '0; ky <= '0; kx <= '0;
    end else if (running) begin
      if (kx != 2'd2) kx <= kx + 2'd1;
      else begin
        kx <= '0;
        if (ky != 2'd2) ky <= ky + 2'd1;
        else begin
          ky <= '0;
          if (!last_x) x <= x + 1'b1;
          else begin
            x <= '0;
            if (!last_y) y <= y + 1'b1;
            else begin
              y <= '0;
              if (!last_g) g <= g + 11'd1;
              else running <= 1'b0;
            end
          end
        end
      end
    end
  end

  assign in_rd_addr = IN_AW'(32'(g) * HALO_PIX + (32'(y) + 32'(ky)) * HALO_W + 32'(x) + 32'(kx));
  assign w_rd_addr  = WAW'(32'(g) * 9 + 32'(ky) * 3 + 32'(kx));

  // Data-side stage: operands arrive one cycle after the addresses.
  logic              v1, first1, last1, final1;
  logic [OUT_AW-1:0] oaddr1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; final1 <= 1'b0; oaddr1 <= '0;
    end else begin
      v1     <= running;
      first1 <= (ky == 2'd0) && (kx == 2'd0);
      last1  <= last_tap;
      final1 <= last_tap && last_x && last_y && last_g;
      oaddr1 <= OUT_AW'(32'(g) * TILE_PIX + 32'(y) * TILE_W + 32'(x));
    end
  end

  logic signed [ACC_W-1:0] acc      [PF];
  logic signed [ACC_W-1:0] acc_next [PF];
  logic        [FM_W-1:0]  q        [PF];

  for (genvar j = 0; j < PF; j++) begin : g_lane
    logic signed [FM_W:0]  a;
    logic signed [W_W-1:0] b;
    always_comb begin
      a = $signed({1'b0, in_rd_data[j*FM_W +: FM_W]});
      b = $signed(w_rd_data[j*W_W +: W_W]);
      acc_next[j] = (first1 ? '0 : acc[j]) + ACC_W'(a * b);
    end
    always_ff @(posedge clk) begin
      if (v1) acc[j] <= acc_next[j];
    end
    act_quant #(.ACC_BITS(ACC_W), .FM_BITS(FM_W)) u_act (
      .acc(acc_next[j]), .shift(shift), .mode(act), .q(q[j]));
    assign out_wr_data[j*FM_W +: FM_W] = q[j];
  end

  assign out_wr_en   = v1 && last1;
  assign out_wr_addr = oaddr1;

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v1 && last1 && final1;
  end

  assign busy = running || v1;

endmodule
