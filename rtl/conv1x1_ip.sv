// conv1x1_ip: point-wise (1x1) convolution IP instance.
//
// Computes one tile of a 1x1 convolution from cin input channels to
// cog_n*PF output channels, followed by requantization and activation. The
// channel-expansion factors of a Bundle are realised here: cout may differ
// from cin. Input and output tiles are TILE_H x TILE_W pixels in data buffers,
// laid out as word g*TILE_PIX + pixel with PF channels per word. Point-wise
// weights are read from the weight buffer at word og*cin + ci.
// Operation: PF output channels of one pixel are computed in parallel; one
// input channel is taken per cycle, so the IP uses PF multipliers and needs
// cin * cog_n * TILE_H * TILE_W cycles per tile. After a one-cycle `start`
// pulse, `done` pulses cin*cog_n*TILE_H*TILE_W + 2 clock edges after the
// edge that sampled `start`. Reads have one cycle of latency. The IP type and
// its reuse across tiles and layers come from the paper; the loop order, the
// parallelisation over output channels and the layouts are this design's
// own choices. PF must be a power of two.
module conv1x1_ip #(
  parameter int unsigned PF     = tile_arch_pkg::PF,
  parameter int unsigned FM_W   = tile_arch_pkg::FM_W,
  parameter int unsigned W_W    = tile_arch_pkg::W_W,
  parameter int unsigned ACC_W  = tile_arch_pkg::ACC_W,
  parameter int unsigned TILE_H = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W = tile_arch_pkg::TILE_W,
  parameter int unsigned MAX_CH = tile_arch_pkg::MAX_CH,
  localparam int unsigned TILE_PIX = TILE_H * TILE_W,
  localparam int unsigned CG_MAX   = MAX_CH / PF,
  localparam int unsigned BUF_AW   = $clog2(CG_MAX * TILE_PIX),
  localparam int unsigned WAW      = $clog2(MAX_CH * CG_MAX),
  localparam int unsigned LANE_W   = (PF > 1) ? $clog2(PF) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [10:0]          cin,       // input channels, multiple of PF
  input  logic [10:0]          cog_n,     // output channel groups, >= 1
  input  logic [4:0]           shift,
  input  tile_arch_pkg::act_mode_e act,
  output logic                 busy,
  output logic                 done,
  output logic [BUF_AW-1:0]    in_rd_addr,
  input  logic [PF*FM_W-1:0]   in_rd_data,
  output logic [WAW-1:0]       w_rd_addr,
  input  logic [PF*W_W-1:0]    w_rd_data,
  output logic                 out_wr_en,
  output logic [BUF_AW-1:0]    out_wr_addr,
  output logic [PF*FM_W-1:0]   out_wr_data
);

  logic        running;
  logic [10:0] og;
  logic [$clog2(TILE_PIX)-1:0] p;
  logic [10:0] ci;
  logic [31:0] wbase;          // og * cin

  logic last_ci, last_p, last_og;
  assign last_ci = (ci == cin - 11'd1);
  assign last_p  = (32'(p) == TILE_PIX - 1);
  assign last_og = (og == cog_n - 11'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0; og <= '0; p <= '0; ci <= '0; wbase <= '0;
    end else if (start && !running) begin
      running <= 1'b1; og <= '0; p <= '0; ci <= '0; wbase <= '0;
    end else if (running) begin
      if (!last_ci) ci <= ci + 11'd1;
      else begin
        ci <= '0;
        if (!last_p) p <= p + 1'b1;
        else begin
          p <= '0;
          if (!last_og) begin
            og    <= og + 11'd1;
            wbase <= wbase + 32'(cin);
          end else running <= 1'b0;
        end
      end
    end
  end

  assign in_rd_addr = BUF_AW'(32'(ci >> LANE_W) * TILE_PIX + 32'(p));
  assign w_rd_addr  = WAW'(wbase + 32'(ci));

  logic              v1, first1, last1, final1;
  logic [LANE_W-1:0] lane1;
  logic [BUF_AW-1:0] oaddr1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; final1 <= 1'b0;
      lane1 <= '0; oaddr1 <= '0;
    end else begin
      v1     <= running;
      first1 <= (ci == 11'd0);
      last1  <= last_ci;
      final1 <= last_ci && last_p && last_og;
      lane1  <= LANE_W'(ci);
      oaddr1 <= BUF_AW'(32'(og) * TILE_PIX + 32'(p));
    end
  end

  logic signed [FM_W:0] xin;
  assign xin = $signed({1'b0, in_rd_data[32'(lane1)*FM_W +: FM_W]});

  for (genvar j = 0; j < PF; j++) begin : g_lane
    logic signed [W_W-1:0]   b;
    logic signed [ACC_W-1:0] acc, acc_next;
    logic        [FM_W-1:0]  q;
    always_comb begin
      b        = $signed(w_rd_data[j*W_W +: W_W]);
      acc_next = (first1 ? '0 : acc) + ACC_W'(xin * b);
    end
    always_ff @(posedge clk) begin
      if (v1) acc <= acc_next;
    end
    act_quant #(.ACC_BITS(ACC_W), .FM_BITS(FM_W)) u_act (
      .acc(acc_next), .shift(shift), .mode(act), .q(q));
    assign out_wr_data[j*FM_W +: FM_W] = q;
  end

  assign out_wr_en   = v1 && last1;
  assign out_wr_addr = oaddr1;

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v1 && last1 && final1;
  end

  assign busy = running || v1;

endmodule
