// tile_arch_top: Tile-Arch accelerator for one hardware Bundle.
//
// The Bundle is a depth-wise 3x3 convolution followed by a 1x1 convolution,
// each with its activation, and a 2x2 max-pool down-sampling spot. One IP
// instance of each kind is reused for every tile of a layer and for every
// Bundle replication of the network: the host starts one pass per Bundle
// replication with that replication's configuration (cfg), and the pass reads
// its input feature map from DRAM and writes its output feature map back, so
// Bundles communicate through DRAM and the IPs inside a Bundle through on-chip
// ping-pong buffers:
//
//   DRAM -> offchip_dma -> buf_in -> dwconv3x3_ip -> buf_mid -> conv1x1_ip
//        -> buf_pw -> maxpool2x2_ip -> buf_out -> offchip_dma -> DRAM
//
// with the weights loaded into weight_buffer at the start of the pass.
// tile_pipeline_ctrl runs the five stages as a tile-level pipeline.
// Interface: `start` (one-cycle pulse while idle) begins a pass; `done` pulses
// at its end; `busy` is high in between; `stage_active` shows which pipeline
// stages are running. The DRAM side is a read request channel, an
// in-order read response channel and a write channel, each with valid/ready;
// a DRAM word is PF channel values of one pixel. The dataflow and buffer
// placement follow the paper's accelerator template; the port protocol and the
// host-driven sequencing of Bundle replications are this design's own choices.
module tile_arch_top #(
  parameter int unsigned PF     = tile_arch_pkg::PF,
  parameter int unsigned FM_W   = tile_arch_pkg::FM_W,
  parameter int unsigned W_W    = tile_arch_pkg::W_W,
  parameter int unsigned ACC_W  = tile_arch_pkg::ACC_W,
  parameter int unsigned TILE_H = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W = tile_arch_pkg::TILE_W,
  parameter int unsigned MAX_CH = tile_arch_pkg::MAX_CH,
  parameter int unsigned ADDR_W = tile_arch_pkg::ADDR_W,
  localparam int unsigned DW    = PF * FM_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  tile_arch_pkg::bundle_cfg_t cfg,
  output logic                       busy,
  output logic                       done,
  output logic [4:0]                 stage_active,
  // DRAM read channels
  output logic                       mem_rd_req_valid,
  input  logic                       mem_rd_req_ready,
  output logic [ADDR_W-1:0]          mem_rd_req_addr,
  input  logic                       mem_rd_resp_valid,
  output logic                       mem_rd_resp_ready,
  input  logic [DW-1:0]              mem_rd_resp_data,
  // DRAM write channel
  output logic                       mem_wr_valid,
  input  logic                       mem_wr_ready,
  output logic [ADDR_W-1:0]          mem_wr_addr,
  output logic [DW-1:0]              mem_wr_data
);

  localparam int unsigned HALO_PIX = (TILE_H + 2) * (TILE_W + 2);
  localparam int unsigned TILE_PIX = TILE_H * TILE_W;
  localparam int unsigned CG_MAX   = MAX_CH / PF;
  localparam int unsigned IN_DEPTH = CG_MAX * HALO_PIX;
  localparam int unsigned T_DEPTH  = CG_MAX * TILE_PIX;
  localparam int unsigned IN_AW    = $clog2(IN_DEPTH);
  localparam int unsigned T_AW     = $clog2(T_DEPTH);
  localparam int unsigned DWAW     = $clog2(CG_MAX * 9);
  localparam int unsigned PWAW     = $clog2(MAX_CH * CG_MAX);

  logic [3:0] buf_wr_ready, buf_rd_valid, buf_commit, buf_release;
  logic ld_w_start, ld_t_start, ld_done, wb_start, wb_done;
  logic [15:0] ld_tr, ld_tc, wb_tr, wb_tc;
  logic dw_start, dw_done, pw_start, pw_done, pool_start, pool_done;
  logic ld_busy, wb_busy, dw_busy, pw_busy, pool_busy;

  // weight buffer
  logic               wgt_wr_en, wgt_wr_pw;
  logic [PWAW-1:0]    wgt_wr_addr;
  logic [PF*W_W-1:0]  wgt_wr_data;
  logic [DWAW-1:0]    dw_w_addr;
  logic [PF*W_W-1:0]  dw_w_data;
  logic [PWAW-1:0]    pw_w_addr;
  logic [PF*W_W-1:0]  pw_w_data;

  // data buffers: {write enable, write address, write data, read address, read data}
  logic               in_wr_en,  mid_wr_en,  pwb_wr_en,  out_wr_en;
  logic [IN_AW-1:0]   in_wr_addr, in_rd_addr;
  logic [T_AW-1:0]    mid_wr_addr, mid_rd_addr, pwb_wr_addr, pwb_rd_addr, out_wr_addr, out_rd_addr;
  logic [DW-1:0]      in_wr_data, in_rd_data, mid_wr_data, mid_rd_data;
  logic [DW-1:0]      pwb_wr_data, pwb_rd_data, out_wr_data, out_rd_data;

  tile_pipeline_ctrl #(.TILE_H(TILE_H), .TILE_W(TILE_W)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .active(stage_active),
    .buf_wr_ready, .buf_rd_valid, .buf_commit, .buf_release,
    .ld_w_start, .ld_t_start, .ld_tr, .ld_tc, .ld_done,
    .wb_start, .wb_tr, .wb_tc, .wb_done,
    .dw_start, .dw_done, .pw_start, .pw_done, .pool_start, .pool_done);

  offchip_dma #(.PF(PF), .FM_W(FM_W), .W_W(W_W), .TILE_H(TILE_H), .TILE_W(TILE_W),
                .MAX_CH(MAX_CH), .ADDR_W(ADDR_W)) u_dma (
    .clk, .rst_n, .cfg,
    .ld_w_start, .ld_t_start, .ld_tr, .ld_tc, .ld_busy, .ld_done,
    .wb_start, .wb_tr, .wb_tc, .wb_busy, .wb_done,
    .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_req_addr(mem_rd_req_addr), .rd_resp_valid(mem_rd_resp_valid),
    .rd_resp_ready(mem_rd_resp_ready), .rd_resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr),
    .wr_data(mem_wr_data),
    .wgt_wr_en, .wgt_wr_pw, .wgt_wr_addr, .wgt_wr_data,
    .in_wr_en, .in_wr_addr, .in_wr_data,
    .out_rd_addr, .out_rd_data);

  weight_buffer #(.PF(PF), .W_W(W_W), .MAX_CH(MAX_CH)) u_wbuf (
    .clk, .wr_en(wgt_wr_en), .wr_pw(wgt_wr_pw), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .dw_rd_addr(dw_w_addr), .dw_rd_data(dw_w_data),
    .pw_rd_addr(pw_w_addr), .pw_rd_data(pw_w_data));

  pingpong_buffer #(.DEPTH(IN_DEPTH), .DATA_W(DW)) u_buf_in (
    .clk, .rst_n, .wr_commit(buf_commit[0]), .wr_ready(buf_wr_ready[0]),
    .rd_release(buf_release[0]), .rd_valid(buf_rd_valid[0]),
    .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_addr(in_rd_addr), .rd_data(in_rd_data));

  dwconv3x3_ip #(.PF(PF), .FM_W(FM_W), .W_W(W_W), .ACC_W(ACC_W), .TILE_H(TILE_H),
                 .TILE_W(TILE_W), .MAX_CH(MAX_CH)) u_dw (
    .clk, .rst_n, .start(dw_start), .cg_n(cfg.cin / 11'(PF)), .shift(cfg.shift_dw),
    .act(cfg.act), .busy(dw_busy), .done(dw_done),
    .in_rd_addr, .in_rd_data, .w_rd_addr(dw_w_addr), .w_rd_data(dw_w_data),
    .out_wr_en(mid_wr_en), .out_wr_addr(mid_wr_addr), .out_wr_data(mid_wr_data));

  pingpong_buffer #(.DEPTH(T_DEPTH), .DATA_W(DW)) u_buf_mid (
    .clk, .rst_n, .wr_commit(buf_commit[1]), .wr_ready(buf_wr_ready[1]),
    .rd_release(buf_release[1]), .rd_valid(buf_rd_valid[1]),
    .wr_en(mid_wr_en), .wr_addr(mid_wr_addr), .wr_data(mid_wr_data),
    .rd_addr(mid_rd_addr), .rd_data(mid_rd_data));

  conv1x1_ip #(.PF(PF), .FM_W(FM_W), .W_W(W_W), .ACC_W(ACC_W), .TILE_H(TILE_H),
               .TILE_W(TILE_W), .MAX_CH(MAX_CH)) u_pw (
    .clk, .rst_n, .start(pw_start), .cin(cfg.cin), .cog_n(cfg.cout / 11'(PF)),
    .shift(cfg.shift_pw), .act(cfg.act), .busy(pw_busy), .done(pw_done),
    .in_rd_addr(mid_rd_addr), .in_rd_data(mid_rd_data),
    .w_rd_addr(pw_w_addr), .w_rd_data(pw_w_data),
    .out_wr_en(pwb_wr_en), .out_wr_addr(pwb_wr_addr), .out_wr_data(pwb_wr_data));

  pingpong_buffer #(.DEPTH(T_DEPTH), .DATA_W(DW)) u_buf_pw (
    .clk, .rst_n, .wr_commit(buf_commit[2]), .wr_ready(buf_wr_ready[2]),
    .rd_release(buf_release[2]), .rd_valid(buf_rd_valid[2]),
    .wr_en(pwb_wr_en), .wr_addr(pwb_wr_addr), .wr_data(pwb_wr_data),
    .rd_addr(pwb_rd_addr), .rd_data(pwb_rd_data));

  maxpool2x2_ip #(.PF(PF), .FM_W(FM_W), .TILE_H(TILE_H), .TILE_W(TILE_W),
                  .MAX_CH(MAX_CH)) u_pool (
    .clk, .rst_n, .start(pool_start), .cg_n(cfg.cout / 11'(PF)), .pool_en(cfg.pool_en),
    .busy(pool_busy), .done(pool_done),
    .in_rd_addr(pwb_rd_addr), .in_rd_data(pwb_rd_data),
    .out_wr_en, .out_wr_addr, .out_wr_data);

  pingpong_buffer #(.DEPTH(T_DEPTH), .DATA_W(DW)) u_buf_out (
    .clk, .rst_n, .wr_commit(buf_commit[3]), .wr_ready(buf_wr_ready[3]),
    .rd_release(buf_release[3]), .rd_valid(buf_rd_valid[3]),
    .wr_en(out_wr_en), .wr_addr(out_wr_addr), .wr_data(out_wr_data),
    .rd_addr(out_rd_addr), .rd_data(out_rd_data));

  // Every stage that was started must be the one that reports back.
  a_dw_busy:   assert property (@(posedge clk) disable iff (!rst_n) dw_done   |-> busy);
  a_one_ld:    assert property (@(posedge clk) disable iff (!rst_n)
                                (ld_w_start || ld_t_start) |-> !ld_busy);
  a_one_wb:    assert property (@(posedge clk) disable iff (!rst_n) wb_start |-> !wb_busy);
  a_pw_idle:   assert property (@(posedge clk) disable iff (!rst_n) pw_start |-> !pw_busy);
  a_pool_idle: assert property (@(posedge clk) disable iff (!rst_n) pool_start |-> !pool_busy);
  a_dw_idle:   assert property (@(posedge clk) disable iff (!rst_n) dw_start |-> !dw_busy);

endmodule
