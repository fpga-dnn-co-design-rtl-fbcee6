// offchip_dma: off-chip data transfer unit between DRAM and the on-chip buffers.
//
// Three jobs, started by one-cycle pulses from the tile controller:
//  * weight load (ld_w_start): copies the Bundle's cin/PF*9 depth-wise words and
//    cin*cout/PF point-wise words, stored one after the other from cfg.w_base,
//    into the weight buffer;
//  * tile load (ld_t_start): fetches the (TILE_H+2) x (TILE_W+2) halo tile at
//    tile row ld_tr / column ld_tc of the input feature map into the input data
//    buffer, writing zeros for halo pixels outside the map (the 3x3 padding);
//  * write-back (wb_start): stores the finished output tile at wb_tr / wb_tc
//    (TILE_H/2 x TILE_W/2 pixels when the Bundle down-samples) to DRAM.
// Feature maps in DRAM are stored pixel by pixel, row-major, with the cin/PF
// channel-group words of a pixel next to each other: word
// base + (y*width + x)*groups + g. Each DRAM word holds PF channel values.
// The read side is a request channel (valid/ready, address) and an in-order
// response channel (valid/ready, data); up to FIFO_DEPTH requests may be
// outstanding, and a small queue remembers where each response goes. Loads and
// write-back use separate DRAM channels and may overlap. The write side is one
// valid/ready channel with address and data; it moves one word every three
// cycles. ld_done / wb_done pulse when a job has completed. wgt_wr_data is the
// low PF*W_W bits of the read response wired straight through, since a weight
// word needs no processing on its way into the weight buffer; only its write
// enable and address come from the queue. The paper shows the
// off-chip data transfer block and the load/write-back phases of every tile;
// the channels, the DRAM layout and the zero-filled halo are this design's own
// choices.
module offchip_dma #(
  parameter int unsigned PF         = tile_arch_pkg::PF,
  parameter int unsigned FM_W       = tile_arch_pkg::FM_W,
  parameter int unsigned W_W        = tile_arch_pkg::W_W,
  parameter int unsigned TILE_H     = tile_arch_pkg::TILE_H,
  parameter int unsigned TILE_W     = tile_arch_pkg::TILE_W,
  parameter int unsigned MAX_CH     = tile_arch_pkg::MAX_CH,
  parameter int unsigned ADDR_W     = tile_arch_pkg::ADDR_W,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned HALO_W   = TILE_W + 2,
  localparam int unsigned HALO_PIX = (TILE_H + 2) * HALO_W,
  localparam int unsigned TILE_PIX = TILE_H * TILE_W,
  localparam int unsigned CG_MAX   = MAX_CH / PF,
  localparam int unsigned IN_AW    = $clog2(CG_MAX * HALO_PIX),
  localparam int unsigned OUT_AW   = $clog2(CG_MAX * TILE_PIX),
  localparam int unsigned WAW      = $clog2(MAX_CH * CG_MAX),
  localparam int unsigned DW       = PF * FM_W,
  localparam int unsigned PAW      = (WAW > IN_AW) ? WAW : IN_AW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  tile_arch_pkg::bundle_cfg_t cfg,
  // job control
  input  logic                       ld_w_start,
  input  logic                       ld_t_start,
  input  logic [15:0]                ld_tr,
  input  logic [15:0]                ld_tc,
  output logic                       ld_busy,
  output logic                       ld_done,
  input  logic                       wb_start,
  input  logic [15:0]                wb_tr,
  input  logic [15:0]                wb_tc,
  output logic                       wb_busy,
  output logic                       wb_done,
  // DRAM read channels
  output logic                       rd_req_valid,
  input  logic                       rd_req_ready,
  output logic [ADDR_W-1:0]          rd_req_addr,
  input  logic                       rd_resp_valid,
  output logic                       rd_resp_ready,
  input  logic [DW-1:0]              rd_resp_data,
  // DRAM write channel
  output logic                       wr_valid,
  input  logic                       wr_ready,
  output logic [ADDR_W-1:0]          wr_addr,
  output logic [DW-1:0]              wr_data,
  // weight buffer load port
  output logic                       wgt_wr_en,
  output logic                       wgt_wr_pw,
  output logic [WAW-1:0]             wgt_wr_addr,
  output logic [PF*W_W-1:0]          wgt_wr_data,
  // input data buffer write port
  output logic                       in_wr_en,
  output logic [IN_AW-1:0]           in_wr_addr,
  output logic [DW-1:0]              in_wr_data,
  // output data buffer read port
  output logic [OUT_AW-1:0]          out_rd_addr,
  input  logic [DW-1:0]              out_rd_data
);

  // ---------------------------------------------------------------- read side
  typedef enum logic [1:0] {DST_TILE, DST_DW, DST_PW} dst_e;
  typedef struct packed {
    dst_e             dst;
    logic             zero;     // halo pixel outside the map: no DRAM access
    logic [PAW-1:0]   addr;     // destination word
  } pend_t;

  typedef enum logic [1:0] {G_IDLE, G_WGT, G_TILE} gen_e;
  gen_e        gen;
  logic        ld_job;

  logic [31:0] cg_in, cg_out, n_dw, n_all, widx;
  assign cg_in  = 32'(cfg.cin)  / PF;
  assign cg_out = 32'(cfg.cout) / PF;
  assign n_dw   = cg_in * 9;
  assign n_all  = n_dw + 32'(cfg.cin) * cg_out;

  logic [10:0] tg;
  logic [$clog2(TILE_H+2)-1:0] ty;
  logic [$clog2(TILE_W+2)-1:0] tx;
  logic [15:0] tr_q, tc_q;
  logic signed [31:0] iy, ix;
  logic        inb;

  assign iy  = $signed(32'(tr_q) * TILE_H + 32'(ty)) - 32'sd1;
  assign ix  = $signed(32'(tc_q) * TILE_W + 32'(tx)) - 32'sd1;
  assign inb = (iy >= 0) && (iy < $signed(32'(cfg.h))) && (ix >= 0) && (ix < $signed(32'(cfg.w)));

  pend_t cur;
  logic [ADDR_W-1:0] cur_dram;
  always_comb begin
    cur = '0;
    cur_dram = '0;
    if (gen == G_WGT) begin
      cur.dst  = (widx >= n_dw) ? DST_PW : DST_DW;
      cur.zero = 1'b0;
      cur.addr = (widx >= n_dw) ? PAW'(widx - n_dw) : PAW'(widx);
      cur_dram = cfg.w_base + ADDR_W'(widx);
    end else begin
      cur.dst  = DST_TILE;
      cur.zero = !inb;
      cur.addr = PAW'(32'(tg) * HALO_PIX + 32'(ty) * HALO_W + 32'(tx));
      cur_dram = cfg.in_base + ADDR_W'((32'(iy) * 32'(cfg.w) + 32'(ix)) * cg_in + 32'(tg));
    end
  end

  // queue of destinations, in request order
  localparam int unsigned QAW = $clog2(FIFO_DEPTH);
  pend_t          q [FIFO_DEPTH];
  logic [QAW-1:0] q_wp, q_rp;
  logic [QAW:0]   q_cnt;
  logic           q_full, q_empty, push, pop;
  assign q_full  = (32'(q_cnt) == FIFO_DEPTH);
  assign q_empty = (q_cnt == '0);

  logic gen_on;
  assign gen_on       = (gen != G_IDLE);
  assign rd_req_valid = gen_on && !q_full && !cur.zero;
  assign rd_req_addr  = cur_dram;
  assign push         = gen_on && !q_full && (cur.zero || rd_req_ready);

  logic gen_last;
  assign gen_last = (gen == G_WGT) ? (widx == n_all - 1)
                  : ((tg == cfg.cin[10:0] / 11'(PF) - 11'd1) && (32'(ty) == TILE_H + 1)
                     && (32'(tx) == TILE_W + 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gen <= G_IDLE; ld_job <= 1'b0; widx <= '0;
      tg <= '0; ty <= '0; tx <= '0; tr_q <= '0; tc_q <= '0;
    end else begin
      if (gen == G_IDLE && !ld_job) begin
        if (ld_w_start) begin
          gen <= G_WGT; ld_job <= 1'b1; widx <= '0;
        end else if (ld_t_start) begin
          gen <= G_TILE; ld_job <= 1'b1;
          tg <= '0; ty <= '0; tx <= '0; tr_q <= ld_tr; tc_q <= ld_tc;
        end
      end else if (push) begin
        if (gen_last) gen <= G_IDLE;
        else if (gen == G_WGT) widx <= widx + 32'd1;
        else begin
          if (32'(tx) != TILE_W + 1) tx <= tx + 1'b1;
          else begin
            tx <= '0;
            if (32'(ty) != TILE_H + 1) ty <= ty + 1'b1;
            else begin
              ty <= '0;
              tg <= tg + 11'd1;
            end
          end
        end
      end
      if (ld_done) ld_job <= 1'b0;
    end
  end

  // retire: zero entries write immediately, the others wait for their response
  pend_t head;
  assign head          = q[q_rp];
  assign rd_resp_ready = !q_empty && !head.zero;
  assign pop           = !q_empty && (head.zero || rd_resp_valid);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_wp <= '0; q_rp <= '0; q_cnt <= '0;
    end else begin
      if (push) begin
        q[q_wp] <= cur;
        q_wp    <= (32'(q_wp) == FIFO_DEPTH - 1) ? '0 : q_wp + 1'b1;
      end
      if (pop) q_rp <= (32'(q_rp) == FIFO_DEPTH - 1) ? '0 : q_rp + 1'b1;
      q_cnt <= q_cnt + (QAW+1)'(push) - (QAW+1)'(pop);
    end
  end

  assign in_wr_en    = pop && (head.dst == DST_TILE);
  assign in_wr_addr  = IN_AW'(head.addr);
  assign in_wr_data  = head.zero ? '0 : rd_resp_data;
  assign wgt_wr_en   = pop && (head.dst != DST_TILE);
  assign wgt_wr_pw   = (head.dst == DST_PW);
  assign wgt_wr_addr = WAW'(head.addr);
  assign wgt_wr_data = rd_resp_data[PF*W_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) ld_done <= 1'b0;
    else        ld_done <= ld_job && !ld_done && (gen == G_IDLE) && q_empty && !push;
  end
  assign ld_busy = ld_job;

  // --------------------------------------------------------------- write side
  typedef enum logic [1:0] {W_IDLE, W_RD, W_LAT, W_SEND} wst_e;
  wst_e        wst;
  logic [10:0] og;
  logic [$clog2(TILE_H)-1:0] oy;
  logic [$clog2(TILE_W)-1:0] ox;
  logic [15:0] wtr, wtc;
  logic [31:0] oh, ow, wout;
  assign oh   = cfg.pool_en ? TILE_H / 2 : TILE_H;
  assign ow   = cfg.pool_en ? TILE_W / 2 : TILE_W;
  assign wout = cfg.pool_en ? 32'(cfg.w) / 2 : 32'(cfg.w);

  logic wlast;
  assign wlast = (og == 11'(cg_out) - 11'd1) && (32'(oy) == oh - 1) && (32'(ox) == ow - 1);
  assign out_rd_addr = OUT_AW'(32'(og) * TILE_PIX + 32'(oy) * ow + 32'(ox));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wst <= W_IDLE; og <= '0; oy <= '0; ox <= '0; wtr <= '0; wtc <= '0;
      wr_addr <= '0; wr_data <= '0; wb_done <= 1'b0;
    end else begin
      wb_done <= 1'b0;
      unique case (wst)
        W_IDLE: if (wb_start) begin
          wst <= W_RD; og <= '0; oy <= '0; ox <= '0; wtr <= wb_tr; wtc <= wb_tc;
        end
        W_RD: begin
          wst     <= W_LAT;
          wr_addr <= cfg.out_base + ADDR_W'(((32'(wtr) * oh + 32'(oy)) * wout
                                            + 32'(wtc) * ow + 32'(ox)) * cg_out + 32'(og));
        end
        W_LAT: begin
          wst     <= W_SEND;
          wr_data <= out_rd_data;
        end
        W_SEND: if (wr_ready) begin
          if (wlast) begin
            wst <= W_IDLE; wb_done <= 1'b1;
          end else begin
            wst <= W_RD;
            if (32'(ox) != ow - 1) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              if (32'(oy) != oh - 1) oy <= oy + 1'b1;
              else begin
                oy <= '0;
                og <= og + 11'd1;
              end
            end
          end
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  assign wr_valid = (wst == W_SEND);
  assign wb_busy  = (wst != W_IDLE);

  // handshake rules: a request, once offered, is held until it is taken
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr));
  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));

endmodule
