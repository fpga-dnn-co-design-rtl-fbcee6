// tb_maxpool2x2_ip: runs the pooling IP (PF = 4, 4x4 tiles, up to 16
// channels) in down-sampling mode and in copy mode on random tiles and
// compares the output buffer with a 2x2 maximum (or the unchanged tile)
// computed here; checks the cycle count cg_n*16 + 2 in both modes.
`timescale 1ns/1ps
module tb_maxpool2x2_ip;
  localparam int unsigned PF = 4, TH = 4, TW = 4, MC = 16;
  localparam int unsigned TP = TH * TW, CG = MC / PF;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done, pool_en;
  logic [10:0] cg_n;
  logic [$clog2(CG*TP)-1:0] in_rd_addr, out_wr_addr;
  logic [PF*8-1:0] in_rd_data, out_wr_data;
  logic out_wr_en;

  logic [PF*8-1:0] inmem [CG*TP];
  logic [PF*8-1:0] outmem [CG*TP];
  always_ff @(posedge clk) begin
    in_rd_data <= inmem[in_rd_addr];
    if (out_wr_en) outmem[out_wr_addr] <= out_wr_data;
  end

  maxpool2x2_ip #(.PF(PF), .TILE_H(TH), .TILE_W(TW), .MAX_CH(MC)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit pool, input int groups);
    int cyc, oh, ow;
    for (int i = 0; i < CG * TP; i++) begin inmem[i] = $urandom; outmem[i] = '0; end
    pool_en = pool; cg_n = 11'(groups);
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cyc = 0;  // the edge that samples start
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != groups * TP + 2) begin failures++; $display("cycles %0d", cyc); end
    @(posedge clk);
    oh = pool ? TH / 2 : TH;
    ow = pool ? TW / 2 : TW;
    for (int g = 0; g < groups; g++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++)
          for (int j = 0; j < PF; j++) begin
            int e = 0;
            if (pool) begin
              for (int k = 0; k < 4; k++)
                if (int'(inmem[g*TP + (2*y + k/2)*TW + 2*x + k%2][j*8 +: 8]) > e)
                  e = int'(inmem[g*TP + (2*y + k/2)*TW + 2*x + k%2][j*8 +: 8]);
            end else e = int'(inmem[g*TP + y*TW + x][j*8 +: 8]);
            checks++;
            if (int'(outmem[g*TP + y*ow + x][j*8 +: 8]) != e) begin
              failures++;
              if (failures < 10) $display("pool=%0d g%0d y%0d x%0d j%0d: %0d expected %0d", pool,
                                          g, y, x, j, outmem[g*TP + y*ow + x][j*8 +: 8], e);
            end
          end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(1'b1, CG);
    run(1'b0, 2);
    run(1'b1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
