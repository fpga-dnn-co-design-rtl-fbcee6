// tb_dwconv3x3_ip: drives the depth-wise 3x3 IP (PF = 4, 4x4 tiles, up to 16
// channels) from a model input buffer holding a random halo tile and a model
// weight memory, both with one cycle of read latency. It compares every
// output word with a direct 3x3 convolution plus requantization and ReLU4
// computed here, checks that each output address is written exactly once,
// and checks the cycle count 9*cg_n*16 + 2 from start to done. Runs with 1
// and 4 channel groups.
`timescale 1ns/1ps
module tb_dwconv3x3_ip;
  import tile_arch_pkg::*;
  localparam int unsigned PF = 4, TH = 4, TW = 4, MC = 16, HW = TW + 2;
  localparam int unsigned HP = (TH + 2) * HW, TP = TH * TW, CG = MC / PF;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [10:0] cg_n;
  logic [4:0] shift;
  act_mode_e act;
  logic [$clog2(CG*HP)-1:0] in_rd_addr;
  logic [PF*8-1:0] in_rd_data, w_rd_data, out_wr_data;
  logic [$clog2(CG*9)-1:0] w_rd_addr;
  logic out_wr_en;
  logic [$clog2(CG*TP)-1:0] out_wr_addr;

  logic [PF*8-1:0] inmem [CG*HP];
  logic [PF*8-1:0] wmem  [CG*9];
  logic [PF*8-1:0] outmem [CG*TP];
  int              wcount [CG*TP];
  always_ff @(posedge clk) begin
    in_rd_data <= inmem[in_rd_addr];
    w_rd_data  <= wmem[w_rd_addr];
    if (out_wr_en) begin outmem[out_wr_addr] <= out_wr_data; wcount[out_wr_addr]++; end
  end

  dwconv3x3_ip #(.PF(PF), .TILE_H(TH), .TILE_W(TW), .MAX_CH(MC)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int refq(input longint a, input int s);
    longint r = (a + (longint'(1) << (s - 1))) >>> s;
    return (r < 0) ? 0 : (r > 64) ? 64 : int'(r);
  endfunction

  task automatic run(input int groups);
    int cyc;
    for (int i = 0; i < CG * HP; i++) inmem[i] = $urandom;
    for (int i = 0; i < CG * 9; i++)
      for (int j = 0; j < PF; j++) wmem[i][j*8 +: 8] = 8'(int'($urandom % 31) - 15);
    for (int i = 0; i < CG * TP; i++) wcount[i] = 0;
    cg_n = 11'(groups); shift = 5'd6; act = ACT_RELU4;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cyc = 0;  // the edge that samples start
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != 9 * groups * TP + 2) begin
      failures++; $display("cycles %0d, expected %0d", cyc, 9 * groups * TP + 2);
    end
    @(posedge clk);
    for (int g = 0; g < groups; g++)
      for (int y = 0; y < TH; y++)
        for (int x = 0; x < TW; x++) begin
          checks++;
          if (wcount[g*TP + y*TW + x] != 1) begin failures++; $display("write count"); end
          for (int j = 0; j < PF; j++) begin
            longint acc = 0;
            for (int k = 0; k < 9; k++)
              acc += longint'(inmem[g*HP + (y + k/3)*HW + x + k%3][j*8 +: 8]) *
                     longint'($signed(wmem[g*9 + k][j*8 +: 8]));
            checks++;
            if (int'(outmem[g*TP + y*TW + x][j*8 +: 8]) != refq(acc, 6)) begin
              failures++;
              if (failures < 10) $display("g%0d y%0d x%0d lane%0d: %0d expected %0d", g, y, x, j,
                                          outmem[g*TP + y*TW + x][j*8 +: 8], refq(acc, 6));
            end
          end
        end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(1);
    run(CG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
