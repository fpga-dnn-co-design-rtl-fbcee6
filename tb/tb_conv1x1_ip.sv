// tb_conv1x1_ip: drives the point-wise IP (PF = 4, 4x4 tiles, up to 16
// channels) from a model tile buffer and weight memory with one cycle of read
// latency. Compares every output with a 1x1 convolution plus requantization
// and ReLU8 computed here, for 8 -> 12 channels (channel expansion) and
// 16 -> 4 channels, and checks the cycle count cin*cog_n*16 + 2.
`timescale 1ns/1ps
module tb_conv1x1_ip;
  import tile_arch_pkg::*;
  localparam int unsigned PF = 4, TH = 4, TW = 4, MC = 16;
  localparam int unsigned TP = TH * TW, CG = MC / PF;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [10:0] cin, cog_n;
  logic [4:0] shift;
  act_mode_e act;
  logic [$clog2(CG*TP)-1:0] in_rd_addr, out_wr_addr;
  logic [PF*8-1:0] in_rd_data, w_rd_data, out_wr_data;
  logic [$clog2(MC*CG)-1:0] w_rd_addr;
  logic out_wr_en;

  logic [PF*8-1:0] inmem [CG*TP];
  logic [PF*8-1:0] wmem  [MC*CG];
  logic [PF*8-1:0] outmem [CG*TP];
  always_ff @(posedge clk) begin
    in_rd_data <= inmem[in_rd_addr];
    w_rd_data  <= wmem[w_rd_addr];
    if (out_wr_en) outmem[out_wr_addr] <= out_wr_data;
  end

  conv1x1_ip #(.PF(PF), .TILE_H(TH), .TILE_W(TW), .MAX_CH(MC)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int refq(input longint a, input int s);
    longint r = (a + (longint'(1) << (s - 1))) >>> s;
    return (r < 0) ? 0 : (r > 128) ? 128 : int'(r);
  endfunction

  task automatic run(input int ci_n, input int co_n);
    int cyc;
    for (int i = 0; i < CG * TP; i++) begin inmem[i] = $urandom; outmem[i] = '0; end
    for (int i = 0; i < MC * CG; i++)
      for (int j = 0; j < PF; j++) wmem[i][j*8 +: 8] = 8'(int'($urandom % 41) - 20);
    cin = 11'(ci_n); cog_n = 11'(co_n / PF); shift = 5'd7; act = ACT_RELU8;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cyc = 0;  // the edge that samples start
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != ci_n * (co_n / PF) * TP + 2) begin
      failures++; $display("cycles %0d", cyc);
    end
    @(posedge clk);
    for (int p = 0; p < TP; p++)
      for (int co = 0; co < co_n; co++) begin
        longint acc = 0;
        int got;
        for (int ci = 0; ci < ci_n; ci++)
          acc += longint'(inmem[(ci / PF) * TP + p][(ci % PF)*8 +: 8]) *
                 longint'($signed(wmem[(co / PF) * ci_n + ci][(co % PF)*8 +: 8]));
        got = int'(outmem[(co / PF) * TP + p][(co % PF)*8 +: 8]);
        checks++;
        if (got != refq(acc, 7)) begin
          failures++;
          if (failures < 10) $display("p%0d co%0d: %0d expected %0d", p, co, got, refq(acc, 7));
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(8, 12);
    run(16, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
