// tb_weight_buffer: loads the depth-wise and the point-wise regions of the
// weight buffer through its load port, then reads both back through the two
// read ports at the same time and compares them with what was written;
// checks the one-cycle read latency and that the regions do not alias.
`timescale 1ns/1ps
module tb_weight_buffer;
  localparam int unsigned PF = 4, WW = 8, MC = 16;
  localparam int unsigned DWD = (MC / PF) * 9, PWD = MC * (MC / PF);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, wr_pw = 1'b0;
  logic [$clog2(PWD)-1:0] wr_addr = '0, pw_rd_addr = '0;
  logic [$clog2(DWD)-1:0] dw_rd_addr = '0;
  logic [PF*WW-1:0] wr_data = '0, dw_rd_data, pw_rd_data;
  logic [PF*WW-1:0] rdw [DWD];
  logic [PF*WW-1:0] rpw [PWD];
  int checks = 0, failures = 0;

  weight_buffer #(.PF(PF), .W_W(WW), .MAX_CH(MC)) dut (.*);

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < PWD; a++) begin
      wr_en <= 1'b1; wr_pw <= 1'b1; wr_addr <= 6'(a); rpw[a] = $urandom; wr_data <= rpw[a];
      @(posedge clk);
    end
    for (int a = 0; a < DWD; a++) begin
      wr_en <= 1'b1; wr_pw <= 1'b0; wr_addr <= 6'(a); rdw[a] = $urandom; wr_data <= rdw[a];
      @(posedge clk);
    end
    wr_en <= 1'b0;
    for (int a = 0; a < PWD; a++) begin
      dw_rd_addr <= 6'(a % DWD);
      pw_rd_addr <= 6'(PWD - 1 - a);
      @(posedge clk);
      #1;
      checks += 2;
      if (dw_rd_data !== rdw[a % DWD]) begin failures++; $display("dw %0d", a % DWD); end
      if (pw_rd_data !== rpw[PWD - 1 - a]) begin failures++; $display("pw %0d", PWD - 1 - a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
