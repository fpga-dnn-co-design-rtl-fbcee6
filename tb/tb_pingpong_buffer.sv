// tb_pingpong_buffer: checks the two-bank data buffer with the commit /
// release handshake. A random producer writes whole tiles (DEPTH words, with
// idle cycles) into its bank and commits each one while the bank is free; a
// random consumer reads each committed tile at random addresses and releases
// it. The bench keeps its own count of committed, unreleased tiles and checks
// wr_ready (fewer than two) and rd_valid (at least one) against it every
// cycle, and checks every read word, one cycle after its address, against the
// tile the producer committed first. It also checks that both banks were full
// at once and that writes and reads overlapped, so the producer's writes to
// one bank are shown not to disturb the tile being read from the other.
`timescale 1ns/1ps
module tb_pingpong_buffer;
  localparam int unsigned DEPTH = 24;
  localparam int unsigned DW    = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_commit = 1'b0, rd_release = 1'b0, wr_en = 1'b0;
  logic wr_ready, rd_valid;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [DW-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  pingpong_buffer #(.DEPTH(DEPTH), .DATA_W(DW)) dut (.*);

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [DW-1:0] tile_t [DEPTH];
  tile_t q [$];               // committed, not yet released tiles
  tile_t prod;                // tile being written
  int p_idx = 0, c_idx = 0, nq = 0, n_cons = 0, n_both_full = 0, n_overlap = 0;
  logic            p1_v = 1'b0, p2_v = 1'b0;
  logic [DW-1:0]   p1_d, p2_d;
  logic            drove_commit = 1'b0, drove_release = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      // outputs before this edge reflect the tile count before this edge
      checks++;
      if (wr_ready !== (nq < 2) || rd_valid !== (nq > 0)) begin
        failures++;
        $display("%0t flags wr_ready=%b rd_valid=%b, %0d tiles held", $time, wr_ready, rd_valid, nq);
      end
      if (p2_v) begin
        checks++;
        if (rd_data !== p2_d) begin
          failures++;
          $display("%0t read %h, expected %h", $time, rd_data, p2_d);
        end
      end
      if (drove_commit)  begin q.push_back(prod); nq++; end
      if (drove_release) begin void'(q.pop_front()); nq--; n_cons++; end
      if (nq == 2) n_both_full++;
      p2_v = p1_v; p2_d = p1_d;

      // producer
      wr_en <= 1'b0; wr_commit <= 1'b0; drove_commit = 1'b0;
      if (nq < 2) begin
        if (p_idx == DEPTH) begin
          if ($urandom_range(0, 2) == 0) begin
            wr_commit <= 1'b1; drove_commit = 1'b1; p_idx = 0;
          end
        end else if ($urandom_range(0, 3) != 0) begin
          prod[p_idx] = DW'($urandom);
          wr_en <= 1'b1; wr_addr <= 5'(p_idx); wr_data <= prod[p_idx];
          p_idx++;
        end
      end

      // consumer
      rd_release <= 1'b0; drove_release = 1'b0; p1_v = 1'b0;
      if (nq > 0 && $urandom_range(0, 3) != 0) begin
        int a;
        a = $urandom_range(0, DEPTH - 1);
        rd_addr <= 5'(a);
        p1_v = 1'b1; p1_d = q[0][a];
        if (nq < 2 && p_idx != 0 && p_idx != DEPTH) n_overlap++;
        c_idx++;
        if (c_idx == DEPTH) begin
          c_idx = 0;
          rd_release <= 1'b1; drove_release = 1'b1;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (n_cons == 40);
    repeat (4) @(posedge clk);
    checks++;
    if (n_both_full == 0 || n_overlap == 0) begin
      failures++;
      $display("both banks full %0d cycles, overlapped access %0d cycles", n_both_full, n_overlap);
    end
    $display("tiles consumed=%0d both-full cycles=%0d overlapped cycles=%0d", n_cons, n_both_full, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
