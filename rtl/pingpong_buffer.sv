// pingpong_buffer: on-chip data buffer between two tile-pipeline stages.
//
// Two banks of DEPTH words, each word DATA_W bits (PF channel values of one
// pixel). The producing stage writes one tile into its current bank and then
// pulses `wr_commit`; the bank becomes full and the producer moves to the other
// bank. The consuming stage reads the oldest full bank and pulses `release`
// when it has finished with that tile; the bank becomes free again. `wr_ready`
// says the producer's bank is free (a new tile may be started), `rd_valid` that
// the consumer's bank holds a finished tile. With both banks in use the
// producer can write tile t+1 while the consumer reads tile t, which is what
// lets neighbouring stages overlap. Reads are synchronous: rd_data holds the
// word addressed in the previous cycle, as a block RAM does. Writes and reads
// are not otherwise checked against the flags; the controller only starts a
// stage when the flags allow it. The paper places the buffers between the IPs
// of a Bundle in BRAM; the two banks and the wr_commit/release handshake are this
// design's own choices. Reset (synchronous, active low) empties both banks.
module pingpong_buffer #(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned DATA_W = 128,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // producer side
  input  logic              wr_commit,
  output logic              wr_ready,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  // consumer side
  input  logic              rd_release,
  output logic              rd_valid,
  input  logic [AW-1:0]     rd_addr,
  output logic [DATA_W-1:0] rd_data
);

  logic [DATA_W-1:0] mem [2*DEPTH];
  logic              wp, rp;        // producer and consumer bank
  logic [1:0]        full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= 1'b0; rp <= 1'b0; full <= '0;
    end else begin
      if (wr_commit)   wp <= ~wp;
      if (rd_release) rp <= ~rp;
      for (int b = 0; b < 2; b++) begin
        if (wr_commit && wp == 1'(b))        full[b] <= 1'b1;
        else if (rd_release && rp == 1'(b)) full[b] <= 1'b0;
      end
    end
  end

  assign wr_ready = !full[wp];
  assign rd_valid = full[rp];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{31'd0, wp} * DEPTH + 32'(wr_addr)] <= wr_data;
    rd_data <= mem[{31'd0, rp} * DEPTH + 32'(rd_addr)];
  end

  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> (32'(wr_addr) < DEPTH));
  a_commit:   assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_ready);
  a_release:  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_valid);

endmodule
