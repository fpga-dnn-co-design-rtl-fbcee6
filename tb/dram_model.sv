// dram_model: behavioural model of the off-chip DRAM seen by the accelerator.
//
// Not synthesizable logic of the accelerator: it stands in for the board's
// DDR memory in simulation. It offers a read request channel, an in-order
// read response channel and a write channel, all valid/ready. A read returns
// its word LAT cycles after the request is taken (later if the response is
// held off). With STALL set the model withholds ready on the request and write
// channels at pseudo-random cycles so that the accelerator's back-pressure
// paths are exercised; the number of such stalled cycles is counted.
// Testbenches fill and inspect `mem` by hierarchical reference.
module dram_model #(
  parameter int unsigned WORDS  = 65536,
  parameter int unsigned DW     = 128,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned LAT    = 3,
  parameter bit          STALL  = 1'b1
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_resp_valid,
  input  logic              rd_resp_ready,
  output logic [DW-1:0]     rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DW-1:0]     wr_data
);

  logic [DW-1:0] mem [WORDS];
  int unsigned   rd_stalls = 0;
  int unsigned   wr_stalls = 0;
  int unsigned   resp_holds = 0;

  // queue of pending responses: data and the cycle it becomes visible
  logic [DW-1:0] q_data [$];
  longint        q_time [$];
  longint        cyc = 0;

  initial begin
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
    rd_resp_valid = 1'b0;
    rd_resp_data = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    // take the request offered in this cycle
    if (rd_req_valid && rd_req_ready) begin
      q_data.push_back(mem[rd_req_addr % WORDS]);
      q_time.push_back(cyc + LAT);
    end
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (rd_resp_valid && rd_resp_ready) begin
      void'(q_data.pop_front());
      void'(q_time.pop_front());
    end
    if (rd_resp_valid && !rd_resp_ready) resp_holds++;
    if (wr_valid && wr_ready) mem[wr_addr % WORDS] <= wr_data;
    if (wr_valid && !wr_ready) wr_stalls++;
    // next cycle's handshake signals
    rd_req_ready <= STALL ? (($urandom % 4) != 0) : 1'b1;
    wr_ready     <= STALL ? (($urandom % 3) != 0) : 1'b1;
  end

  always @(negedge clk) begin
    rd_resp_valid <= (q_time.size() > 0) && (q_time[0] <= cyc);
    rd_resp_data  <= (q_data.size() > 0) ? q_data[0] : '0;
  end

endmodule
