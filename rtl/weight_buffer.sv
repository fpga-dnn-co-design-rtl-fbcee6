// weight_buffer: on-chip weight buffer of one Bundle.
//
// Holds the depth-wise 3x3 weights and the point-wise 1x1 weights of the
// Bundle being computed. Both are loaded once per Bundle pass by the off-chip
// data transfer unit, through one write port with a region select, and are
// then read every cycle by the two convolution IPs through two independent
// synchronous read ports (data one cycle after the address).
// Word formats (W_W-bit signed weights, PF lanes per word):
//   depth-wise region: word g*9 + k holds tap k (row-major in the 3x3 window)
//                      of channels g*PF .. g*PF+PF-1;
//   point-wise region: word og*cin + ci holds the weights from input channel ci
//                      to output channels og*PF .. og*PF+PF-1.
// The paper names the on-chip weight buffers and places them in BRAM; the
// layout, the single load port and the sizing for MAX_CH channels in and out
// are this design's own choices.
module weight_buffer #(
  parameter int unsigned PF     = tile_arch_pkg::PF,
  parameter int unsigned W_W    = tile_arch_pkg::W_W,
  parameter int unsigned MAX_CH = tile_arch_pkg::MAX_CH,
  localparam int unsigned DW_DEPTH = (MAX_CH / PF) * 9,
  localparam int unsigned PW_DEPTH = MAX_CH * (MAX_CH / PF),
  localparam int unsigned DW_AW = $clog2(DW_DEPTH),
  localparam int unsigned PW_AW = $clog2(PW_DEPTH)
) (
  input  logic                clk,
  // load port
  input  logic                wr_en,
  input  logic                wr_pw,     // 0: depth-wise region, 1: point-wise region
  input  logic [PW_AW-1:0]    wr_addr,
  input  logic [PF*W_W-1:0]   wr_data,
  // depth-wise read port
  input  logic [DW_AW-1:0]    dw_rd_addr,
  output logic [PF*W_W-1:0]   dw_rd_data,
  // point-wise read port
  input  logic [PW_AW-1:0]    pw_rd_addr,
  output logic [PF*W_W-1:0]   pw_rd_data
);

  logic [PF*W_W-1:0] dw_mem [DW_DEPTH];
  logic [PF*W_W-1:0] pw_mem [PW_DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_pw) dw_mem[wr_addr[DW_AW-1:0]] <= wr_data;
    dw_rd_data <= dw_mem[dw_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_pw) pw_mem[wr_addr] <= wr_data;
    pw_rd_data <= pw_mem[pw_rd_addr];
  end

  a_dw_range: assert property (@(posedge clk) (wr_en && !wr_pw) |-> (32'(wr_addr) < DW_DEPTH));

endmodule
