// act_quant: activation IP for one channel lane.
//
// Takes a signed convolution accumulator, requantizes it to the feature-map
// format by an arithmetic right shift with round-half-up, and applies the
// selected activation: ReLU, ReLU4 or ReLU8. Feature maps are unsigned
// fixed-point numbers of FM_W bits with FM_W-4 fractional bits, so ReLU4 clips
// at code 4 << (FM_W-4) and ReLU8 at 8 << (FM_W-4); plain ReLU saturates at the
// largest code. The bounded ReLU variants come from the paper's fine-grained
// Bundle evaluation (they tie the activation to the data quantization); the
// number format, the rounding and the shift-based requantization are this
// design's own choices. Purely combinational.
module act_quant
#(
  parameter int unsigned ACC_BITS = tile_arch_pkg::ACC_W,
  parameter int unsigned FM_BITS  = tile_arch_pkg::FM_W
) (
  input  logic signed [ACC_BITS-1:0] acc,
  input  logic        [4:0]          shift,
  input  tile_arch_pkg::act_mode_e                  mode,
  output logic        [FM_BITS-1:0]  q
);

  localparam int unsigned FRAC = FM_BITS - 4;
  localparam logic [ACC_BITS:0] MAX_CODE = (ACC_BITS+1)'((1 << FM_BITS) - 1);
  localparam logic [ACC_BITS:0] CAP4     = (ACC_BITS+1)'(4 << FRAC);
  localparam logic [ACC_BITS:0] CAP8     = ((8 << FRAC) > ((1 << FM_BITS) - 1))
                                           ? MAX_CODE : (ACC_BITS+1)'(8 << FRAC);

  logic signed [ACC_BITS:0] rounded;
  logic signed [ACC_BITS:0] shifted;
  logic        [ACC_BITS:0] cap;

  always_comb begin
    // One extra bit so that adding the rounding constant cannot overflow.
    if (shift == 5'd0) rounded = {acc[ACC_BITS-1], acc};
    else               rounded = {acc[ACC_BITS-1], acc} + ((ACC_BITS+1)'(1) << (shift - 5'd1));
    shifted = rounded >>> shift;
    unique case (mode)
      tile_arch_pkg::ACT_RELU4: cap = CAP4;
      tile_arch_pkg::ACT_RELU8: cap = CAP8;
      default:   cap = MAX_CODE;
    endcase
    if (shifted[ACC_BITS])             q = '0;
    else if ($unsigned(shifted) > cap) q = cap[FM_BITS-1:0];
    else                               q = shifted[FM_BITS-1:0];
  end

endmodule
