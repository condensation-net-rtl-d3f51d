// conv_core: one convolution core (one multiply-accumulate lane).
//
// Each clock with `en` set, the core multiplies one input pixel by one 1-bit
// filter weight and adds the product into entry `sel` of its accumulation
// buffer (the "Buffer" fed back into the adder in the paper's core drawing).
// With 1-bit weights the multiply is a sign choice: weight 1 means +1, weight 0
// means -1. `clear` starts a new sum: the entry is loaded with the product
// instead of being added to. The buffer has one entry per virtual output
// channel (ALPHA entries), so the alpha virtual blocks of Fig. 4 are
// accumulated side by side while one input channel is being read.
//
// With `max_mode` set the core instead keeps the largest pixel seen since
// `clear` (the weight is ignored). This serves pooling layers that have a
// window but stride 1, so their output blocks need the same halo as a
// convolution (the 2 x 2 / 1 pooling layer of Tiny-YOLOv2).
//
// Timing: the updated sum is visible on `acc` one clock after `en`.
// The multiply-add-buffer structure is the paper's; the weight encoding, the
// accumulator width and the per-alpha buffer entries are this design's.
module conv_core #(
  parameter int unsigned PIX_W = cnet_pkg::PIX_W,
  parameter int unsigned ACC_W = cnet_pkg::ACC_W,
  parameter int unsigned ALPHA = cnet_pkg::ALPHA_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clear,
  input  logic                     max_mode,
  input  logic [$clog2(ALPHA)-1:0] sel,
  input  logic [PIX_W-1:0]         pixel,
  input  logic                     weight,
  output logic signed [ACC_W-1:0]  acc [ALPHA]
);
  logic signed [ACC_W-1:0] pixs;
  logic signed [ACC_W-1:0] prod;
  logic signed [ACC_W-1:0] base;

  always_comb begin
    pixs = ACC_W'(signed'({1'b0, pixel}));
    prod = weight ? pixs : -pixs;
    base = clear ? '0 : acc[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < int'(ALPHA); a++) acc[a] <= '0;
    end else if (en) begin
      if (max_mode) acc[sel] <= (clear || pixs > acc[sel]) ? pixs : acc[sel];
      else          acc[sel] <= base + prod;
    end
  end
endmodule
