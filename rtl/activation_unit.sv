// activation_unit: activation by quantization for a whole block.
//
// For every lane: negative sums give 0 (half-wave, as in ReLU / HWGQ), the
// rest is shifted right by `shift` and saturated to the largest `bits`-bit
// code, so with bits = 2 the output is a 2-bit feature map value 0..3. The
// paper says only that the activation may be a quantization function for
// low-bit networks; the ReLU-shift-saturate form is this design's choice.
//
// Timing: one register stage. `out` and `out_valid` (with the `first`/`last`
// and `sel` tags carried along) follow `in_valid` by one clock.
module activation_unit #(
  parameter int unsigned LANES = cnet_pkg::BLK_W * cnet_pkg::BLK_H,
  parameter int unsigned ACC_W = cnet_pkg::ACC_W,
  parameter int unsigned PIX_W = cnet_pkg::PIX_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic signed [ACC_W-1:0] in_acc [LANES],
  input  logic [4:0]              shift,
  input  logic [3:0]              bits,
  output logic                    out_valid,
  output logic                    out_first,
  output logic                    out_last,
  output logic [PIX_W-1:0]        out [LANES]
);
  logic [PIX_W-1:0] qmax;
  logic [PIX_W-1:0] q [LANES];

  always_comb begin
    qmax = (bits >= 4'(PIX_W)) ? '1 : PIX_W'((9'd1 << bits) - 9'd1);
    for (int l = 0; l < int'(LANES); l++) begin
      logic signed [ACC_W-1:0] s;
      s = in_acc[l] >>> shift;
      if (in_acc[l] <= 0)                       q[l] = '0;
      else if (s > ACC_W'(signed'({1'b0, qmax}))) q[l] = qmax;
      else                                      q[l] = s[PIX_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) out <= q;
  end
endmodule
