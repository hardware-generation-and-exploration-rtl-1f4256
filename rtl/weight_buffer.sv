// weight_buffer: the encoded weight tile register and its alignment delay.
//
// A tile of L x K keys (one key per group of MU ternary weights) enters
// together with the input tile it multiplies. The LUTs need MU cycles to
// build their entries from that input tile, so the keys are delayed by
// DEPTH = MU register stages; the first stage is the weight tile register.
// Each stage loads only when it holds valid data, so the keys stay aligned
// with the LUT entries also when the input stream has bubbles.
//
// Timing: keys_out/out_valid follow keys_in/in_valid by DEPTH cycles.
// Synchronous active-low reset clears the valid bits.
//
// The source architecture shows the weight tile only as a block; this delay
// line is this design's way of aligning it with the LUT pipeline.
module weight_buffer #(
  parameter int unsigned L     = 11,
  parameter int unsigned K     = 32,
  parameter int unsigned KEY_W = 5,
  parameter int unsigned DEPTH = 3
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [L-1:0][K-1:0][KEY_W-1:0]    keys_in,
  output logic [L-1:0][K-1:0][KEY_W-1:0]    keys_out,
  output logic                              out_valid
);

  logic [L-1:0][K-1:0][KEY_W-1:0] q [DEPTH];
  logic [DEPTH-1:0]               v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v <= '0;
    end else begin
      v[0] <= in_valid;
      for (int unsigned s = 1; s < DEPTH; s++) v[s] <= v[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) q[0] <= keys_in;
    for (int unsigned s = 1; s < DEPTH; s++) begin
      if (v[s-1]) q[s] <= q[s-1];
    end
  end

  assign keys_out  = q[DEPTH-1];
  assign out_valid = v[DEPTH-1];

endmodule
