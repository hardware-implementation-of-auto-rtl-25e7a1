// amif_input_scaling: maps a raw vibration sample onto one of N_LEVELS
// sampling levels (the paper's "converting the data into the 1-128 range";
// level k here is the paper's level k+1).
//
// bin = clamp((sample - lo) >> shift, 0, N_LEVELS-1), with lo and shift set
// at run time so that the expected signal range covers the levels (for a
// 16-bit two's-complement ADC word and 128 levels: lo = -32768, shift = 9).
// Samples outside the range land in the end levels and raise `clipped`.
// The paper's software version scales by the minimum and maximum of a
// recorded file, which a real-time stream cannot know in advance; the fixed
// offset-and-shift mapping is this design's choice. Combinational.
module amif_input_scaling #(
  parameter int unsigned SAMPLE_W = amif_pkg::SAMPLE_W_DEF,
  parameter int unsigned N_LEVELS = amif_pkg::N_LEVELS_DEF,
  parameter int unsigned BW       = $clog2(N_LEVELS),
  parameter int unsigned SHW      = $clog2(SAMPLE_W + 1)
) (
  input  logic signed [SAMPLE_W-1:0] sample,
  input  logic signed [SAMPLE_W-1:0] lo,
  input  logic [SHW-1:0]             shift,
  output logic [BW-1:0]              bin,
  output logic                       clipped
);

  logic signed [SAMPLE_W:0] diff;
  logic        [SAMPLE_W:0] q;

  always_comb begin
    diff    = (SAMPLE_W+1)'(sample) - (SAMPLE_W+1)'(lo);
    q       = (SAMPLE_W+1)'(diff) >> shift;
    clipped = 1'b0;
    if (diff < 0) begin
      bin     = '0;
      clipped = 1'b1;
    end else if (q > (SAMPLE_W+1)'(N_LEVELS - 1)) begin
      bin     = BW'(N_LEVELS - 1);
      clipped = 1'b1;
    end else begin
      bin     = BW'(q);
    end
  end

endmodule
