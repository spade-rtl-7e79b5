// sfu: Special Function Unit, applied to each fully accumulated output pillar on
// its way out: ReLU(Prune(O)). With pruning enabled (SpConv-P layers) the pillar's
// magnitude, the sum of the absolute values of its PE_COLS 32-bit partial sums, is
// compared with a threshold; a pillar below it is dropped (`keep` low) and is not
// written out, so the next layer never sees it. Kept pillars pass through ReLU and
// are requantised to signed 8 bits by an arithmetic right shift with saturation.
// Purely combinational. Pruning by magnitude against a per-layer threshold follows
// the paper; the L1 measure and the shift-and-saturate requantisation are this
// design's choices.
module sfu #(
  parameter int unsigned PE_COLS = 64
) (
  input  logic [PE_COLS*32-1:0] in_vec,
  input  logic                  prune_en,
  input  logic [39:0]           threshold,
  input  logic [4:0]            shift,
  output logic                  keep,
  output logic [39:0]           magnitude,
  output logic [PE_COLS*8-1:0]  out_vec
);
  always_comb begin
    magnitude = '0;
    for (int j = 0; j < PE_COLS; j++) begin
      automatic logic signed [31:0] v = $signed(in_vec[j*32 +: 32]);
      automatic logic signed [39:0] v40 = 40'(v);
      automatic logic signed [31:0] s;
      magnitude += (v40 < 0) ? 40'(-v40) : 40'(v40);
      s = (v < 0) ? 32'sd0 : (v >>> shift);
      out_vec[j*8 +: 8] = (s > 32'sd127) ? 8'sd127 : s[7:0];
    end
    keep = !prune_en || (magnitude >= threshold);
  end
endmodule
