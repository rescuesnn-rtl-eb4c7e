// heb: hardware enhancement block of one compute-engine column.
//
// The weights of a column may be stored rotated ("bit-shuffled") so that
// their most significant bits sit on fault-free memory cells. One HEB per
// column undoes that rotation before the weight reaches the adders:
//   1. an M-to-1 multiplexer, steered by 'sel' from the ECU, picks the
//      spike-gated 8-bit weight of one synapse of the column;
//   2. a 3-stage barrel shifter of 2:1 multiplexers rotates it back, stage
//      k (controlled by shuffle[k]) rotating by 2**k places.
// The result goes back to the adders of all synapses of the column.
//
// The structure (selector, three 8-wide stages of 2:1 multiplexers, the
// shuffle[0..2] controls) follows the published block diagram. The rotation
// direction is a choice of this design: a word stored as ror(w, s) is read
// back as rol(ror(w, s), s) = w, i.e. the HEB rotates towards the MSB by
// 'shuffle'. Purely combinational.
module heb
  import rescue_pkg::*;
#(
  parameter int unsigned M = 256  // synapses per column (>= 2)
) (
  input  logic [M-1:0][WGH_W-1:0] gated_w,  // spike-gated weights of the column
  input  logic [$clog2(M)-1:0]    sel,      // synapse served in this cycle
  input  logic [SHUF_W-1:0]       shuffle,  // rotation amount of that synapse
  output logic [WGH_W-1:0]        w_out     // weight in original bit order
);

  logic [WGH_W-1:0] s_in, s1, s2, s3;

  assign s_in = gated_w[sel];

  // Stage 0: rotate by 1 when shuffle[0].
  always_comb begin
    for (int i = 0; i < WGH_W; i++)
      s1[i] = shuffle[0] ? s_in[(i + WGH_W - 1) % WGH_W] : s_in[i];
  end

  // Stage 1: rotate by 2 when shuffle[1].
  always_comb begin
    for (int i = 0; i < WGH_W; i++)
      s2[i] = shuffle[1] ? s1[(i + WGH_W - 2) % WGH_W] : s1[i];
  end

  // Stage 2: rotate by 4 when shuffle[2].
  always_comb begin
    for (int i = 0; i < WGH_W; i++)
      s3[i] = shuffle[2] ? s2[(i + WGH_W - 4) % WGH_W] : s2[i];
  end

  assign w_out = s3;

endmodule
