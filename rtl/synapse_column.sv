// synapse_column: one column of the synapse crossbar.
//
// Each of the M synapses holds an 8-bit weight register, a 2:1 multiplexer
// that passes the weight when the row's input spike is 1 and 0 otherwise,
// an adder and a 32-bit register. The adder of synapse k adds the weight of
// synapse k to the accumulated value of synapse k-1, so the column sum
// ripples down the column and only one wire reaches the neuron (synapse 0
// starts from 0).
//
// With the fault-tolerance enhancement, the gated weights leave the column
// (gated_w) to the column's HEB, which returns one re-ordered weight per
// cycle (heb_w). The adder of synapse k uses it in the cycle in which the
// ECU selects row k (acc_en && sel == k); the other partial-sum registers
// hold. After the ECU has swept sel = 0..M-1, col_sum (the register of
// synapse M-1) holds sum over k of spike[k] ? w[k] : 0.
//
// Permanent faults of the weight memory cells are modelled by two masks per
// synapse: a cell whose sa0 bit is set always reads 0, one whose sa1 bit is
// set always reads 1 (stuck-at-1 wins if both are set). The masks are
// written through the configuration port like the weights; on a fault-free
// part they stay 0.
//
// Follows the published design: weight register, spike gating multiplexer,
// adder and 32-bit register per synapse, chained per column. This design's
// own choices: the per-row enable of the partial-sum registers, the
// row-wide write port, the reset of all registers to 0, and no saturation
// of the 32-bit sum (8-bit weights and M <= 2**24 rows cannot overflow).
//
// Timing: a weight write is visible from the next cycle; one row is
// accumulated per cycle while acc_en is high.
module synapse_column
  import rescue_pkg::*;
#(
  parameter int unsigned M = 256  // synapses (rows) per column (>= 2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration write (one row of this column per cycle)
  input  logic                     cfg_we,
  input  cfg_target_e              cfg_target,
  input  logic [$clog2(M)-1:0]     cfg_row,
  input  logic [WGH_W-1:0]         cfg_data,
  // input spikes of the current time step, one per row
  input  logic [M-1:0]             spikes,
  // interface to the column's HEB
  output logic [M-1:0][WGH_W-1:0]  gated_w,
  input  logic [WGH_W-1:0]         heb_w,
  // accumulation control from the ECU
  input  logic                     acc_en,
  input  logic [$clog2(M)-1:0]     sel,
  // accumulated column sum towards the neuron
  output logic [PSUM_W-1:0]        col_sum
);

  logic [M-1:0][WGH_W-1:0]  wgh_q;   // weight registers (stored bits)
  logic [M-1:0][WGH_W-1:0]  sa0_q;   // fault model: stuck-at-0 cells
  logic [M-1:0][WGH_W-1:0]  sa1_q;   // fault model: stuck-at-1 cells
  logic [M-1:0][PSUM_W-1:0] psum_q;  // accumulated value of each synapse

  // Weight memory, with the fault masks applied as the cells are read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wgh_q <= '0;
      sa0_q <= '0;
      sa1_q <= '0;
    end else if (cfg_we) begin
      unique case (cfg_target)
        CFG_WEIGHT: wgh_q[cfg_row] <= cfg_data;
        CFG_SA0:    sa0_q[cfg_row] <= cfg_data;
        CFG_SA1:    sa1_q[cfg_row] <= cfg_data;
        default: ;
      endcase
    end
  end

  // Spike gating multiplexer of every synapse.
  always_comb begin
    for (int k = 0; k < M; k++)
      gated_w[k] = spikes[k] ? ((wgh_q[k] & ~sa0_q[k]) | sa1_q[k]) : '0;
  end

  // Adder and partial-sum register of every synapse.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_q <= '0;
    end else if (acc_en) begin
      if (sel == '0) psum_q[0] <= PSUM_W'(heb_w);
      for (int k = 1; k < M; k++) begin
        if (sel == k[$clog2(M)-1:0]) psum_q[k] <= psum_q[k-1] + PSUM_W'(heb_w);
      end
    end
  end

  assign col_sum = psum_q[M-1];

endmodule
