// ecu: enhancement control unit of the compute engine.
//
// Stores, for every synapse (M rows x N columns), the 3-bit rotation
// ('shuffle') with which its weight was written, and runs one SNN time step
// of the engine:
//   start -> M accumulation cycles: sel = 0, 1, ..., M-1 on every column;
//            each HEB receives the shuffle value of the selected synapse of
//            its column and acc_en is high
//         -> one 'step' cycle in which the neurons integrate the column sums
//         -> 'done' for one cycle; the neurons' spikes are then valid.
// Start to done takes M + 2 cycles (start sampled at edge 0, done high after
// edge M + 2). It also holds the column-enable mask, the part of the mapping
// metadata that says which columns (neurons) are used, so that a fault-aware
// mapping can leave out columns with unusable neurons.
//
// Follows the published design: one 'sel' per column and a set of 3-bit
// shuffle registers per column. Own choices: the sequencing (one row per
// cycle, one neuron step after the sweep), the row-wide write port, the
// column-enable register, and the reset of every register (shuffle 0, all
// columns enabled).
module ecu
  import rescue_pkg::*;
#(
  parameter int unsigned M = 256,  // rows (synapses per column), >= 2
  parameter int unsigned N = 256   // columns (neurons)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // configuration writes
  input  logic                              shuf_we,     // write one row
  input  logic [$clog2(M)-1:0]              shuf_row,
  input  logic [N-1:0][SHUF_W-1:0]          shuf_data,
  input  logic [N-1:0]                      shuf_mask,   // columns written
  input  logic                              colen_we,
  input  logic [N-1:0]                      colen_data,
  // global control
  input  logic                              start,       // run one time step
  output logic                              busy,
  output logic                              done,
  // control of the columns
  output logic [N-1:0][$clog2(M)-1:0]       sel,
  output logic [N-1:0][SHUF_W-1:0]          shuffle,
  output logic                              acc_en,
  output logic                              step,
  output logic [N-1:0]                      col_en
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_STEP, S_DONE} state_e;

  localparam int unsigned RW = $clog2(M);

  state_e                     state_q;
  logic [RW-1:0]              row_q;
  logic [M-1:0][N-1:0][SHUF_W-1:0] shuf_q;
  logic [N-1:0]               colen_q;

  // shuffle and column-enable registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M; r++) shuf_q[r] <= '0;
      colen_q <= '1;
    end else begin
      if (shuf_we) begin
        for (int c = 0; c < N; c++)
          if (shuf_mask[c]) shuf_q[shuf_row][c] <= shuf_data[c];
      end
      if (colen_we) colen_q <= colen_data;
    end
  end

  // time-step sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      row_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_ACC;
          row_q   <= '0;
        end
        S_ACC: begin
          if (row_q == RW'(M - 1)) state_q <= S_STEP;
          else                     row_q   <= row_q + 1'b1;
        end
        S_STEP: state_q <= S_DONE;
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      sel[c]     = row_q;
      shuffle[c] = shuf_q[row_q][c];
    end
  end

  assign acc_en = (state_q == S_ACC);
  assign step   = (state_q == S_STEP);
  assign done   = (state_q == S_DONE);
  assign busy   = (state_q != S_IDLE);
  assign col_en = colen_q;

  // A new time step may only be started while the engine is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> state_q == S_IDLE)
    else $error("ecu: start while busy");

endmodule
