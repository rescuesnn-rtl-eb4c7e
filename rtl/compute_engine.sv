// compute_engine: SNN compute engine with the hardware enhancements for
// fault-aware mapping (top of the design).
//
// An M x N synapse crossbar (M input rows, N neurons) processes one SNN
// time step per 'start': the input spike vector is latched, the ECU sweeps
// the rows one per cycle, in every column the HEB re-orders the selected
// synapse's spike-gated weight and the synapse adds it to the running column
// sum, and after the sweep each LIF neuron integrates its column sum. 'done'
// then marks spikes_out valid. Start to done: M + 2 cycles.
//
//   spikes_in -> spike register -> synapse_column[c] -> gated_w -> heb[c]
//                                       ^                            |
//                                       +--------- heb_w <-----------+
//                synapse_column[c].col_sum -> lif_neuron[c] -> spikes_out[c]
//   ecu: sel, shuffle[c], acc_en, step, col_en
//
// Fault-aware mapping is done off-chip: software chooses for every weight
// a rotation that puts its significant bits on fault-free cells, writes the
// rotated weight (CFG_WEIGHT) and the rotation (CFG_SHUFFLE), and disables
// columns whose neuron must not be used (CFG_COLEN). A disabled column's
// neuron does not step and its output spike is forced to 0. FAM1 uses only
// column enables, FAM2 and FAM3 also rotations; shuffle = 0 everywhere with
// all columns enabled is the unmitigated engine.
//
// Configuration port: one write per cycle while idle. cfg_row selects the
// row, cfg_col_mask the columns written, cfg_data[c] carries column c's
// 8-bit value (weights, stuck-at masks) or its low 3 bits (shuffle, neuron
// fault type) or bit 0 (column enable). CFG_NPARAM loads vth, vreset and
// vleak into the masked neurons and resets their state. The stuck-at masks
// and neuron fault types model permanent faults and are 0 on a good part.
//
// Sizes (M = N = 256, 8-bit weights, 32-bit sums, 3-bit shuffle) follow the
// published engine; the port protocol and sequencing are this design's own.
module compute_engine
  import rescue_pkg::*;
#(
  parameter int unsigned M      = 256,  // input rows / synapses per column
  parameter int unsigned N      = 256,  // columns / neurons
  parameter int unsigned REFRAC = 5     // neuron refractory period
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          cfg_we,
  input  cfg_target_e                   cfg_target,
  input  logic [$clog2(M)-1:0]          cfg_row,
  input  logic [N-1:0]                  cfg_col_mask,
  input  logic [N-1:0][WGH_W-1:0]       cfg_data,
  input  logic [PSUM_W-1:0]             vth,
  input  logic [PSUM_W-1:0]             vreset,
  input  logic [PSUM_W-1:0]             vleak,
  // time-step control
  input  logic                          start,
  input  logic [M-1:0]                  spikes_in,
  output logic                          busy,
  output logic                          done,
  output logic [N-1:0]                  spikes_out,
  output logic [N-1:0][PSUM_W-1:0]      vmem_out
);

  localparam int unsigned RW = $clog2(M);

  logic [M-1:0]                   spk_q;
  nfault_e                        nfault_q [N];
  logic [N-1:0][RW-1:0]           sel;
  logic [N-1:0][SHUF_W-1:0]       shuffle;
  logic [N-1:0]                   col_en;
  logic                           acc_en, step;
  logic [N-1:0][SHUF_W-1:0]       shuf_data;
  logic [N-1:0]                   colen_data;

  // input spike register, loaded when a time step starts
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                spk_q <= '0;
    else if (start && !busy)   spk_q <= spikes_in;
  end

  // neuron fault types (fault model)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) nfault_q[c] <= NF_NONE;
    end else if (cfg_we && cfg_target == CFG_NFAULT) begin
      for (int c = 0; c < N; c++)
        if (cfg_col_mask[c]) nfault_q[c] <= nfault_e'(cfg_data[c][2:0]);
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      shuf_data[c]  = cfg_data[c][SHUF_W-1:0];
      colen_data[c] = cfg_data[c][0];
    end
  end

  ecu #(.M(M), .N(N)) u_ecu (
    .clk        (clk),
    .rst_n      (rst_n),
    .shuf_we    (cfg_we && cfg_target == CFG_SHUFFLE),
    .shuf_row   (cfg_row),
    .shuf_data  (shuf_data),
    .shuf_mask  (cfg_col_mask),
    .colen_we   (cfg_we && cfg_target == CFG_COLEN),
    .colen_data (colen_data),
    .start      (start),
    .busy       (busy),
    .done       (done),
    .sel        (sel),
    .shuffle    (shuffle),
    .acc_en     (acc_en),
    .step       (step),
    .col_en     (col_en)
  );

  for (genvar c = 0; c < N; c++) begin : g_col
    logic [M-1:0][WGH_W-1:0] gated_w;
    logic [WGH_W-1:0]        heb_w;
    logic [PSUM_W-1:0]       col_sum;
    logic                    n_spike;

    synapse_column #(.M(M)) u_syn (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg_we     (cfg_we && cfg_col_mask[c]),
      .cfg_target (cfg_target),
      .cfg_row    (cfg_row),
      .cfg_data   (cfg_data[c]),
      .spikes     (spk_q),
      .gated_w    (gated_w),
      .heb_w      (heb_w),
      .acc_en     (acc_en),
      .sel        (sel[c]),
      .col_sum    (col_sum)
    );

    heb #(.M(M)) u_heb (
      .gated_w (gated_w),
      .sel     (sel[c]),
      .shuffle (shuffle[c]),
      .w_out   (heb_w)
    );

    lif_neuron #(.VW(PSUM_W), .REFRAC(REFRAC)) u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .param_we  (cfg_we && cfg_target == CFG_NPARAM && cfg_col_mask[c]),
      .vth_in    (vth),
      .vreset_in (vreset),
      .vleak_in  (vleak),
      .step      (step && col_en[c]),
      .wgh       (col_sum),
      .fault     (nfault_q[c]),
      .out_spike (n_spike),
      .vmem      (vmem_out[c])
    );

    assign spikes_out[c] = n_spike && col_en[c];
  end

  // Configuration is only accepted while no time step is running.
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               cfg_we |-> !busy)
    else $error("compute_engine: configuration write while busy");

endmodule
