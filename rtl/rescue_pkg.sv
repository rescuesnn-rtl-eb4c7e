// rescue_pkg: widths and encodings shared by the fault-tolerant SNN compute
// engine (synapse columns, hardware enhancement blocks, enhancement control
// unit and LIF neurons).
//
// The 8-bit weight, the 32-bit partial-sum register and the 3-bit shuffle
// field follow the published design. The encodings of the neuron fault
// types and of the configuration targets are this implementation's own.
package rescue_pkg;

  localparam int unsigned WGH_W  = 8;   // weight precision
  localparam int unsigned PSUM_W = 32;  // accumulated value in each synapse
  localparam int unsigned SHUF_W = 3;   // rotation amount of an 8-bit word

  // Permanent fault modelled on one neuron. Only one faulty operation is
  // modelled per neuron.
  typedef enum logic [2:0] {
    NF_NONE       = 3'd0,  // fault-free
    NF_VMEM_INC   = 3'd1,  // faulty 'Vmem increase' adder: no integration
    NF_VMEM_LEAK  = 3'd2,  // faulty 'Vmem leak' subtractor: no leak (IF)
    NF_VMEM_RESET = 3'd3,  // faulty '>=' comparator: no reset, spikes forever
    NF_SPIKE_GEN  = 3'd4   // faulty output multiplexer: output stuck at 0
  } nfault_e;

  // Target of a row-wide configuration write.
  typedef enum logic [2:0] {
    CFG_WEIGHT  = 3'd0,  // 8-bit (shuffled) weights of one row
    CFG_SHUFFLE = 3'd1,  // 3-bit shuffle values of one row (ECU)
    CFG_SA0     = 3'd2,  // stuck-at-0 cell mask of one row (fault model)
    CFG_SA1     = 3'd3,  // stuck-at-1 cell mask of one row (fault model)
    CFG_NFAULT  = 3'd4,  // neuron fault type per column (fault model)
    CFG_COLEN   = 3'd5,  // column enable per column (mapping metadata)
    CFG_NPARAM  = 3'd6   // load Vth, Vreset, Vleak into the selected neurons
  } cfg_target_e;

endpackage
