// lif_neuron: leaky integrate-and-fire neuron at the foot of one column,
// with the permanent-fault models of its four operations.
//
// Once per SNN time step ('step' high for one cycle) the neuron takes the
// column sum 'wgh' and updates its registers:
//   Vmem increase : wgh != 0          -> Vmem + wgh
//   Vmem leak     : wgh == 0          -> Vmem - Vleak, floored at 0
//                                        (0 unless Vmem > Vleak)
//   Vmem reset    : Vmem >= Vth       -> Vreset, and the spike register is
//                                        set; otherwise it is cleared
//   refractory    : a set spike register loads Tref with REFRAC (5); Tref
//                   then counts down to 0, one per step
//   spike gen.    : out_spike = spike register, forced to 0 while Tref > 0
// The comparator looks at the registered Vmem, so a crossing shows up as a
// spike one step later. Vth, Vreset and Vleak are registers loaded through
// param_we.
//
// Fault models (input 'fault'):
//   NF_VMEM_INC   the increase adder passes Vmem unchanged (dormant neuron)
//   NF_VMEM_LEAK  the leak subtractor passes Vmem unchanged (an IF neuron)
//   NF_VMEM_RESET Vmem is never reset; once it has reached Vth the neuron
//                 spikes at every step, the refractory mask included
//   NF_SPIKE_GEN  the output multiplexer is stuck at 0 (no output spikes)
//
// The datapath (=0 detector on wgh, leak subtractor with '>' floor, '>='
// comparator selecting Vreset, Tref loaded with 5 and decremented, output
// multiplexer selecting 0 while Tref > 0) follows the published neuron
// schematic. Own choices: the saturation of the increase adder at all-ones,
// unsigned 32-bit Vmem, reset values (Vmem = Vth = Vreset = Vleak = 0), and
// the exact behaviour of the faulty comparator, which the text describes
// only as "continuously generating spikes once Vmem reaches Vth".
module lif_neuron
  import rescue_pkg::*;
#(
  parameter int unsigned VW     = 32,  // membrane potential width
  parameter int unsigned REFRAC = 5    // refractory period in time steps
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          param_we,   // load Vth, Vreset, Vleak
  input  logic [VW-1:0] vth_in,
  input  logic [VW-1:0] vreset_in,
  input  logic [VW-1:0] vleak_in,
  input  logic          step,       // one SNN time step
  input  logic [VW-1:0] wgh,        // column sum of this time step
  input  nfault_e       fault,      // fault model of this neuron
  output logic          out_spike,
  output logic [VW-1:0] vmem        // membrane potential (observation)
);

  localparam int unsigned TW = $clog2(REFRAC + 1);

  logic [VW-1:0] vmem_q, vth_q, vreset_q, vleak_q;
  logic [TW-1:0] tref_q;
  logic          spike_q;
  logic          stuck_q;   // faulty comparator has latched

  logic [VW:0]   inc_sum;
  logic [VW-1:0] v_inc, v_leak, v_int, vmem_d;
  logic          cmp, spike_d;

  always_comb begin
    // Vmem increase
    inc_sum = {1'b0, vmem_q} + {1'b0, wgh};
    v_inc   = inc_sum[VW] ? '1 : inc_sum[VW-1:0];
    if (fault == NF_VMEM_INC) v_inc = vmem_q;
    // Vmem leak
    v_leak = (vmem_q > vleak_q) ? (vmem_q - vleak_q) : '0;
    if (fault == NF_VMEM_LEAK) v_leak = vmem_q;
    // no input (wgh == 0) selects the leak path
    v_int = (wgh == '0) ? v_leak : v_inc;
    // Vmem reset
    cmp = (vmem_q >= vth_q);
    if (fault == NF_VMEM_RESET) begin
      vmem_d  = v_int;
      spike_d = cmp || stuck_q;
    end else begin
      vmem_d  = cmp ? vreset_q : v_int;
      spike_d = cmp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem_q   <= '0;
      vth_q    <= '0;
      vreset_q <= '0;
      vleak_q  <= '0;
      tref_q   <= '0;
      spike_q  <= 1'b0;
      stuck_q  <= 1'b0;
    end else begin
      if (param_we) begin
        vth_q    <= vth_in;
        vreset_q <= vreset_in;
        vleak_q  <= vleak_in;
        vmem_q   <= vreset_in;
        tref_q   <= '0;
        spike_q  <= 1'b0;
        stuck_q  <= 1'b0;
      end else if (step) begin
        vmem_q  <= vmem_d;
        spike_q <= spike_d;
        stuck_q <= (fault == NF_VMEM_RESET) && spike_d;
        if (spike_q)          tref_q <= TW'(REFRAC);
        else if (tref_q != 0) tref_q <= tref_q - 1'b1;
      end
    end
  end

  // Spike generation: output multiplexer.
  always_comb begin
    if (fault == NF_SPIKE_GEN)       out_spike = 1'b0;
    else if (fault == NF_VMEM_RESET) out_spike = spike_q;
    else                             out_spike = (tref_q != 0) ? 1'b0 : spike_q;
  end

  assign vmem = vmem_q;

endmodule
