// tb_lif_neuron: checks the LIF neuron, fault-free and with each of the four
// faulty operations, against the reference time-step model in fam_pkg.
// Random column sums (often 0, so that the leak path is exercised) drive
// the neuron step by step; after each step out_spike and Vmem are compared.
// It also checks the behaviour each fault is known for: faulty increase or
// faulty spike generation never spikes, a faulty reset keeps spiking once
// it has fired, and a faulty leak never lets Vmem fall.
module tb_lif_neuron;
  import rescue_pkg::*;
  import fam_pkg::*;

  localparam int unsigned REFRAC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic param_we = 1'b0, step = 1'b0;
  logic [31:0] vth_in = 0, vreset_in = 0, vleak_in = 0, wgh = 0;
  nfault_e fault = NF_NONE;
  logic out_spike;
  logic [31:0] vmem;
  int checks = 0, failures = 0;
  int spikes_seen [5];
  int refrac_masked = 0, leak_steps = 0, resets = 0;

  lif_neuron #(.VW(32), .REFRAC(REFRAC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin
    nstate_t st;
    logic [31:0] vth, vrst, vlk, prev_v;
    bit fired;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < 5; f++) begin
      for (int run = 0; run < 4; run++) begin
        vth  = 32'(200 + $urandom_range(0, 600));
        vrst = 32'($urandom_range(0, 50));
        vlk  = 32'($urandom_range(1, 40));
        fault = nfault_e'(f);
        vth_in = vth; vreset_in = vrst; vleak_in = vlk; param_we = 1'b1;
        @(negedge clk);
        param_we = 1'b0;
        st = '{vmem: vrst, tref: 3'd0, spike: 1'b0, stuck: 1'b0};
        fired = 1'b0;
        for (int t = 0; t < 120; t++) begin
          wgh = ($urandom_range(0, 2) == 0) ? 32'd0 : 32'($urandom_range(1, 150));
          prev_v = vmem;
          step = 1'b1;
          @(negedge clk);
          step = 1'b0;
          if (wgh == 0 && st.vmem < vth) leak_steps++;
          if (st.vmem >= vth && f != 3) resets++;
          st = lif_ref_step(st, wgh, vth, vrst, vlk, f, REFRAC);
          if (st.spike && st.tref != 0 && f != 3 && f != 4) refrac_masked++;
          chk(vmem == st.vmem, $sformatf("fault %0d vmem %0d exp %0d", f, vmem, st.vmem));
          chk(out_spike == lif_ref_out(st, f),
              $sformatf("fault %0d out_spike %0b exp %0b", f, out_spike, lif_ref_out(st, f)));
          if (out_spike) spikes_seen[f]++;
          // behaviour of each fault
          if (f == 1 || f == 4) chk(!out_spike, "dormant neuron spiked");
          if (f == 2) chk(vmem >= prev_v || prev_v >= vth, "faulty leak decreased Vmem");
          if (f == 3 && fired) chk(out_spike, "faulty reset stopped spiking");
          if (out_spike) fired = 1'b1;
          // extra idle cycles between steps must not change anything
          prev_v = vmem;
          @(negedge clk);
          chk(vmem == prev_v, "state changed without step");
        end
      end
    end
    chk(spikes_seen[0] > 0, "fault-free neuron never spiked");
    chk(spikes_seen[2] > 0, "faulty-leak neuron never spiked");
    chk(spikes_seen[3] > 0, "faulty-reset neuron never spiked");
    chk(refrac_masked > 0, "refractory masking never happened");
    chk(leak_steps > 0, "leak never happened");
    chk(resets > 0, "reset never happened");
    $display("spikes per fault type: %0d %0d %0d %0d %0d, refractory masks %0d, leaks %0d, resets %0d",
             spikes_seen[0], spikes_seen[1], spikes_seen[2], spikes_seen[3], spikes_seen[4],
             refrac_masked, leak_steps, resets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
