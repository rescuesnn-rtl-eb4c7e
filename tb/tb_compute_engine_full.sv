// tb_compute_engine_full: end-to-end test of the compute engine (full size: 256 rows, 256 columns, default parameters).
//
// A random fault map is drawn: each weight memory cell is faulty with
// probability 1/16 (stuck-at 0 or 1 at random) and the first columns get
// one neuron fault each (Vmem increase, leak, reset, spike generation). The
// same weights and input spike trains are then run under four mappings:
//   baseline - weights unrotated, every column used;
//   FAM1     - weights unrotated, columns with a faulty neuron disabled;
//   FAM2     - weights rotated by the fault-aware shift, faulty-neuron
//              columns disabled;
//   FAM3     - weights rotated, only columns with a faulty reset disabled.
// For every time step the testbench computes each column sum from its own
// copy of weights, rotations and stuck-at masks, steps a reference neuron
// model, and compares spikes_out and vmem_out; it also checks that done
// follows start by M + 2 cycles. Each mechanism (rotation in use, stuck-at
// 0 and 1 cells read, each neuron fault type, disabled columns, leak,
// reset, refractory masking, every mapping mode) is counted and must occur.
module tb_compute_engine_full;
  import rescue_pkg::*;
  import fam_pkg::*;

  localparam int unsigned M = 256, N = 256, RW = $clog2(M);
  localparam int unsigned STEPS = 12;
  localparam int unsigned REFRAC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  cfg_target_e cfg_target = CFG_WEIGHT;
  logic [RW-1:0] cfg_row = '0;
  logic [N-1:0] cfg_col_mask = '0;
  logic [N-1:0][7:0] cfg_data = '0;
  logic [31:0] vth = 0, vreset = 0, vleak = 0;
  logic start = 1'b0;
  logic [M-1:0] spikes_in = '0;
  logic busy, done;
  logic [N-1:0] spikes_out;
  logic [N-1:0][31:0] vmem_out;

  logic [7:0] w [M][N], sa0 [M][N], sa1 [M][N];
  logic [2:0] shf [M][N];
  int nfault [N];
  logic [M-1:0] spk_train [STEPS];
  nstate_t st [N];
  logic [N-1:0] en;

  int checks = 0, failures = 0;
  int n_rot = 0, n_sa0 = 0, n_sa1 = 0, n_disabled = 0, n_leak = 0, n_reset = 0;
  int n_refrac = 0, n_spikes = 0, n_fam_better = 0;
  int n_fault_spk [5];
  int n_mode [4];

  compute_engine  dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic cfg_write(input cfg_target_e t, input int r);
    cfg_we = 1'b1; cfg_target = t; cfg_row = RW'(r); cfg_col_mask = '1;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // Load a mapping: mode 0 baseline, 1 FAM1, 2 FAM2, 3 FAM3.
  task automatic load_mapping(input int mode);
    bit rotate;
    rotate = (mode >= 2);
    for (int r = 0; r < M; r++) begin
      for (int c = 0; c < N; c++) begin
        shf[r][c] = rotate ? fam_shift(sa0[r][c] | sa1[r][c]) : 3'd0;
        cfg_data[c] = ror8(w[r][c], int'(shf[r][c]));
      end
      cfg_write(CFG_WEIGHT, r);
      for (int c = 0; c < N; c++) cfg_data[c] = 8'(shf[r][c]);
      cfg_write(CFG_SHUFFLE, r);
    end
    for (int c = 0; c < N; c++) begin
      unique case (mode)
        0: en[c] = 1'b1;
        1, 2: en[c] = (nfault[c] == 0);
        default: en[c] = (nfault[c] != 3);
      endcase
      cfg_data[c] = {7'd0, en[c]};
      if (!en[c]) n_disabled++;
    end
    cfg_write(CFG_COLEN, 0);
    // neuron parameters (also clears the neurons' state)
    vth = 32'(M * 110); vreset = 32'(M * 2); vleak = 32'(M * 3);
    cfg_write(CFG_NPARAM, 0);
    for (int c = 0; c < N; c++) st[c] = '{vmem: vreset, tref: 3'd0, spike: 1'b0, stuck: 1'b0};
  endtask

  task automatic run_steps(input int mode);
    logic [31:0] sum;
    logic [7:0] seen, base;
    int lat;
    for (int t = 0; t < STEPS; t++) begin
      spikes_in = spk_train[t];
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      chk(lat == M + 2, $sformatf("start-to-done %0d cycles, expected %0d", lat, M + 2));
      for (int c = 0; c < N; c++) begin
        sum = 0;
        for (int r = 0; r < M; r++) begin
          if (spk_train[t][r]) begin
            seen = seen_weight(w[r][c], shf[r][c], sa0[r][c], sa1[r][c]);
            base = (w[r][c] & ~sa0[r][c]) | sa1[r][c];
            sum += 32'(seen);
            if (shf[r][c] != 0) n_rot++;
            if (((ror8(w[r][c], int'(shf[r][c])) & sa0[r][c]) != 0)) n_sa0++;
            if (((~ror8(w[r][c], int'(shf[r][c])) & sa1[r][c]) != 0)) n_sa1++;
            if (shf[r][c] != 0 && (seen > w[r][c] ? seen - w[r][c] : w[r][c] - seen)
                                < (base > w[r][c] ? base - w[r][c] : w[r][c] - base))
              n_fam_better++;
          end
        end
        if (en[c]) begin
          if (sum == 0 && st[c].vmem < vth) n_leak++;
          if (st[c].vmem >= vth && nfault[c] != 3) n_reset++;
          st[c] = lif_ref_step(st[c], sum, vth, vreset, vleak, nfault[c], REFRAC);
          if (st[c].spike && st[c].tref != 0 && nfault[c] != 3 && nfault[c] != 4) n_refrac++;
        end
        chk(spikes_out[c] == (en[c] && lif_ref_out(st[c], nfault[c])),
            $sformatf("mode %0d step %0d col %0d spike %0b", mode, t, c, spikes_out[c]));
        chk(vmem_out[c] == st[c].vmem,
            $sformatf("mode %0d step %0d col %0d vmem %0d exp %0d", mode, t, c, vmem_out[c], st[c].vmem));
        if (spikes_out[c]) begin
          n_spikes++;
          n_fault_spk[nfault[c]]++;
        end
      end
      @(negedge clk);
    end
    n_mode[mode]++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // weights, fault map, input spikes
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        w[r][c] = 8'($urandom_range(0, 255));
        sa0[r][c] = 8'h00;
        sa1[r][c] = 8'h00;
        for (int b = 0; b < 8; b++)
          if ($urandom_range(0, 16 - 1) == 0) begin
            if ($urandom_range(0, 1) == 1) sa1[r][c][b] = 1'b1;
            else                           sa0[r][c][b] = 1'b1;
          end
      end
    for (int c = 0; c < N; c++) nfault[c] = (c >= 1 && c <= 4) ? c : 0;
    for (int t = 0; t < STEPS; t++)
      for (int r = 0; r < M; r++)  // every fifth step has no input spike
        spk_train[t][r] = (t % 5 != 4) && ($urandom_range(0, 2) == 0);
    // write the fault model
    for (int r = 0; r < M; r++) begin
      for (int c = 0; c < N; c++) cfg_data[c] = sa0[r][c];
      cfg_write(CFG_SA0, r);
      for (int c = 0; c < N; c++) cfg_data[c] = sa1[r][c];
      cfg_write(CFG_SA1, r);
    end
    for (int c = 0; c < N; c++) cfg_data[c] = 8'(nfault[c]);
    cfg_write(CFG_NFAULT, 0);
    for (int mode = 0; mode < 4; mode++) begin
      load_mapping(mode);
      run_steps(mode);
    end
    $display("rotated weights read %0d, stuck-at-0 hits %0d, stuck-at-1 hits %0d, FAM closer to true weight %0d",
             n_rot, n_sa0, n_sa1, n_fam_better);
    $display("disabled columns %0d, leaks %0d, resets %0d, refractory masks %0d, output spikes %0d",
             n_disabled, n_leak, n_reset, n_refrac, n_spikes);
    $display("output spikes by neuron fault type: none %0d inc %0d leak %0d reset %0d spikegen %0d",
             n_fault_spk[0], n_fault_spk[1], n_fault_spk[2], n_fault_spk[3], n_fault_spk[4]);
    chk(n_rot > 0, "bit rotation never used");
    chk(n_sa0 > 0, "no stuck-at-0 cell changed a weight");
    chk(n_sa1 > 0, "no stuck-at-1 cell changed a weight");
    chk(n_fam_better > 0, "rotation never brought a weight closer");
    chk(n_disabled > 0, "no column was disabled");
    chk(n_leak > 0, "leak never happened");
    chk(n_reset > 0, "reset never happened");
    chk(n_refrac > 0, "refractory masking never happened");
    chk(n_fault_spk[0] > 0, "fault-free neurons never spiked");
    chk(n_fault_spk[3] > 0, "faulty-reset neuron never spiked");
    chk(n_fault_spk[1] == 0 && n_fault_spk[4] == 0, "dormant neuron spiked");
    for (int m = 0; m < 4; m++) chk(n_mode[m] == 1, $sformatf("mapping mode %0d not run", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
