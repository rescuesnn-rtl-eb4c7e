// tb_synapse_column: checks one synapse column. Random weights and
// stuck-at masks are written through the configuration port; for random
// spike vectors the testbench plays the role of the HEB (rotating the
// selected gated weight by a per-row rotation), sweeps sel = 0..M-1 with
// acc_en, and compares every gated weight and the final column sum with a
// sum computed from its own copy of the weights and fault masks.
module tb_synapse_column;
  import rescue_pkg::*;
  import fam_pkg::*;

  localparam int unsigned M = 16;
  localparam int unsigned RW = $clog2(M);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  cfg_target_e cfg_target = CFG_WEIGHT;
  logic [RW-1:0] cfg_row = '0;
  logic [7:0] cfg_data = '0;
  logic [M-1:0] spikes = '0;
  logic [M-1:0][7:0] gated_w;
  logic [7:0] heb_w;
  logic acc_en = 1'b0;
  logic [RW-1:0] sel = '0;
  logic [31:0] col_sum;

  logic [7:0] w_ref [M], sa0_ref [M], sa1_ref [M];
  logic [2:0] shf [M];
  int checks = 0, failures = 0;

  synapse_column #(.M(M)) dut (.*);

  // The testbench stands in for the HEB.
  assign heb_w = rol8(gated_w[sel], int'(shf[sel]));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input cfg_target_e t, input int r, input logic [7:0] d);
    // inputs change on the falling edge, the DUT samples on the rising one
    cfg_we = 1'b1; cfg_target = t; cfg_row = RW'(r); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    logic [31:0] exp_sum;
    logic [7:0]  eff;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int trial = 0; trial < 40; trial++) begin
      // new weights, fault masks and rotations for some trials
      if (trial % 10 == 0) begin
        for (int r = 0; r < M; r++) begin
          w_ref[r]   = 8'($urandom);
          sa0_ref[r] = (trial == 0) ? 8'h00 : 8'($urandom & $urandom & $urandom);
          sa1_ref[r] = (trial == 0) ? 8'h00 : 8'($urandom & $urandom & $urandom);
          shf[r]     = 3'($urandom);
          cfg(CFG_WEIGHT, r, w_ref[r]);
          cfg(CFG_SA0, r, sa0_ref[r]);
          cfg(CFG_SA1, r, sa1_ref[r]);
        end
      end
      spikes = M'({$urandom, $urandom});
      if (trial == 1) spikes = '1;
      if (trial == 2) spikes = '0;
      @(negedge clk);
      exp_sum = 0;
      for (int r = 0; r < M; r++) begin
        eff = spikes[r] ? ((w_ref[r] & ~sa0_ref[r]) | sa1_ref[r]) : 8'h00;
        checks++;
        if (gated_w[r] !== eff) begin
          failures++;
          $display("FAIL gated_w[%0d]=%02h exp %02h", r, gated_w[r], eff);
        end
        exp_sum += 32'(rol8(eff, int'(shf[r])));
      end
      for (int r = 0; r < M; r++) begin
        acc_en = 1'b1; sel = RW'(r);
        @(negedge clk);
      end
      acc_en = 1'b0;
      @(negedge clk);
      checks++;
      if (col_sum !== exp_sum) begin
        failures++;
        $display("FAIL trial %0d col_sum=%0d exp %0d", trial, col_sum, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
