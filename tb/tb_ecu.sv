// tb_ecu: checks the enhancement control unit. Random shuffle values and a
// column-enable mask are written; for each started time step the testbench
// follows the sweep cycle by cycle and checks that sel runs 0..M-1 on every
// column with acc_en high, that each column receives the shuffle value
// stored for (sel, column), that one step cycle follows, and that done
// comes exactly M + 2 cycles after start.
module tb_ecu;
  import rescue_pkg::*;

  localparam int unsigned M = 8, N = 5, RW = $clog2(M);

  logic clk = 1'b0, rst_n = 1'b0;
  logic shuf_we = 1'b0, colen_we = 1'b0, start = 1'b0;
  logic [RW-1:0] shuf_row = '0;
  logic [N-1:0][2:0] shuf_data = '0;
  logic [N-1:0] shuf_mask = '0, colen_data = '0;
  logic busy, done, acc_en, step;
  logic [N-1:0][RW-1:0] sel;
  logic [N-1:0][2:0] shuffle;
  logic [N-1:0] col_en;

  logic [2:0] ref_shuf [M][N];
  int checks = 0, failures = 0;

  ecu #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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
    int cyc;
    logic [N-1:0] en;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(col_en == '1, "all columns enabled after reset");
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) ref_shuf[r][c] = 3'd0;
    for (int trial = 0; trial < 12; trial++) begin
      // rewrite some rows, some columns only
      for (int k = 0; k < 4; k++) begin
        shuf_row  = RW'($urandom_range(0, M - 1));
        shuf_mask = N'($urandom);
        for (int c = 0; c < N; c++) begin
          shuf_data[c] = 3'($urandom);
          if (shuf_mask[c]) ref_shuf[shuf_row][c] = shuf_data[c];
        end
        shuf_we = 1'b1;
        @(negedge clk);
        shuf_we = 1'b0;
      end
      en = N'($urandom);
      colen_data = en; colen_we = 1'b1;
      @(negedge clk);
      colen_we = 1'b0;
      chk(col_en == en, "column enable written");
      chk(!busy, "idle before start");
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      for (int r = 0; r < M; r++) begin
        chk(acc_en && busy && !step && !done, $sformatf("accumulation cycle %0d", r));
        for (int c = 0; c < N; c++) begin
          chk(sel[c] == RW'(r), $sformatf("sel[%0d]=%0d exp %0d", c, sel[c], r));
          chk(shuffle[c] == ref_shuf[r][c],
              $sformatf("shuffle row %0d col %0d = %0d exp %0d", r, c, shuffle[c], ref_shuf[r][c]));
        end
        @(negedge clk);
        cyc++;
      end
      chk(step && !acc_en && !done, "step cycle after the sweep");
      @(negedge clk);
      cyc++;
      chk(done && !step && !acc_en, "done after step");
      chk(cyc == M + 2, $sformatf("start-to-done latency %0d exp %0d", cyc, M + 2));
      @(negedge clk);
      chk(!done && !busy, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
