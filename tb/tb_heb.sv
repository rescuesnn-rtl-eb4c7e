// tb_heb: checks the hardware enhancement block against an independent
// rotation model: for random spike-gated weights, selectors and shuffle
// values, w_out must equal rol8(gated_w[sel], shuffle). It also checks the
// fault-aware mapping round trip on the published examples of weight
// registers with faulty cells.
module tb_heb;
  import fam_pkg::*;

  localparam int unsigned M = 16;

  logic clk = 1'b0;
  logic [M-1:0][7:0] gated_w;
  logic [$clog2(M)-1:0] sel;
  logic [2:0] shuffle;
  logic [7:0] w_out;
  int checks = 0, failures = 0, cycles = 0;

  heb #(.M(M)) dut (.gated_w(gated_w), .sel(sel), .shuffle(shuffle), .w_out(w_out));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [7:0] exp, input string what);
    checks++;
    if (w_out !== exp) begin
      failures++;
      $display("FAIL %s: sel=%0d shuffle=%0d in=%02h out=%02h exp=%02h",
               what, sel, shuffle, gated_w[sel], w_out, exp);
    end
  endtask

  initial begin
    logic [7:0] w, stored;
    logic [2:0] s;
    // Directed: every shift of a single set bit.
    for (int k = 0; k < 8; k++) begin
      gated_w = '0;
      gated_w[3] = 8'h01;
      sel = 3;
      shuffle = 3'(k);
      @(posedge clk);
      check(8'(1 << k), "one-hot");
    end
    // Random.
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < M; k++) gated_w[k] = 8'($urandom);
      sel = $clog2(M)'($urandom);
      shuffle = 3'($urandom);
      @(posedge clk);
      check(rol8(gated_w[sel], int'(shuffle)), "random");
    end
    // Published examples: fault maps {5}, {6,4}, {5,2}, {1} give rotations
    // 3, 4, 6, 7, and the HEB restores the stored word.
    begin
      static logic [7:0] maps [4] = '{8'b0010_0000, 8'b0101_0000, 8'b0010_0100, 8'b0000_0010};
      static int         exps [4] = '{3, 4, 6, 7};
      for (int e = 0; e < 4; e++) begin
        s = fam_shift(maps[e]);
        checks++;
        if (s != 3'(exps[e])) begin
          failures++;
          $display("FAIL fam_shift map=%08b got %0d exp %0d", maps[e], s, exps[e]);
        end
        w = 8'($urandom);
        stored = ror8(w, int'(s));
        gated_w = '0;
        sel = 5;
        gated_w[5] = stored;
        shuffle = s;
        @(posedge clk);
        check(w, "fam round trip");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
