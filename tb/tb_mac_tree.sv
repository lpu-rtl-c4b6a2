// tb_mac_tree: checks one MAC tree against a real-arithmetic dot product.
// Random FP16 operands, dot products of 1..4 beats issued back to back, one beat per cycle.
// Each result must match the reference within a tolerance set by FP16 rounding and the guard
// bits of the alignment, and must appear exactly 5 cycles after its last beat.
module tb_mac_tree;
  import tb_fp_pkg::*;
  localparam int V = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [V-1:0][15:0] w, x;
  logic out_valid;
  logic [15:0] out_y;
  int checks = 0, failures = 0, cyc = 0;

  mac_tree #(.V(V)) dut (.*);

  always #5 clk = ~clk;

  // expected results queue: value, magnitude sum, due cycle
  real    q_val [$];
  real    q_mag [$];
  int     q_due [$];

  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_last) q_due.push_back(cyc + 5);
    if (rst_n && out_valid) begin
      real got, ex, mg;
      int due;
      got = h2r(out_y);
      checks++;
      if (q_val.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        ex = q_val.pop_front(); mg = q_mag.pop_front(); due = q_due.pop_front();
        if (absr(got - ex) > 0.004 * absr(ex) + 3e-4 * mg) begin
          failures++;
          $display("value mismatch got %f exp %f", got, ex);
        end
        checks++;
        if (cyc != due) begin
          failures++;
          $display("latency: out at %0d, due %0d", cyc, due);
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc, mag, range;
    logic [V-1:0][15:0] wl, xl;
    int k;
    w = '0; x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      k = 1 + ($urandom % 4);
      range = (t % 3 == 0) ? 0.01 : ((t % 3 == 1) ? 1.0 : 30.0);
      acc = 0.0; mag = 0.0;
      for (int b = 0; b < k; b++) begin
        for (int i = 0; i < V; i++) begin
          wl[i] = rnd_h(range);
          xl[i] = rnd_h(1.0);
          if (t == 5 && b == 0 && i == 3) wl[i] = 16'h0000;
          acc += h2r(wl[i]) * h2r(xl[i]);
          mag += absr(h2r(wl[i]) * h2r(xl[i]));
        end
        w <= wl; x <= xl;
        in_valid <= 1; in_first <= (b == 0); in_last <= (b == k - 1);
        if (b == k - 1) begin
          q_val.push_back(acc); q_mag.push_back(mag);
        end
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q_val.size() != 0) begin
      failures++;
      $display("missing outputs: %0d", q_val.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
