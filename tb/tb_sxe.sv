// tb_sxe: checks the streamlined execution engine (4 trees for speed): every tree's dot
// product against a real-arithmetic reference, the vectorizer's ReLU and tags, and the
// 6-cycle latency from a group's last beat to the vector output.
module tb_sxe;
  import tb_fp_pkg::*;
  localparam int L = 4, V = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_relu = 0, in_esl = 0;
  logic [L-1:0][V-1:0][15:0] in_w;
  logic [V-1:0][15:0] in_x;
  logic [11:0] in_dst = 0;
  logic [5:0] in_off = 0;
  logic out_valid, out_esl;
  logic [L-1:0][15:0] out_y;
  logic [11:0] out_dst;
  logic [5:0] out_off;
  int checks = 0, failures = 0, cyc = 0;

  sxe #(.L(L), .V(V)) dut (.*);
  always #5 clk = ~clk;

  real exp_v [$];
  int  exp_due [$];
  logic [19:0] exp_tag [$];

  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_last) exp_due.push_back(cyc + 6);
    if (rst_n && out_valid) begin
      real ev [L];
      logic [19:0] tg;
      int due;
      for (int i = 0; i < L; i++) ev[i] = exp_v.pop_front();
      tg = exp_tag.pop_front(); due = exp_due.pop_front();
      for (int i = 0; i < L; i++) begin
        real e2;
        e2 = (tg[0] && ev[i] < 0) ? 0.0 : ev[i];
        checks++;
        if (absr(h2r(out_y[i]) - e2) > 0.004 * absr(e2) + 0.02) begin
          failures++;
          $display("tree %0d got %f exp %f", i, h2r(out_y[i]), e2);
        end
      end
      checks++;
      if ({out_dst, out_off, out_esl} != tg[19:1]) begin
        failures++;
        $display("tag mismatch");
      end
      checks++;
      if (cyc != due) begin
        failures++;
        $display("latency %0d vs %0d", cyc, due);
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc [L];
    logic [L-1:0][V-1:0][15:0] wl;
    logic [V-1:0][15:0] xl;
    int k;
    logic relu, esl;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int g = 0; g < 20; g++) begin
      k = 1 + $urandom % 3;
      relu = g[0]; esl = g[1];
      for (int i = 0; i < L; i++) acc[i] = 0.0;
      for (int b = 0; b < k; b++) begin
        for (int e = 0; e < V; e++) begin
          xl[e] = rnd_h(1.0);
          for (int i = 0; i < L; i++) begin
            wl[i][e] = rnd_h(1.0);
            acc[i] += h2r(wl[i][e]) * h2r(xl[e]);
          end
        end
        in_w <= wl; in_x <= xl; in_valid <= 1; in_first <= (b == 0); in_last <= (b == k - 1);
        in_dst <= 12'(g * 3); in_off <= 6'((g % 16) * 4); in_relu <= relu; in_esl <= esl;
        if (b == k - 1) begin
          for (int i = 0; i < L; i++) exp_v.push_back(acc[i]);
          exp_tag.push_back({12'(g * 3), 6'((g % 16) * 4), esl, relu});
        end
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (12) @(posedge clk);
    checks++;
    if (exp_v.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
