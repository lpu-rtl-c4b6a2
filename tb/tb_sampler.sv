// tb_sampler: self-checking test of the token sampler (V = 8 logits per word, KMAX = 8).
//
// Random logit vectors of 6 words are sorted and sampled under three settings, each compared with
// a reference computed here from the same logits:
//  * top-k = 1: the token must be the arg max (lowest index among equal maxima);
//  * top-k = 4, top-p = 1: the token must be one of the four largest logits;
//  * top-k = 8, top-p tiny: the nucleus holds only the first logit, so the token is the arg max.
// Each word takes V + 1 cycles (one to accept it, then one insertion per element), which is
// checked.
module tb_sampler;
  import lpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned V = 8, KMAX = 8, W = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start, in_valid, in_ready, finish, done;
  logic [V-1:0][15:0] in_data;
  logic [31:0] in_base, token;
  logic [4:0] top_k;
  logic [15:0] top_p, inv_temp, seed;

  sampler #(.V(V), .KMAX(KMAX)) dut (
    .clk, .rst_n, .start, .in_valid, .in_ready, .in_data, .in_base, .finish, .top_k, .top_p,
    .inv_temp, .seed, .done, .token
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] lg [W*V];

  task automatic sample(int k, logic [15:0] p, output logic [31:0] tk, output int wcyc);
    int t0;
    @(posedge clk);
    start <= 1; top_k <= 5'(k); top_p <= p; seed <= 16'($urandom);
    @(posedge clk);
    start <= 0;
    for (int w = 0; w < W; w++) begin
      in_valid <= 1; in_base <= 32'(w * V);
      for (int e = 0; e < V; e++) in_data[e] <= lg[w*V+e];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (w == 1) t0 = cyc;
      if (w == 2) wcyc = cyc - t0;
    end
    in_valid <= 0;
    finish   <= 1;
    do @(posedge clk); while (!in_ready);
    finish <= 0;
    while (!done) @(posedge clk);
    tk = token;
  endtask

  initial begin
    logic [31:0] tk;
    int wc, amax, rank;
    real m;
    start = 0; in_valid = 0; finish = 0; in_data = '0; in_base = '0; top_k = 5'd1;
    top_p = FP16_ONE; inv_temp = FP16_ONE; seed = 16'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 40; rep++) begin
      for (int j = 0; j < W * V; j++) lg[j] = rnd_h(6.0);
      if (rep % 5 == 0) lg[W*V-1] = lg[3];    // a tie: the lower index must win
      amax = 0; m = h2r(lg[0]);
      for (int j = 1; j < W * V; j++) if (h2r(lg[j]) > m) begin m = h2r(lg[j]); amax = j; end
      sample(1, FP16_ONE, tk, wc);
      check(tk == 32'(amax), $sformatf("greedy got %0d exp %0d", tk, amax));
      check(wc == V + 1, $sformatf("word took %0d cycles", wc));
      sample(4, FP16_ONE, tk, wc);
      rank = 0;
      for (int j = 0; j < W * V; j++) if (h2r(lg[j]) > h2r(lg[tk % (W*V)])) rank++;
      check(tk < W * V && rank < 4, $sformatf("top-4 token %0d has rank %0d", tk, rank));
      sample(8, 16'h1400, tk, wc);             // top-p = 2^-10
      check(tk == 32'(amax), $sformatf("top-p got %0d exp %0d", tk, amax));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
