// tb_oiu: checks the operand issue unit with a model register file and a weight stream.
// For several instructions (K slices x N groups) every issued beat must pair the right
// input slice (word src+k) with the next stream beat, carry first/last and the group's
// destination word/offset, and the whole instruction must issue one beat per cycle when the
// stream is always valid (prefetch hides the register-file latency). A second phase makes the
// stream stall randomly and holds the ESL nearly-full flag for a while.
module tb_oiu;
  localparam int L = 2, V = 64;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_relu = 0, cmd_esl = 0, done;
  logic [11:0] cmd_src = 0, cmd_dst = 0, cmd_k = 0;
  logic [13:0] cmd_n = 0;
  logic ra_en;
  logic [11:0] ra_addr;
  logic [V-1:0][15:0] ra_data;
  logic s_valid = 0, s_ready;
  logic [L-1:0][V-1:0][15:0] s_data;
  logic esl_afull = 0;
  logic x_valid, x_first, x_last, x_relu, x_esl;
  logic [L-1:0][V-1:0][15:0] x_w;
  logic [V-1:0][15:0] x_x;
  logic [11:0] x_dst;
  logic [5:0] x_off;
  int checks = 0, failures = 0, cyc = 0;

  oiu #(.L(L), .V(V)) dut (.*);
  always #5 clk = ~clk;

  // model register file: word a holds a in every element
  always_ff @(posedge clk) if (ra_en) for (int e = 0; e < V; e++) ra_data[e] <= 16'(ra_addr) + 16'(e);
  // stream: beat number in every element
  int beat = 0;
  bit rand_stall = 0;
  always_comb for (int i = 0; i < L; i++) for (int e = 0; e < V; e++) s_data[i][e] = 16'(beat);

  int k_i, g_i, K, N, first_fire, last_fire, src, dst, nfire;
  always @(posedge clk) begin
    cyc++;
    if (rand_stall) begin
      s_valid   <= ($urandom % 3) != 0;
      esl_afull <= (cyc % 50) < 10;
    end
    if (x_valid) begin
      if (nfire == 0) first_fire = cyc;
      last_fire = cyc;
      nfire++;
      checks++;
      if (x_x[0] != 16'(src + k_i) || x_x[5] != 16'(src + k_i + 5) || x_w[L-1][3] != 16'(beat)
          || x_first != (k_i == 0) || x_last != (k_i == K - 1)
          || x_dst != 12'(dst + (g_i * L) / V) || x_off != 6'((g_i * L) % V)) begin
        failures++;
        $display("beat g=%0d k=%0d wrong: x=%0d w=%0d f=%b l=%b dst=%0d off=%0d", g_i, k_i,
                 x_x[0], x_w[L-1][3], x_first, x_last, x_dst, x_off);
      end
      checks++;
      if (esl_afull && x_esl) begin failures++; $display("issued while ESL full"); end
      beat++;
      if (k_i == K - 1) begin k_i = 0; g_i++; end else k_i++;
    end
  end

  task automatic run(input int s, input int d, input int kk, input int nn, input bit esl);
    src = s; dst = d; K = kk; N = nn; k_i = 0; g_i = 0; nfire = 0; beat = 0;
    cmd_valid <= 1; cmd_src <= 12'(s); cmd_dst <= 12'(d); cmd_k <= 12'(kk); cmd_n <= 14'(nn);
    cmd_esl <= esl;
    @(posedge clk);
    cmd_valid <= 0;
    while (!done) @(posedge clk);
    checks++;
    if (nfire != K * N) begin failures++; $display("beats %0d != %0d", nfire, K * N); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    s_valid <= 1;
    run(100, 7, 5, 70, 0);
    checks++;
    if (last_fire - first_fire != 5 * 70 - 1) begin
      failures++;
      $display("throughput: %0d cycles for %0d beats", last_fire - first_fire + 1, 350);
    end
    run(0, 0, 1, 40, 0);
    checks++;
    if (last_fire - first_fire != 39) failures++;
    rand_stall = 1;
    run(12, 300, 3, 33, 1);
    run(9, 20, 7, 5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
