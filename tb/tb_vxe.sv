// tb_vxe: self-checking test of the vector execution engine.
//
// The engine is attached to a small word-addressed memory standing in for the LMU, whose read and
// write grants are withheld at random (as the shared ports of the LMU do). The test runs every
// vector function on random FP16 data and compares the results with values computed here in real
// arithmetic: exact results for max, ReLU and copy, relative tolerances for the rounded ones.
// It then runs a whole softmax (MAX, SUBEXP, SUM, DIVS) and checks that the probabilities sum to
// one, and a greedy SAMPLE (top-k = 1), which must return the index of the largest logit. The
// cost of a word is checked too: with grants always given, a vector-scalar word takes 4 cycles
// and an element-wise word 6.
module tb_vxe;
  import lpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned V = 8, NSREG = 4, DEPTH = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready, cmd_sample, done, lr_req, lr_gnt, lw_req, lw_gnt, s_we, tok_valid;
  logic [3:0] cmd_funct;
  logic [LMU_AW-1:0] cmd_a, cmd_b, cmd_d, lr_addr, lw_addr;
  logic [11:0] cmd_len;
  logic [1:0] cmd_sidx, s_waddr;
  logic [V-1:0][15:0] lr_data, lw_data;
  logic [NSREG-1:0][15:0] s_regs;
  logic [15:0] s_wdata;
  logic [31:0] tok;
  logic grant_all;

  vxe #(.V(V), .NSREG(NSREG), .KMAX(4)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_sample, .cmd_funct, .cmd_a, .cmd_b, .cmd_d,
    .cmd_len, .cmd_sidx, .done, .lr_req, .lr_addr, .lr_gnt, .lr_data, .lw_req, .lw_addr,
    .lw_data, .lw_gnt, .s_regs, .s_we, .s_waddr, .s_wdata,
    .top_k(5'd1), .top_p(FP16_ONE), .inv_temp(FP16_ONE), .seed(16'd7), .tok_valid, .tok
  );

  // memory model
  logic [V-1:0][15:0] mem [DEPTH];
  assign lr_gnt = lr_req && (grant_all || ($urandom % 3 != 0));
  assign lw_gnt = lw_req && (grant_all || ($urandom % 3 != 0));
  always_ff @(posedge clk) begin
    if (lr_gnt) lr_data <= mem[lr_addr % DEPTH];
    if (lw_gnt) mem[lw_addr % DEPTH] <= lw_data;
    if (s_we) s_regs[s_waddr] <= s_wdata;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(vxf_e f, bit smp, int a, int b, int d, int len, int sidx, output int cycles);
    int t0;
    @(posedge clk);
    cmd_valid <= 1; cmd_sample <= smp; cmd_funct <= 4'(f); cmd_a <= LMU_AW'(a); cmd_b <= LMU_AW'(b);
    cmd_d <= LMU_AW'(d); cmd_len <= 12'(len); cmd_sidx <= 2'(sidx);
    t0 = cyc;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 0;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
    @(posedge clk);
    @(posedge clk);
  endtask

  function automatic real rel(real x);
    return 0.006 * absr(x) + 1e-4;
  endfunction

  initial begin
    int cy;
    real ra, rb, rs, exp_v, got, m, sum, acc;
    int amax;
    cmd_valid = 0; cmd_sample = 0; cmd_funct = '0; cmd_a = '0; cmd_b = '0; cmd_d = '0;
    cmd_len = '0; cmd_sidx = '0; grant_all = 0; s_regs = '0; lr_data = '0;
    for (int w = 0; w < DEPTH; w++)
      for (int e = 0; e < V; e++) mem[w][e] = rnd_h(4.0);
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int rep = 0; rep < 3; rep++) begin
      // refresh operands (words 0..7 a, 8..15 b)
      for (int w = 0; w < 16; w++)
        for (int e = 0; e < V; e++) mem[w][e] = rnd_h(4.0);
      s_regs[3] = rnd_h(2.0);
      if (s_regs[3][14:10] == 0) s_regs[3] = FP16_ONE;
      rs = h2r(s_regs[3]);
      for (int f = 0; f <= 12; f++) begin
        if (f == 8 || f == 9) continue;
        run(vxf_e'(f), 0, 0, 8, 32, 8, 3, cy);
        for (int w = 0; w < 8; w++)
          for (int e = 0; e < V; e++) begin
            ra = h2r(mem[w][e]); rb = h2r(mem[8+w][e]); got = h2r(mem[32+w][e]);
            case (vxf_e'(f))
              VX_ADD: exp_v = ra + rb;
              VX_SUB: exp_v = ra - rb;
              VX_MUL: exp_v = ra * rb;
              VX_ADDS: exp_v = ra + rs;
              VX_SUBS: exp_v = ra - rs;
              VX_MULS: exp_v = ra * rs;
              VX_DIVS: exp_v = ra / rs;
              VX_EXP: exp_v = $exp(ra);
              VX_RELU: exp_v = (ra < 0.0) ? 0.0 : ra;
              VX_COPY: exp_v = ra;
              default: exp_v = $exp(h2r(r2h(ra - rs)));
            endcase
            check(absr(got - exp_v) <= rel(exp_v),
                  $sformatf("f%0d w%0d e%0d a=%f b=%f s=%f got %f exp %f", f, w, e, ra, rb, rs, got, exp_v));
          end
      end
      // reductions
      run(VX_SUM, 0, 0, 0, 0, 8, 1, cy);
      run(VX_MAX, 0, 0, 0, 0, 8, 2, cy);
      sum = 0.0; m = -100.0;
      for (int w = 0; w < 8; w++)
        for (int e = 0; e < V; e++) begin
          sum += h2r(mem[w][e]);
          if (h2r(mem[w][e]) > m) m = h2r(mem[w][e]);
        end
      check(absr(h2r(s_regs[1]) - sum) <= 0.02 + 0.002 * absr(sum),
            $sformatf("sum got %f exp %f", h2r(s_regs[1]), sum));
      check(h2r(s_regs[2]) == m, $sformatf("max got %f exp %f", h2r(s_regs[2]), m));
    end

    // softmax over 8 words of logits in [0, 8), probabilities to words 48..55
    for (int w = 0; w < 8; w++)
      for (int e = 0; e < V; e++) mem[16+w][e] = r2h(8.0 * real'($urandom % 1000) / 1000.0);
    run(VX_MAX, 0, 16, 0, 0, 8, 0, cy);
    run(VX_SUBEXP, 0, 16, 0, 40, 8, 0, cy);
    run(VX_SUM, 0, 40, 0, 0, 8, 1, cy);
    run(VX_DIVS, 0, 40, 0, 48, 8, 1, cy);
    m = -1.0; amax = 0;
    for (int j = 0; j < 8 * V; j++)
      if (h2r(mem[16 + j / V][j % V]) > m) begin m = h2r(mem[16 + j / V][j % V]); amax = j; end
    sum = 0.0;
    for (int j = 0; j < 8 * V; j++) sum += $exp(h2r(mem[16 + j / V][j % V]) - m);
    acc = 0.0;
    for (int j = 0; j < 8 * V; j++) begin
      got = h2r(mem[48 + j / V][j % V]);
      exp_v = $exp(h2r(mem[16 + j / V][j % V]) - m) / sum;
      acc += got;
      check(absr(got - exp_v) <= 0.03 * exp_v + 1e-4,
            $sformatf("softmax %0d got %g exp %g", j, got, exp_v));
    end
    check(absr(acc - 1.0) < 0.02, $sformatf("softmax sum %f", acc));
    // greedy sampling
    run(VX_ADD, 1, 16, 0, 0, 8, 2, cy);
    check(tok == 32'(amax), $sformatf("token %0d exp %0d", tok, amax));
    check(s_regs[2] == 16'(amax), "token in scalar register");

    // cost per word with free ports: read, load, (read b, load b,) op, write; plus the handshake
    grant_all = 1;
    run(VX_ADDS, 0, 0, 0, 32, 4, 3, cy);
    check(cy == 4 * 4 + 3, $sformatf("ADDS 4 words took %0d cycles", cy));
    run(VX_ADD, 0, 0, 8, 32, 4, 3, cy);
    check(cy == 4 * 6 + 3, $sformatf("ADD 4 words took %0d cycles", cy));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
