// tb_lpu_top: end-to-end test of two LPUs at their default size (L = 32 trees of V = 64) joined
// by the ESL into a two-device line, each with its own HBM model.
//
// Both devices run the same program (only the matrix-product destination and the transmitted
// word differ). It loads the input vector from HBM (RD_EMB) and a word from the host, then loops
// twice over: stream a 1024 x 512 column slice of the weights (RD_PARAM) into a 2-slice,
// 16-group vector-matrix product with ReLU whose results go through the ESL (MATMUL), wait for
// the peer's 16 packets (RX), softmax over the 1024 gathered outputs (MAX, SUBEXP, SUM, DIVS) and
// greedy sampling (SAMPLE). It then writes a Key/Value vector to HBM in normal and in transposed
// form (WR_KV), sends its host word to the peer (TX / RX), returns results to the host (WR_HOST)
// and halts. The link between the devices refuses packets at random, so the ESL buffer fills
// up and the operand issue unit has to pause.
//
// Checked against values computed here in real arithmetic from the same random data:
// matrix-product results (and that both devices hold identical copies), softmax values and their
// sum, the sampled token (arg max), the HBM words written by WR_KV, the word moved by TX/RX, and
// the scalar register read back by MOVS. Each mechanism of the design is counted; one that never
// happens is a failure: scoreboard stall, concurrent units, SXE accumulation over slices, SXE
// write pre-empting another LMU writer, ESL almost-full pause, link back-pressure, stream
// back-pressure, transposed strobed write, taken branch, token output.
module tb_lpu_top;
  import lpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned L = 32, V = 64, NCH = L * V * 16 / CH_W, CPT = V * 16 / CH_W;
  localparam int unsigned K = 2, N = 16;            // slices per output, column groups
  localparam int unsigned NW = N * L / V;           // output words per device

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- two devices ----------------
  logic        im_we [2];
  logic [9:0]  im_addr [2];
  logic [63:0] im_wdata [2];
  logic        csr_we [2];
  logic [2:0]  csr_addr [2];
  logic [31:0] csr_wdata [2];
  logic        start [2], running [2], halted [2];
  logic        hin_valid [2], hin_ready [2], hout_valid [2], hout_ready [2];
  logic [V-1:0][15:0] hin_data [2], hout_data [2];
  logic        tok_valid [2];
  logic [31:0] tok [2];
  logic [NCH-1:0] rq_valid [2], rq_ready [2], rs_valid [2], wq_valid [2], wq_ready [2];
  logic [HBM_AW-1:0] rq_addr [2];
  logic [NCH-1:0][CH_W-1:0] rs_data [2], wq_data [2];
  logic [NCH-1:0][HBM_AW-1:0] wq_addr [2];
  logic [NCH-1:0][CH_W/8-1:0] wq_strb [2];
  // ESL ports: t* transmit, r* receive; index [dev][0 = left, 1 = right]
  logic        tv [2][2], tr [2][2], rv [2][2], rr [2][2];
  logic [2:0]  th [2][2], rh [2][2];
  logic [LMU_AW-1:0] ta [2][2], ra [2][2];
  logic [OFF_W-1:0]  to [2][2], ro [2][2];
  logic [L-1:0][15:0] td [2][2], rd [2][2];

  // link gate: a packet can cross only when the gate is open (random, ~30 % of cycles)
  logic gate01, gate10;
  always @(posedge clk) begin
    gate01 <= ($urandom % 10) < 3;
    gate10 <= ($urandom % 10) < 3;
  end
  always_comb begin
    // device 0 right -> device 1 left
    rv[1][0] = tv[0][1] && gate01; rh[1][0] = th[0][1]; ra[1][0] = ta[0][1];
    ro[1][0] = to[0][1]; rd[1][0] = td[0][1]; tr[0][1] = rr[1][0] && gate01;
    // device 1 left -> device 0 right
    rv[0][1] = tv[1][0] && gate10; rh[0][1] = th[1][0]; ra[0][1] = ta[1][0];
    ro[0][1] = to[1][0]; rd[0][1] = td[1][0]; tr[1][0] = rr[0][1] && gate10;
    // open line ends
    rv[0][0] = 1'b0; rh[0][0] = '0; ra[0][0] = '0; ro[0][0] = '0; rd[0][0] = '0; tr[0][0] = 1'b1;
    rv[1][1] = 1'b0; rh[1][1] = '0; ra[1][1] = '0; ro[1][1] = '0; rd[1][1] = '0; tr[1][1] = 1'b1;
  end

  for (genvar d = 0; d < 2; d++) begin : g_dev
    lpu_top u_dut (
      .clk, .rst_n,
      .im_we(im_we[d]), .im_addr(im_addr[d]), .im_wdata(im_wdata[d]),
      .csr_we(csr_we[d]), .csr_addr(csr_addr[d]), .csr_wdata(csr_wdata[d]),
      .start(start[d]), .running(running[d]), .halted(halted[d]),
      .hin_valid(hin_valid[d]), .hin_ready(hin_ready[d]), .hin_data(hin_data[d]),
      .hout_valid(hout_valid[d]), .hout_ready(hout_ready[d]), .hout_data(hout_data[d]),
      .tok_valid(tok_valid[d]), .tok(tok[d]),
      .rq_valid(rq_valid[d]), .rq_addr(rq_addr[d]), .rq_ready(rq_ready[d]),
      .rs_valid(rs_valid[d]), .rs_data(rs_data[d]),
      .wq_valid(wq_valid[d]), .wq_addr(wq_addr[d]), .wq_data(wq_data[d]),
      .wq_strb(wq_strb[d]), .wq_ready(wq_ready[d]),
      .txr_valid(tv[d][1]), .txr_ready(tr[d][1]), .txr_hops(th[d][1]), .txr_addr(ta[d][1]),
      .txr_off(to[d][1]), .txr_data(td[d][1]),
      .txl_valid(tv[d][0]), .txl_ready(tr[d][0]), .txl_hops(th[d][0]), .txl_addr(ta[d][0]),
      .txl_off(to[d][0]), .txl_data(td[d][0]),
      .rxl_valid(rv[d][0]), .rxl_ready(rr[d][0]), .rxl_hops(rh[d][0]), .rxl_addr(ra[d][0]),
      .rxl_off(ro[d][0]), .rxl_data(rd[d][0]),
      .rxr_valid(rv[d][1]), .rxr_ready(rr[d][1]), .rxr_hops(rh[d][1]), .rxr_addr(ra[d][1]),
      .rxr_off(ro[d][1]), .rxr_data(rd[d][1])
    );
    hbm_model #(.NCH(NCH), .DEPTH(512), .LAT(6)) u_hbm (
      .clk, .rq_valid(rq_valid[d]), .rq_addr(rq_addr[d]), .rq_ready(rq_ready[d]),
      .rs_valid(rs_valid[d]), .rs_data(rs_data[d]),
      .wq_valid(wq_valid[d]), .wq_addr(wq_addr[d]), .wq_data(wq_data[d]),
      .wq_strb(wq_strb[d]), .wq_ready(wq_ready[d])
    );
  end

  // ---------------- program ----------------
  function automatic logic [63:0] ins(opcode_e op, int dst, int src, int len, int sreg, int imm);
    instr_t i;
    i.op = op; i.dst = 12'(dst); i.src = 12'(src); i.len = 12'(len); i.sreg = 4'(sreg);
    i.imm = 18'(imm);
    return 64'(i);
  endfunction
  function automatic int vx(vxf_e f, int sidx, int b);
    return (int'(f) << 14) | (sidx << 12) | b;
  endfunction

  localparam int DST0 = 64, SMX = 96, PRB = 112, HW = 2;
  logic [63:0] prog [2][$];
  int loop_pc;
  task automatic build(int d);
    prog[d].push_back(ins(OP_ALU, 1, 0, ALU_MOVI, 0, 0));                  // r1 = 0
    prog[d].push_back(ins(OP_ALU, 2, 0, ALU_MOVI, 0, 2));                  // r2 = 2
    prog[d].push_back(ins(OP_RD_EMB, 0, 0, K, 0, 200));                    // x -> words 0..K-1
    prog[d].push_back(ins(OP_RD_HOST, HW + d, 0, 1, 0, 0));                // host word
    loop_pc = prog[d].size();
    prog[d].push_back(ins(OP_RD_PARAM, 0, 0, K * N, 0, 0));                // weights
    prog[d].push_back(ins(OP_MATMUL, DST0 + d * NW, 0, K, 0, N | (1 << 17) | (1 << 16)));
    prog[d].push_back(ins(OP_RX, DST0, 0, N, 0, 2 * NW));                  // peer's results
    prog[d].push_back(ins(OP_VEC, 0, DST0, 2 * NW, 0, vx(VX_MAX, 0, 0)));
    prog[d].push_back(ins(OP_VEC, SMX, DST0, 2 * NW, 0, vx(VX_SUBEXP, 0, 0)));
    prog[d].push_back(ins(OP_VEC, 0, SMX, 2 * NW, 0, vx(VX_SUM, 1, 0)));
    prog[d].push_back(ins(OP_VEC, PRB, SMX, 2 * NW, 0, vx(VX_DIVS, 1, 0)));
    prog[d].push_back(ins(OP_SAMPLE, 2, DST0, 2 * NW, 0, 0));
    prog[d].push_back(ins(OP_ALU, 1, 1, ALU_ADDI, 0, 1));                  // r1++
    prog[d].push_back(ins(OP_BR, 0, 1, BR_LT, 2, loop_pc));                // loop while r1 < r2
    prog[d].push_back(ins(OP_WR_KV, 0, DST0, 3, 0, 300));                  // normal, tree 3
    prog[d].push_back(ins(OP_WR_KV, 0, DST0 + 1, (1 << 11) | (1 << 6) | 5, 0, 310)); // transposed
    prog[d].push_back(ins(OP_TX, 0, HW + d, 1, 0, 0));
    prog[d].push_back(ins(OP_RX, HW, 0, V / L, 0, 2));
    prog[d].push_back(ins(OP_WR_HOST, 0, DST0, 2 * NW, 0, 0));
    prog[d].push_back(ins(OP_WR_HOST, 0, PRB, 2 * NW, 0, 0));
    prog[d].push_back(ins(OP_WR_HOST, 0, HW, 2, 0, 0));
    prog[d].push_back(ins(OP_ALU, 3, 0, ALU_MOVS, 0, 2));                  // r3 = token
    prog[d].push_back(ins(OP_HLT, 0, 0, 0, 0, 0));
  endtask

  // ---------------- data ----------------
  logic [15:0] x [K*V];                 // input vector (same on both devices)
  logic [15:0] hword [2][V];            // host word of each device
  real         yexp [2*N*L];            // expected gathered outputs
  logic [V-1:0][15:0] hout_q [2][$];

  function automatic logic [15:0] w_of(int d, int b, int t, int e);
    int c = t * CPT + e / (CH_W / 16);
    return g_dev_mem(d, c, b)[(e % (CH_W / 16)) * 16 +: 16];
  endfunction
  function automatic logic [CH_W-1:0] g_dev_mem(int d, int c, int a);
    if (d == 0) return g_dev[0].u_hbm.mem[c][a];
    return g_dev[1].u_hbm.mem[c][a];
  endfunction
  task automatic put_mem(int d, int c, int a, int e, logic [15:0] v);
    if (d == 0) g_dev[0].u_hbm.mem[c][a][e*16 +: 16] = v;
    else        g_dev[1].u_hbm.mem[c][a][e*16 +: 16] = v;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int m_hazard = 0, m_conc = 0, m_accum = 0, m_preempt = 0, m_afull = 0, m_link = 0;
  int m_sback = 0, m_strb = 0, m_branch = 0, m_tok = 0;
  logic [31:0] tok_seen [2];
  int tok_n [2];
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 2; d++) begin
      if (d == 0 ? (g_dev[0].u_dut.u_icp.running && g_dev[0].u_dut.u_icp.hazard)
                 : (g_dev[1].u_dut.u_icp.running && g_dev[1].u_dut.u_icp.hazard)) m_hazard++;
      if ($countones(d == 0 ? g_dev[0].u_dut.u_icp.busy : g_dev[1].u_dut.u_icp.busy) >= 2) m_conc++;
      if (d == 0 ? (g_dev[0].u_dut.x_valid && !g_dev[0].u_dut.x_first)
                 : (g_dev[1].u_dut.x_valid && !g_dev[1].u_dut.x_first)) m_accum++;
      if (d == 0 ? (g_dev[0].u_dut.sx_wr && |g_dev[0].u_dut.wq)
                 : (g_dev[1].u_dut.sx_wr && |g_dev[1].u_dut.wq)) m_preempt++;
      if (d == 0 ? (g_dev[0].u_dut.u_oiu.busy && g_dev[0].u_dut.esl_afull)
                 : (g_dev[1].u_dut.u_oiu.busy && g_dev[1].u_dut.esl_afull)) m_afull++;
      if (d == 0 ? (g_dev[0].u_dut.s_valid && !g_dev[0].u_dut.s_ready)
                 : (g_dev[1].u_dut.s_valid && !g_dev[1].u_dut.s_ready)) m_sback++;
      for (int c = 0; c < NCH; c++)
        if (wq_valid[d][c] && wq_strb[d][c] != '1 && wq_strb[d][c] != '0) m_strb++;
      if (d == 0 ? (g_dev[0].u_dut.u_icp.can_go && g_dev[0].u_dut.u_icp.ins.op == OP_BR &&
                    g_dev[0].u_dut.u_icp.br_take)
                 : (g_dev[1].u_dut.u_icp.can_go && g_dev[1].u_dut.u_icp.ins.op == OP_BR &&
                    g_dev[1].u_dut.u_icp.br_take)) m_branch++;
      if (tok_valid[d]) begin
        m_tok++;
        tok_seen[d] <= tok[d];
        tok_n[d] <= tok_n[d] + 1;
      end
      if (hout_valid[d] && hout_ready[d]) hout_q[d].push_back(hout_data[d]);
    end
    if ((tv[0][1] && !tr[0][1]) || (tv[1][0] && !tr[1][0])) m_link++;
  end

  // host input stream
  always_comb
    for (int d = 0; d < 2; d++) begin
      hin_valid[d] = 1'b1;
      for (int e = 0; e < V; e++) hin_data[d][e] = hword[d][e];
      hout_ready[d] = 1'b1;
    end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc, mx, sum, got, ex;
    int  amax;
    logic [15:0] yv [2][2*N*L];
    for (int d = 0; d < 2; d++) begin
      im_we[d] = 0; im_addr[d] = '0; im_wdata[d] = '0; csr_we[d] = 0; csr_addr[d] = '0;
      csr_wdata[d] = '0; start[d] = 0; tok_n[d] = 0; tok_seen[d] = '0;
      for (int e = 0; e < V; e++) hword[d][e] = rnd_h(4.0);
    end
    // data: x at HBM address 200.. (channels 0..CPT-1), weights at 0..K*N-1
    for (int k = 0; k < K; k++)
      for (int e = 0; e < V; e++) begin
        x[k*V+e] = rnd_h(1.0);
        for (int d = 0; d < 2; d++) put_mem(d, e / (CH_W / 16), 200 + k, e % (CH_W / 16), x[k*V+e]);
      end
    for (int d = 0; d < 2; d++)
      for (int b = 0; b < K * N; b++)
        for (int c = 0; c < NCH; c++)
          for (int e = 0; e < CH_W / 16; e++) put_mem(d, c, b, e, rnd_h(0.25));
    // expected outputs: device d owns global columns d*N*L ..
    for (int d = 0; d < 2; d++)
      for (int g = 0; g < N; g++)
        for (int t = 0; t < L; t++) begin
          acc = 0.0;
          for (int k = 0; k < K; k++)
            for (int e = 0; e < V; e++) acc += h2r(x[k*V+e]) * h2r(w_of(d, g * K + k, t, e));
          yexp[d*N*L + g*L + t] = (acc < 0.0) ? 0.0 : acc;
        end

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int d = 0; d < 2; d++) build(d);
    // load programs and control registers
    for (int d = 0; d < 2; d++) begin
      for (int a = 0; a < prog[d].size(); a++) begin
        im_we[d] <= 1; im_addr[d] <= 10'(a); im_wdata[d] <= prog[d][a];
        @(posedge clk);
      end
      im_we[d] <= 0;
      csr_we[d] <= 1;
      csr_addr[d] <= 3'd2; csr_wdata[d] <= 32'd1;                  @(posedge clk);   // top-k 1
      csr_addr[d] <= 3'd3; csr_wdata[d] <= 32'(FP16_ONE);          @(posedge clk);   // top-p
      csr_addr[d] <= 3'd4; csr_wdata[d] <= 32'(FP16_ONE);          @(posedge clk);   // 1/T
      csr_addr[d] <= 3'd5; csr_wdata[d] <= 32'd1;                  @(posedge clk);   // seed
      csr_addr[d] <= 3'd6; csr_wdata[d] <= 32'((2 << 3) | d);      @(posedge clk);   // line of 2
      csr_we[d] <= 0;
    end
    start[0] <= 1; start[1] <= 1;
    @(posedge clk);
    start[0] <= 0; start[1] <= 0;
    wait (halted[0] && halted[1]);
    repeat (4) @(posedge clk);
    $display("program finished at cycle %0d", cyc);

    for (int d = 0; d < 2; d++) begin
      check(hout_q[d].size() == 4 * NW + 2, $sformatf("dev%0d host words %0d", d, hout_q[d].size()));
      if (hout_q[d].size() != 4 * NW + 2) continue;
      // gathered matrix-product results
      for (int j = 0; j < 2 * N * L; j++) begin
        yv[d][j] = hout_q[d][j / V][j % V];
        got = h2r(yv[d][j]);
        check(absr(got - yexp[j]) <= 0.004 * absr(yexp[j]) + 0.002,
              $sformatf("dev%0d y[%0d] got %f exp %f", d, j, got, yexp[j]));
      end
      // softmax
      mx = 0.0; amax = 0;
      for (int j = 0; j < 2 * N * L; j++)
        if (h2r(yv[d][j]) > mx) begin mx = h2r(yv[d][j]); amax = j; end
      sum = 0.0;
      for (int j = 0; j < 2 * N * L; j++) sum += $exp(h2r(yv[d][j]) - mx);
      acc = 0.0;
      for (int j = 0; j < 2 * N * L; j++) begin
        got = h2r(hout_q[d][2*NW + j / V][j % V]);
        ex  = $exp(h2r(yv[d][j]) - mx) / sum;
        acc += got;
        check(absr(got - ex) <= 0.03 * ex + 1e-5,
              $sformatf("dev%0d softmax[%0d] got %g exp %g", d, j, got, ex));
      end
      check(absr(acc - 1.0) < 0.02, $sformatf("dev%0d softmax sum %f", d, acc));
      // token: greedy = arg max, once per loop pass, and read back by MOVS
      check(tok_n[d] == 2, $sformatf("dev%0d tokens %0d", d, tok_n[d]));
      check(tok_seen[d] == 32'(amax), $sformatf("dev%0d token %0d exp %0d", d, tok_seen[d], amax));
      check((d == 0 ? g_dev[0].u_dut.u_icp.r[3] : g_dev[1].u_dut.u_icp.r[3]) == 32'(amax),
            $sformatf("dev%0d MOVS token", d));
      // word sent by the peer
      for (int e = 0; e < V; e++) begin
        check(hout_q[d][4*NW + (1 - d)][e] == hword[1-d][e], $sformatf("dev%0d rx word e%0d", d, e));
        check(hout_q[d][4*NW + d][e] == hword[d][e], $sformatf("dev%0d own host word e%0d", d, e));
      end
      // WR_KV normal: word DST0 (gathered outputs 0..63) to tree 3 at address 300
      for (int e = 0; e < V; e++)
        check(g_dev_mem(d, 3 * CPT + e / 32, 300)[(e % 32) * 16 +: 16] == yv[d][e],
              $sformatf("dev%0d kv normal e%0d", d, e));
      // WR_KV transposed: word DST0+1, element e -> tree e%L, slot 5, address 310 + (e/L)<<1
      for (int e = 0; e < V; e++)
        check(g_dev_mem(d, (e % L) * CPT + 5 / 32, 310 + ((e / L) << 1))[(5 % 32) * 16 +: 16]
              == yv[d][V + e], $sformatf("dev%0d kv transposed e%0d", d, e));
      // neighbouring slots untouched by the strobed write
      check(g_dev_mem(d, 0, 310)[4*16 +: 16] == 16'h0 && g_dev_mem(d, 0, 310)[6*16 +: 16] == 16'h0,
            $sformatf("dev%0d strobes", d));
    end
    for (int j = 0; j < 2 * N * L; j++) check(yv[0][j] == yv[1][j], "devices agree");

    $display("mechanisms: hazard=%0d concurrent=%0d accumulate=%0d preempt=%0d afull=%0d link_stall=%0d stream_stall=%0d strobe=%0d branch=%0d token=%0d",
             m_hazard, m_conc, m_accum, m_preempt, m_afull, m_link, m_sback, m_strb, m_branch, m_tok);
    check(m_hazard > 0, "scoreboard stall seen");
    check(m_conc > 0, "concurrent units seen");
    check(m_accum > 0, "accumulation seen");
    check(m_preempt > 0, "SXE pre-emption seen");
    check(m_afull > 0, "ESL almost-full seen");
    check(m_link > 0, "link back-pressure seen");
    check(m_sback > 0, "stream back-pressure seen");
    check(m_strb > 0, "strobed write seen");
    check(m_branch > 0, "branch seen");
    check(m_tok > 0, "token seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
