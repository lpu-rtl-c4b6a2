// tb_icp: self-checking test of the instruction control processor with stand-in units.
//
// Each of the six units is modelled as busy for a fixed number of cycles after a dispatch. The
// program runs a counted loop of scalar ALU instructions and a conditional branch, then issues
// memory, compute and network instructions whose LMU regions overlap:
//   RD_EMB   -> words 0..3      (SMA, 30 cycles)
//   MATMUL   <- words 0..1, -> word 128   (must wait for the SMA: read after write)
//   VEC ADD  <- 256, 320 -> 384          (independent: must start while the OIU is busy)
//   TX       <- word 130                 (must wait for the OIU: read after write)
//   RD_HOST  -> word 256                 (must wait for the VXE: write after read)
//   MOVC, HLT (HLT must wait until every unit is idle)
// Checked: register results of the loop, the decoded fields handed to the units, every dispatch
// cycle against the hazards above, that CTRL instructions take one cycle each, and `halted`.
module tb_icp;
  import lpu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic im_we, csr_we, start, running, halted, d_sample, d_host_wr;
  logic [9:0] im_addr;
  logic [63:0] im_wdata;
  logic [2:0] csr_addr;
  logic [31:0] csr_wdata, d_count;
  logic [7:0][31:0] csr;
  logic [5:0] unit_valid, unit_ready, unit_idle;
  logic [LMU_AW-1:0] d_dst, d_src;
  logic [11:0] d_len;
  logic [HBM_AW-1:0] d_hbm;
  logic [1:0] d_sma_op;
  logic [17:0] d_imm;

  icp #(.IDEPTH(1024), .NCSR(8), .L(32), .V(64)) dut (
    .clk, .rst_n, .im_we, .im_addr, .im_wdata, .csr_we, .csr_addr, .csr_wdata, .csr, .start,
    .running, .halted, .lmu_sregs('0), .unit_valid, .unit_ready, .unit_idle, .d_dst, .d_src,
    .d_len, .d_hbm, .d_count, .d_sma_op, .d_imm, .d_sample, .d_host_wr
  );

  // stand-in units
  int lat [6] = '{30, 20, 10, 5, 5, 8};
  int left [6];
  int t_disp [6][$], t_done [6][$];
  always_comb
    for (int u = 0; u < 6; u++) begin
      unit_ready[u] = (left[u] == 0);
      unit_idle[u]  = (left[u] == 0);
    end
  always @(posedge clk) begin
    for (int u = 0; u < 6; u++) begin
      if (!rst_n) left[u] <= 0;
      else if (unit_valid[u]) begin
        left[u] <= lat[u];
        t_disp[u].push_back(cyc);
        t_done[u].push_back(cyc + lat[u]);
      end else if (left[u] != 0) left[u] <= left[u] - 1;
    end
  end
  // decoded-field checks at dispatch
  always @(posedge clk) if (rst_n) begin
    if (unit_valid[0]) begin
      check(d_sma_op == 2'd1 && d_dst == 0 && d_count == 4 && d_hbm == 25'd1000, "RD_EMB fields");
    end
    if (unit_valid[1]) check(d_src == 0 && d_dst == 128 && d_len == 2 && d_imm == 18'd2, "MATMUL fields");
    if (unit_valid[2]) check(d_src == 256 && d_dst == 384 && d_imm[11:0] == 320 && !d_sample, "VEC fields");
    if (unit_valid[3]) check(d_src == 130 && d_len == 1, "TX fields");
    if (unit_valid[5]) check(d_dst == 256 && !d_host_wr, "RD_HOST fields");
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ins(opcode_e op, int dst, int src, int len, int sreg, int imm);
    instr_t i;
    i.op = op; i.dst = 12'(dst); i.src = 12'(src); i.len = 12'(len); i.sreg = 4'(sreg);
    i.imm = 18'(imm);
    return 64'(i);
  endfunction

  initial begin
    logic [63:0] prog [$];
    int t_start, t_halt;
    prog.push_back(ins(OP_ALU, 1, 0, ALU_MOVI, 0, 5));          // 0 r1 = 5
    prog.push_back(ins(OP_ALU, 2, 0, ALU_MOVI, 0, 0));          // 1 r2 = 0
    prog.push_back(ins(OP_ALU, 2, 2, ALU_ADDI, 0, 3));          // 2 r2 += 3
    prog.push_back(ins(OP_ALU, 1, 1, ALU_ADDI, 0, -1));         // 3 r1 -= 1
    prog.push_back(ins(OP_BR, 0, 1, BR_NE, 0, 2));              // 4 loop while r1 != 0
    prog.push_back(ins(OP_ALU, 4, 0, ALU_MOVI, 0, 1000));       // 5 r4 = 1000
    prog.push_back(ins(OP_RD_EMB, 0, 0, 4, 4, 0));              // 6 hbm = r4 + 0
    prog.push_back(ins(OP_MATMUL, 128, 0, 2, 0, 2));
    prog.push_back(ins(OP_VEC, 384, 256, 1, 0, (int'(VX_ADD) << 14) | 320));
    prog.push_back(ins(OP_TX, 0, 130, 1, 0, 0));
    prog.push_back(ins(OP_RD_HOST, 256, 0, 1, 0, 0));
    prog.push_back(ins(OP_ALU, 3, 0, ALU_MOVC, 0, 1));
    prog.push_back(ins(OP_ALU, 5, 3, ALU_MUL, 2, 0));           // r5 = r3 * r2
    prog.push_back(ins(OP_HLT, 0, 0, 0, 0, 0));
    im_we = 0; im_addr = '0; im_wdata = '0; csr_we = 0; csr_addr = '0; csr_wdata = '0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < prog.size(); a++) begin
      im_we <= 1; im_addr <= 10'(a); im_wdata <= prog[a];
      @(posedge clk);
    end
    im_we <= 0;
    csr_we <= 1; csr_addr <= 3'd1; csr_wdata <= 32'd7;
    @(posedge clk);
    csr_we <= 0; start <= 1;
    @(posedge clk);
    start <= 0;
    t_start = cyc;
    while (!halted) @(posedge clk);
    t_halt = cyc;
    @(posedge clk);
    check(dut.r[1] == 0 && dut.r[2] == 15, $sformatf("loop registers r1=%0d r2=%0d", dut.r[1], dut.r[2]));
    check(dut.r[3] == 7 && dut.r[5] == 105, $sformatf("MOVC/MUL r3=%0d r5=%0d", dut.r[3], dut.r[5]));
    for (int u = 0; u < 6; u++)
      check(t_disp[u].size() == ((u == 4) ? 0 : 1), $sformatf("unit %0d dispatches %0d", u, t_disp[u].size()));
    if (t_disp[0].size() == 1 && t_disp[1].size() == 1 && t_disp[2].size() == 1 &&
        t_disp[3].size() == 1 && t_disp[5].size() == 1) begin
      // CTRL: 2 + 5 * 3 loop instructions + MOVI, one per cycle after the start cycle
      check(t_disp[0][0] - t_start == 1 + 2 + 5 * 3 + 1, $sformatf("RD_EMB dispatched after %0d cycles", t_disp[0][0] - t_start));
      check(t_disp[1][0] > t_done[0][0], "MATMUL waits for RD_EMB (RAW)");
      check(t_disp[1][0] <= t_done[0][0] + 2, "MATMUL starts right after RD_EMB");
      check(t_disp[2][0] < t_done[1][0], "VEC overlaps MATMUL");
      check(t_disp[3][0] > t_done[1][0], "TX waits for MATMUL (RAW)");
      check(t_disp[5][0] > t_done[2][0], "RD_HOST waits for VEC (WAR)");
      check(t_halt > t_done[3][0] && t_halt > t_done[5][0], "HLT waits for all units");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
