// tb_sma: self-checking test of the streamlined memory access unit with four MAC trees
// (L = 4, V = 64: eight 512-bit HBM channels) attached to the HBM model.
//
// 1. Stream read: 40 consecutive addresses across all channels; every beat handed to the
//    consumer must be the concatenation of the channel words at that address, in order. The
//    consumer first takes every beat, and the stream must then run at one beat per cycle once
//    the first data has arrived (the paper's point: continuous requests keep the channels busy);
//    later it stalls at random and the HBM model refuses requests at random.
// 2. Embedding read: 6 addresses from channels 0..1 into consecutive LMU words.
// 3. Key/Value write, normal: one LMU vector to the two channels of tree `sel`.
// 4. Key/Value write, transposed: element d to tree d mod L, slot `sel`, address
//    hbm + (d div L) << lg_stride, with only that slot's byte strobes set (neighbours untouched)..
module tb_sma;
  import lpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned L = 4, V = 64, NCH = L * V * 16 / CH_W, CPT = V * 16 / CH_W;
  localparam int unsigned EPC = CH_W / 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready, cmd_tr, done;
  logic [1:0] cmd_op;
  logic [HBM_AW-1:0] cmd_hbm;
  logic [31:0] cmd_count;
  logic [LMU_AW-1:0] cmd_lmu;
  logic [4:0] cmd_lgstr;
  logic [5:0] cmd_sel;
  logic [NCH-1:0] rq_valid, rq_ready, rs_valid, wq_valid, wq_ready;
  logic [HBM_AW-1:0] rq_addr;
  logic [NCH-1:0][CH_W-1:0] rs_data, wq_data, s_data;
  logic [NCH-1:0][HBM_AW-1:0] wq_addr;
  logic [NCH-1:0][CH_W/8-1:0] wq_strb;
  logic s_valid, s_ready, lw_req, lw_gnt, lr_req, lr_gnt;
  logic [LMU_AW-1:0] lw_addr, lr_addr;
  logic [V-1:0][15:0] lw_data, lr_data;
  logic hbm_stall;

  sma #(.L(L), .V(V)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_hbm, .cmd_count, .cmd_lmu, .cmd_tr,
    .cmd_lgstr, .cmd_sel, .done, .rq_valid, .rq_addr, .rq_ready, .rs_valid, .rs_data,
    .wq_valid, .wq_addr, .wq_data, .wq_strb, .wq_ready, .s_valid, .s_ready, .s_data,
    .lw_req, .lw_addr, .lw_data, .lw_gnt, .lr_req, .lr_addr, .lr_gnt, .lr_data
  );

  // HBM model with optional random refusal of requests
  logic [NCH-1:0] m_ready;
  hbm_model #(.NCH(NCH), .DEPTH(256), .LAT(6)) u_hbm (
    .clk, .rq_valid(rq_valid & rq_ready), .rq_addr, .rq_ready(m_ready), .rs_valid, .rs_data,
    .wq_valid, .wq_addr, .wq_data, .wq_strb, .wq_ready
  );
  always_ff @(posedge clk) rq_ready <= hbm_stall ? NCH'($urandom) | NCH'($urandom) : '1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumers
  bit rand_ready;
  int beats = 0, first_beat = -1, last_beat = 0, emb = 0;
  logic [HBM_AW-1:0] base;
  logic [LMU_AW-1:0] lbase;
  assign s_ready = !rand_ready || cyc[0] ^ cyc[2];
  assign lw_gnt  = lw_req && ($urandom % 2 == 0);
  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin
      if (first_beat < 0) first_beat = cyc;
      last_beat = cyc;
      for (int c = 0; c < NCH; c++)
        check(s_data[c] == u_hbm.mem[c][base + beats], $sformatf("beat %0d ch %0d", beats, c));
      beats++;
    end
    if (lw_req && lw_gnt) begin
      check(lw_addr == lbase + LMU_AW'(emb), "embedding LMU address");
      for (int c = 0; c < CPT; c++)
        check(lw_data[c*EPC +: EPC] == u_hbm.mem[c][base + emb], $sformatf("embedding %0d ch %0d", emb, c));
      emb++;
    end
  end
  // LMU read port for KV writes
  logic [V-1:0][15:0] kv;
  assign lr_gnt = lr_req && ($urandom % 2 == 0);
  always_ff @(posedge clk) if (lr_gnt) lr_data <= kv;

  task automatic cmd(int op, int hbm, int count, int lmu, bit tr, int lg, int sel);
    @(posedge clk);
    cmd_valid <= 1; cmd_op <= 2'(op); cmd_hbm <= HBM_AW'(hbm); cmd_count <= 32'(count);
    cmd_lmu <= LMU_AW'(lmu); cmd_tr <= tr; cmd_lgstr <= 5'(lg); cmd_sel <= 6'(sel);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    logic [CH_W-1:0] prev [NCH][64];
    cmd_valid = 0; cmd_op = '0; cmd_hbm = '0; cmd_count = '0; cmd_lmu = '0; cmd_tr = 0;
    cmd_lgstr = '0; cmd_sel = '0; rand_ready = 0; hbm_stall = 0; lr_data = '0; kv = '0;
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < 256; a++)
        for (int w = 0; w < CH_W / 32; w++) u_hbm.mem[c][a][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1a. full-rate stream
    base = 10; beats = 0; first_beat = -1;
    cmd(0, 10, 40, 0, 0, 0, 0);
    check(beats == 40, $sformatf("stream beats %0d", beats));
    check(last_beat - first_beat == 39, $sformatf("40 beats took %0d cycles", last_beat - first_beat + 1));
    // 1b. with consumer and channel stalls
    base = 60; beats = 0; first_beat = -1; rand_ready = 1; hbm_stall = 1;
    cmd(0, 60, 50, 0, 0, 0, 0);
    check(beats == 50, $sformatf("stalled stream beats %0d", beats));
    rand_ready = 0; hbm_stall = 0;

    // 2. embedding read
    base = 120; emb = 0; lbase = 33;
    cmd(1, 120, 6, 33, 0, 0, 0);
    check(emb == 6, $sformatf("embedding words %0d", emb));
    check(beats == 50, "no stream beats during embedding read");

    // 3. normal KV write: tree 2 at address 200
    for (int e = 0; e < V; e++) kv[e] = 16'($urandom);
    cmd(2, 200, 1, 5, 0, 0, 2);
    for (int e = 0; e < V; e++)
      check(u_hbm.mem[2 * CPT + e / EPC][200][(e % EPC) * 16 +: 16] == kv[e], $sformatf("kv normal %0d", e));

    // 4. transposed KV write: slot 37, stride 2^2, address 140
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < 64; a++) prev[c][a] = u_hbm.mem[c][140 + a];
    for (int e = 0; e < V; e++) kv[e] = 16'($urandom);
    cmd(2, 140, 1, 6, 1, 2, 37);
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < 64; a++)
        for (int s = 0; s < EPC; s++) begin
          logic [15:0] exp_v;
          int t, grp;
          t = c / CPT; grp = a >> 2;
          exp_v = prev[c][a][s*16 +: 16];
          if ((a % 4) == 0 && grp < V / L && (c % CPT) * EPC + s == 37) exp_v = kv[grp * L + t];
          check(u_hbm.mem[c][140 + a][s*16 +: 16] == exp_v, $sformatf("kv transposed ch%0d a%0d s%0d", c, a, s));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
