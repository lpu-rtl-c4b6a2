// tb_esl: self-checking test of the expandable synchronization link with four devices
// (L = 4, V = 8) wired as a ring: right port of device d to the left port of device d+1.
//
// Each device injects P result packets from its "SXE" (unique LMU addresses per device, random
// data) and runs a NET receive for the packets of the three others. The links stall at random.
// Configurations: one closed ring of 4, a line of 4 and two lines of 2 (in which only the
// partner's packets must arrive). Checked for every device: every packet that should reach it is
// written to its LMU exactly once with the right data at the right word and element offset,
// packets of other groups never arrive, its own packets land in its own LMU, and the receive
// instruction completes. Forwarding (a received packet sent on) must happen in the ring and
// line-of-4 cases; the almost-full flag must rise while the SXE pushes faster than the link drains.
module tb_esl;
  import lpu_pkg::*;

  localparam int unsigned L = 4, V = 8, N = 4, P = 24, DEPTH = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [2:0] dev_id [N];
  logic [3:0] grp_size;
  logic       ring;
  logic sx_valid [N], afull [N], tx_empty [N], rx_cmd_valid [N], rx_cmd_ready [N], rx_done [N];
  logic [LMU_AW-1:0] sx_addr [N];
  logic [OFF_W-1:0]  sx_off [N];
  logic [L-1:0][15:0] sx_data [N];
  logic [11:0] rx_len [N];
  logic lw_req [N], lw_gnt [N];
  logic [LMU_AW-1:0] lw_addr [N];
  logic [OFF_W-1:0]  lw_off [N];
  logic [L-1:0][15:0] lw_data [N];
  // links, [d][0] = left port, [d][1] = right port
  logic tv [N][2], tr [N][2], rv [N][2], rr [N][2];
  logic [2:0] th [N][2], rh [N][2];
  logic [LMU_AW-1:0] ta [N][2], ra [N][2];
  logic [OFF_W-1:0] to [N][2], ro [N][2];
  logic [L-1:0][15:0] td [N][2], rd [N][2];
  logic gate [N][2];

  always @(posedge clk)
    for (int d = 0; d < N; d++) begin
      gate[d][0] <= ($urandom % 3) != 0;
      gate[d][1] <= ($urandom % 3) != 0;
    end
  always_comb
    for (int d = 0; d < N; d++) begin
      // right of d -> left of d+1
      rv[(d+1)%N][0] = tv[d][1] && gate[d][1]; rh[(d+1)%N][0] = th[d][1];
      ra[(d+1)%N][0] = ta[d][1]; ro[(d+1)%N][0] = to[d][1]; rd[(d+1)%N][0] = td[d][1];
      tr[d][1] = rr[(d+1)%N][0] && gate[d][1];
      // left of d -> right of d-1
      rv[(d+N-1)%N][1] = tv[d][0] && gate[d][0]; rh[(d+N-1)%N][1] = th[d][0];
      ra[(d+N-1)%N][1] = ta[d][0]; ro[(d+N-1)%N][1] = to[d][0]; rd[(d+N-1)%N][1] = td[d][0];
      tr[d][0] = rr[(d+N-1)%N][1] && gate[d][0];
    end

  for (genvar d = 0; d < N; d++) begin : g_dev
    esl #(.L(L), .V(V), .BUF(16), .RXD(4)) u_esl (
      .clk, .rst_n, .dev_id(dev_id[d]), .grp_size, .ring,
      .sx_valid(sx_valid[d]), .sx_addr(sx_addr[d]), .sx_off(sx_off[d]), .sx_data(sx_data[d]),
      .afull(afull[d]), .tx_empty(tx_empty[d]),
      .tx_cmd_valid(1'b0), .tx_cmd_ready(), .tx_cmd_src('0), .tx_cmd_len('0), .tx_done(),
      .rx_cmd_valid(rx_cmd_valid[d]), .rx_cmd_ready(rx_cmd_ready[d]), .rx_cmd_len(rx_len[d]),
      .rx_done(rx_done[d]),
      .lr_req(), .lr_addr(), .lr_gnt(1'b0), .lr_data('0),
      .lw_req(lw_req[d]), .lw_addr(lw_addr[d]), .lw_off(lw_off[d]), .lw_data(lw_data[d]),
      .lw_gnt(lw_gnt[d]),
      .txr_valid(tv[d][1]), .txr_ready(tr[d][1]), .txr_hops(th[d][1]), .txr_addr(ta[d][1]),
      .txr_off(to[d][1]), .txr_data(td[d][1]),
      .txl_valid(tv[d][0]), .txl_ready(tr[d][0]), .txl_hops(th[d][0]), .txl_addr(ta[d][0]),
      .txl_off(to[d][0]), .txl_data(td[d][0]),
      .rxl_valid(rv[d][0]), .rxl_ready(rr[d][0]), .rxl_hops(rh[d][0]), .rxl_addr(ra[d][0]),
      .rxl_off(ro[d][0]), .rxl_data(rd[d][0]),
      .rxr_valid(rv[d][1]), .rxr_ready(rr[d][1]), .rxr_hops(rh[d][1]), .rxr_addr(ra[d][1]),
      .rxr_off(ro[d][1]), .rxr_data(rd[d][1])
    );
  end

  // LMU models: record every write
  logic [15:0] mem [N][DEPTH][V];
  int          wcnt [N][DEPTH][V / L];
  always @(posedge clk)
    for (int d = 0; d < N; d++) begin
      if (lw_req[d] && lw_gnt[d]) begin
        for (int e = 0; e < L; e++) mem[d][lw_addr[d] % DEPTH][int'(lw_off[d]) + e] = lw_data[d][e];
        wcnt[d][lw_addr[d] % DEPTH][int'(lw_off[d]) / L]++;
      end
    end
  always_comb for (int d = 0; d < N; d++) lw_gnt[d] = lw_req[d] && cyc[1];

  int n_fwd = 0, n_afull = 0, n_rxdone [N];
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < N; d++) begin
      if (afull[d]) n_afull++;
      if (rx_done[d]) n_rxdone[d]++;
      // a packet leaves on the right port that did not come from this device's SXE buffer:
      // detected by its address belonging to another device
      if (tv[d][1] && tr[d][1] && int'(ta[d][1]) / 16 != d) n_fwd++;
      if (tv[d][0] && tr[d][0] && int'(ta[d][0]) / 16 != d) n_fwd++;
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] pk [N][P][L];

  // one exchange: every device pushes P packets, expects the packets of its group
  task automatic exchange(int gs, bit rg);
    int gsz [N];
    for (int d = 0; d < N; d++) begin
      for (int a = 0; a < DEPTH; a++) for (int s = 0; s < V / L; s++) wcnt[d][a][s] = 0;
      n_rxdone[d] = 0;
      dev_id[d] = 3'(d % gs);
      for (int p = 0; p < P; p++) for (int e = 0; e < L; e++) pk[d][p][e] = 16'($urandom);
    end
    grp_size = 4'(gs); ring = rg;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // receive instructions first on even devices, after the data on odd ones
    for (int d = 0; d < N; d += 2) begin
      rx_cmd_valid[d] <= 1; rx_len[d] <= 12'(P * (gs - 1));
    end
    @(posedge clk);
    for (int d = 0; d < N; d += 2) rx_cmd_valid[d] <= 0;
    // SXE bursts: one packet per cycle while the buffer is not almost full
    for (int p = 0; p < P; ) begin
      if (!(afull[0] || afull[1] || afull[2] || afull[3])) begin
        for (int d = 0; d < N; d++) begin
          sx_valid[d] <= 1; sx_addr[d] <= LMU_AW'(16 * d + p / (V / L));
          sx_off[d] <= OFF_W'((p % (V / L)) * L);
          for (int e = 0; e < L; e++) sx_data[d][e] <= pk[d][p][e];
        end
        p++;
      end else begin
        for (int d = 0; d < N; d++) sx_valid[d] <= 0;
      end
      @(posedge clk);
    end
    for (int d = 0; d < N; d++) sx_valid[d] <= 0;
    repeat (200) @(posedge clk);
    for (int d = 1; d < N; d += 2) begin
      rx_cmd_valid[d] <= 1; rx_len[d] <= 12'(P * (gs - 1));
    end
    @(posedge clk);
    for (int d = 1; d < N; d += 2) rx_cmd_valid[d] <= 0;
    repeat (2000) @(posedge clk);
    for (int d = 0; d < N; d++) begin
      check(n_rxdone[d] == 1, $sformatf("gs%0d ring%0d dev%0d receive done %0d", gs, rg, d, n_rxdone[d]));
      check(tx_empty[d], "buffer drained");
      for (int s = 0; s < N; s++) begin
        bit same = (s / gs) == (d / gs);
        for (int p = 0; p < P; p++) begin
          int a = 16 * s + p / (V / L), sl = p % (V / L);
          check(wcnt[d][a][sl] == (same ? 1 : 0),
                $sformatf("gs%0d ring%0d dev%0d packet of dev%0d #%0d written %0d times", gs, rg, d, s, p, wcnt[d][a][sl]));
          if (same)
            for (int e = 0; e < L; e++)
              check(mem[d][a][sl * L + e] == pk[s][p][e], "packet data");
        end
      end
    end
  endtask

  initial begin
    for (int d = 0; d < N; d++) begin
      dev_id[d] = '0; sx_valid[d] = 0; sx_addr[d] = '0; sx_off[d] = '0; sx_data[d] = '0;
      rx_cmd_valid[d] = 0; rx_len[d] = '0; n_rxdone[d] = 0;
    end
    grp_size = 4'd4; ring = 1'b1;
    exchange(4, 1'b1);
    check(n_fwd > 0, "forwarding on the ring");
    n_fwd = 0;
    exchange(4, 1'b0);
    check(n_fwd > 0, "forwarding on the line");
    exchange(2, 1'b0);
    check(n_afull > 0, "almost-full seen");
    $display("forwarded %0d, almost-full cycles %0d", n_fwd, n_afull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
