// lpu_top: one latency processing unit (LPU) - the streamlined LLM-inference processor.
//
// Data path. Weights and Key/Value tiles stream from all HBM channels through the SMA into the
// operand issue unit, which pairs each V x L tile with a V-element slice of the activation held
// in the LMU and issues both to the L MAC trees of the SXE. The vectorizer's L results per
// column group are written back to the LMU, or handed to the ESL, which writes them to the LMU
// and sends them to the peer devices at the same time. The VXE (with the sampler) performs the
// vector operations between matrix products. The ICP runs the program, dispatching MEM, COMP
// and NET instructions to these units, which then work concurrently.
//
// LMU ports. Read port A belongs to the OIU. Read port B and the write port are shared; fixed
// priority arbiters grant them:
//   read B : VXE > SMA (Key/Value write) > ESL transmit > host DMA
//   write  : SXE (never waits) > ESL > VXE > SMA (embedding) > host DMA
// A requester holds its request until granted; read data is on the port the next cycle.
//
// Control registers (written by the host): 0, 1, 7 free for the program (token and layer
// counts, ...), 2 top-k, 3 top-p (FP16), 4 1/temperature (FP16), 5 sampler seed,
// 6 ESL configuration {ring[7], group size[6:3], device id[2:0]}.
//
// External interfaces are plain streams: NCH HBM channel ports (the HBM3 PHY/controllers lie
// outside), host ports (program/CSR load, start, data in/out, sampled token; the PCIe core lies
// outside) and two ESL ring ports (the 100 Gbit/s transceivers lie outside).
// Follows the paper: the block set and their connections (Fig. "LPU hardware architecture"),
// L = 32 MAC trees of V = 64 elements for the 3.28 TB/s configuration. This design's own: the
// arbitration, port protocols and control-register map.
module lpu_top
  import lpu_pkg::*;
#(
  parameter int unsigned L      = 32,
  parameter int unsigned V      = 64,
  parameter int unsigned IDEPTH = 1024,
  parameter int unsigned LDEPTH = 4096,
  localparam int unsigned NCH   = L * V * 16 / CH_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host
  input  logic                       im_we,
  input  logic [$clog2(IDEPTH)-1:0]  im_addr,
  input  logic [63:0]                im_wdata,
  input  logic                       csr_we,
  input  logic [2:0]                 csr_addr,
  input  logic [31:0]                csr_wdata,
  input  logic                       start,
  output logic                       running,
  output logic                       halted,
  input  logic                       hin_valid,
  output logic                       hin_ready,
  input  logic [V-1:0][15:0]         hin_data,
  output logic                       hout_valid,
  input  logic                       hout_ready,
  output logic [V-1:0][15:0]         hout_data,
  output logic                       tok_valid,
  output logic [31:0]                tok,
  // HBM channels
  output logic [NCH-1:0]             rq_valid,
  output logic [HBM_AW-1:0]          rq_addr,
  input  logic [NCH-1:0]             rq_ready,
  input  logic [NCH-1:0]             rs_valid,
  input  logic [NCH-1:0][CH_W-1:0]   rs_data,
  output logic [NCH-1:0]             wq_valid,
  output logic [NCH-1:0][HBM_AW-1:0] wq_addr,
  output logic [NCH-1:0][CH_W-1:0]   wq_data,
  output logic [NCH-1:0][CH_W/8-1:0] wq_strb,
  input  logic [NCH-1:0]             wq_ready,
  // ESL ring ports
  output logic                       txr_valid,
  input  logic                       txr_ready,
  output logic [2:0]                 txr_hops,
  output logic [LMU_AW-1:0]          txr_addr,
  output logic [OFF_W-1:0]           txr_off,
  output logic [L-1:0][15:0]         txr_data,
  output logic                       txl_valid,
  input  logic                       txl_ready,
  output logic [2:0]                 txl_hops,
  output logic [LMU_AW-1:0]          txl_addr,
  output logic [OFF_W-1:0]           txl_off,
  output logic [L-1:0][15:0]         txl_data,
  input  logic                       rxl_valid,
  output logic                       rxl_ready,
  input  logic [2:0]                 rxl_hops,
  input  logic [LMU_AW-1:0]          rxl_addr,
  input  logic [OFF_W-1:0]           rxl_off,
  input  logic [L-1:0][15:0]         rxl_data,
  input  logic                       rxr_valid,
  output logic                       rxr_ready,
  input  logic [2:0]                 rxr_hops,
  input  logic [LMU_AW-1:0]          rxr_addr,
  input  logic [OFF_W-1:0]           rxr_off,
  input  logic [L-1:0][15:0]         rxr_data
);
  localparam int unsigned U_SMA = 0, U_OIU = 1, U_VXE = 2, U_TX = 3, U_RX = 4, U_HOST = 5;

  // ---------------- ICP ----------------
  logic [7:0][31:0]          csr;
  logic [NSREG_V-1:0][15:0]  sregs;
  logic [5:0]                u_valid, u_ready, u_idle;
  logic [LMU_AW-1:0]         d_dst, d_src;
  logic [11:0]               d_len;
  logic [HBM_AW-1:0]         d_hbm;
  logic [31:0]               d_count;
  logic [1:0]                d_sma_op;
  logic [17:0]               d_imm;
  logic                      d_sample, d_host_wr;

  icp #(.IDEPTH(IDEPTH), .NCSR(8), .L(L), .V(V)) u_icp (
    .clk, .rst_n, .im_we, .im_addr, .im_wdata, .csr_we, .csr_addr, .csr_wdata, .csr,
    .start, .running, .halted, .lmu_sregs(sregs),
    .unit_valid(u_valid), .unit_ready(u_ready), .unit_idle(u_idle),
    .d_dst, .d_src, .d_len, .d_hbm, .d_count, .d_sma_op, .d_imm, .d_sample, .d_host_wr
  );

  // ---------------- LMU and its arbiters ----------------
  logic                     ra_en;
  logic [LMU_AW-1:0]        ra_addr;
  logic [V-1:0][15:0]       ra_data, rb_data;
  logic                     rb_en;
  logic [LMU_AW-1:0]        rb_addr;
  logic                     w_en;
  logic [LMU_AW-1:0]        w_addr;
  logic [V-1:0]             w_mask;
  logic [V-1:0][15:0]       w_data;
  logic                     s_we;
  logic [1:0]               s_waddr;
  logic [15:0]              s_wdata;

  lmu #(.V(V), .DEPTH(LDEPTH), .NBANK(4), .NSREG(NSREG_V)) u_lmu (
    .clk, .rst_n, .ra_en, .ra_addr, .ra_data, .rb_en, .rb_addr, .rb_data,
    .w_en, .w_addr, .w_mask, .w_data, .s_we, .s_waddr, .s_wdata, .s_regs(sregs)
  );

  // read-B requesters: 0 VXE, 1 SMA, 2 ESL, 3 host
  logic [3:0]               rq;
  logic [3:0][LMU_AW-1:0]   rqa;
  logic [3:0]               rg;
  always_comb begin
    rg = '0;
    for (int k = 3; k >= 0; k--) if (rq[k]) rg = 4'(1 << k);
    rb_en   = |rq;
    rb_addr = '0;
    for (int k = 0; k < 4; k++) if (rg[k]) rb_addr = rqa[k];
  end

  // write requesters: 0 ESL, 1 VXE, 2 SMA, 3 host (the SXE pre-empts all of them)
  logic                     sx_valid, sx_esl;
  logic [L-1:0][15:0]       sx_y;
  logic [LMU_AW-1:0]        sx_dst;
  logic [OFF_W-1:0]         sx_off;
  logic                     sx_wr;
  logic [3:0]               wq;
  logic [3:0]               wg;
  logic [3:0][LMU_AW-1:0]   wqa;
  logic [V-1:0][15:0]       vxe_wd, sma_wd, host_wd;
  logic [L-1:0][15:0]       esl_wd;
  logic [OFF_W-1:0]         esl_woff;
  assign sx_wr = sx_valid && !sx_esl;

  always_comb begin
    wg = '0;
    if (!sx_wr)
      for (int k = 3; k >= 0; k--) if (wq[k]) wg = 4'(1 << k);
    w_en   = sx_wr || (|wq);
    w_addr = '0;
    w_mask = '0;
    w_data = '0;
    if (sx_wr) begin
      w_addr = sx_dst;
      for (int e = 0; e < L; e++) begin
        w_mask[int'(sx_off) + e] = 1'b1;
        w_data[int'(sx_off) + e] = sx_y[e];
      end
    end else if (wg[0]) begin
      w_addr = wqa[0];
      for (int e = 0; e < L; e++) begin
        w_mask[int'(esl_woff) + e] = 1'b1;
        w_data[int'(esl_woff) + e] = esl_wd[e];
      end
    end else if (wg[1]) begin
      w_addr = wqa[1]; w_mask = '1; w_data = vxe_wd;
    end else if (wg[2]) begin
      w_addr = wqa[2]; w_mask = '1; w_data = sma_wd;
    end else if (wg[3]) begin
      w_addr = wqa[3]; w_mask = '1; w_data = host_wd;
    end
  end

  // ---------------- SMA ----------------
  logic                     s_valid, s_ready;
  logic [NCH-1:0][CH_W-1:0] s_data;
  logic                     sma_done;

  sma #(.L(L), .V(V)) u_sma (
    .clk, .rst_n,
    .cmd_valid(u_valid[U_SMA]), .cmd_ready(u_ready[U_SMA]), .cmd_op(d_sma_op), .cmd_hbm(d_hbm),
    .cmd_count(d_count), .cmd_lmu((d_sma_op == 2'd2) ? d_src : d_dst), .cmd_tr(d_len[11]),
    .cmd_lgstr(d_len[10:6]), .cmd_sel(d_len[5:0]), .done(sma_done),
    .rq_valid, .rq_addr, .rq_ready, .rs_valid, .rs_data,
    .wq_valid, .wq_addr, .wq_data, .wq_strb, .wq_ready,
    .s_valid, .s_ready, .s_data,
    .lw_req(wq[2]), .lw_addr(wqa[2]), .lw_data(sma_wd), .lw_gnt(wg[2]),
    .lr_req(rq[1]), .lr_addr(rqa[1]), .lr_gnt(rg[1]), .lr_data(rb_data)
  );
  assign u_idle[U_SMA] = u_ready[U_SMA];

  // ---------------- OIU + SXE ----------------
  logic                          x_valid, x_first, x_last, x_relu, x_esl;
  logic [L-1:0][V-1:0][15:0]     x_w;
  logic [V-1:0][15:0]            x_x;
  logic [LMU_AW-1:0]             x_dst;
  logic [OFF_W-1:0]              x_off;
  logic                          esl_afull, esl_empty, oiu_done;
  logic [15:0]                   pend;   // column groups issued but not yet out of the SXE

  oiu #(.L(L), .V(V)) u_oiu (
    .clk, .rst_n,
    .cmd_valid(u_valid[U_OIU]), .cmd_ready(u_ready[U_OIU]), .cmd_src(d_src), .cmd_dst(d_dst),
    .cmd_k(d_len), .cmd_n(d_imm[13:0]), .cmd_relu(d_imm[17]), .cmd_esl(d_imm[16]),
    .done(oiu_done),
    .ra_en, .ra_addr, .ra_data,
    .s_valid, .s_ready, .s_data(s_data),
    .esl_afull,
    .x_valid, .x_first, .x_last, .x_w, .x_x, .x_dst, .x_off, .x_relu, .x_esl
  );

  sxe #(.L(L), .V(V)) u_sxe (
    .clk, .rst_n,
    .in_valid(x_valid), .in_first(x_first), .in_last(x_last), .in_w(x_w), .in_x(x_x),
    .in_dst(x_dst), .in_off(x_off), .in_relu(x_relu), .in_esl(x_esl),
    .out_valid(sx_valid), .out_y(sx_y), .out_dst(sx_dst), .out_off(sx_off), .out_esl(sx_esl)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= '0;
    else pend <= pend + 16'(x_valid && x_last) - 16'(sx_valid);
  end
  assign u_idle[U_OIU] = u_ready[U_OIU] && (pend == 0) && esl_empty;

  // ---------------- VXE ----------------
  logic vxe_done;
  vxe #(.V(V), .NSREG(NSREG_V)) u_vxe (
    .clk, .rst_n,
    .cmd_valid(u_valid[U_VXE]), .cmd_ready(u_ready[U_VXE]), .cmd_sample(d_sample),
    .cmd_funct(d_imm[17:14]), .cmd_a(d_src), .cmd_b(d_imm[11:0]), .cmd_d(d_dst), .cmd_len(d_len),
    .cmd_sidx(d_sample ? d_dst[1:0] : d_imm[13:12]), .done(vxe_done),
    .lr_req(rq[0]), .lr_addr(rqa[0]), .lr_gnt(rg[0]), .lr_data(rb_data),
    .lw_req(wq[1]), .lw_addr(wqa[1]), .lw_data(vxe_wd), .lw_gnt(wg[1]),
    .s_regs(sregs), .s_we, .s_waddr, .s_wdata,
    .top_k(csr[2][4:0]), .top_p(csr[3][15:0]), .inv_temp(csr[4][15:0]), .seed(csr[5][15:0]),
    .tok_valid, .tok
  );
  assign u_idle[U_VXE] = u_ready[U_VXE];

  // ---------------- ESL ----------------
  logic tx_done, rx_done;
  esl #(.L(L), .V(V)) u_esl (
    .clk, .rst_n,
    .dev_id(csr[6][2:0]), .grp_size(csr[6][6:3]), .ring(csr[6][7]),
    .sx_valid(sx_valid && sx_esl), .sx_addr(sx_dst), .sx_off(sx_off), .sx_data(sx_y),
    .afull(esl_afull), .tx_empty(esl_empty),
    .tx_cmd_valid(u_valid[U_TX]), .tx_cmd_ready(u_ready[U_TX]), .tx_cmd_src(d_src),
    .tx_cmd_len(d_len), .tx_done,
    .rx_cmd_valid(u_valid[U_RX]), .rx_cmd_ready(u_ready[U_RX]), .rx_cmd_len(d_len), .rx_done,
    .lr_req(rq[2]), .lr_addr(rqa[2]), .lr_gnt(rg[2]), .lr_data(rb_data),
    .lw_req(wq[0]), .lw_addr(wqa[0]), .lw_off(esl_woff), .lw_data(esl_wd), .lw_gnt(wg[0]),
    .txr_valid, .txr_ready, .txr_hops, .txr_addr, .txr_off, .txr_data,
    .txl_valid, .txl_ready, .txl_hops, .txl_addr, .txl_off, .txl_data,
    .rxl_valid, .rxl_ready, .rxl_hops, .rxl_addr, .rxl_off, .rxl_data,
    .rxr_valid, .rxr_ready, .rxr_hops, .rxr_addr, .rxr_off, .rxr_data
  );
  assign u_idle[U_TX] = u_ready[U_TX] && esl_empty;
  assign u_idle[U_RX] = u_ready[U_RX];

  // ---------------- host DMA ----------------
  host_dma #(.V(V)) u_host (
    .clk, .rst_n,
    .cmd_valid(u_valid[U_HOST]), .cmd_ready(u_ready[U_HOST]), .cmd_wr(d_host_wr),
    .cmd_lmu(d_host_wr ? d_src : d_dst), .cmd_len(d_len),
    .hin_valid, .hin_ready, .hin_data, .hout_valid, .hout_ready, .hout_data,
    .lr_req(rq[3]), .lr_addr(rqa[3]), .lr_gnt(rg[3]), .lr_data(rb_data),
    .lw_req(wq[3]), .lw_addr(wqa[3]), .lw_data(host_wd), .lw_gnt(wg[3])
  );
  assign u_idle[U_HOST] = u_ready[U_HOST];

endmodule
