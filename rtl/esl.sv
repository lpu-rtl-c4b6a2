// esl: expandable synchronization link - the on-chip side of the LPU's peer-to-peer network.
//
// In tensor-parallel execution every device computes a slice of each output vector and all
// devices need the whole vector. The ESL overlaps that exchange with computation:
//  * Partial results of a vector-matrix instruction marked for the ESL go from the SXE into a
//    buffer (not only the register file), one L-element group at a time - the size of one P2P
//    packet. NET transmit instructions push LMU words into the same buffer (V/L packets a word).
//  * From the head of the buffer each packet is written to the device's own LMU and sent on the
//    two ring ports at once, while the SXE already works on the next group.
//  * Packets arriving from a peer are written to the LMU at the address the packet carries and,
//    if more devices lie further along that direction, forwarded with one hop less. Received
//    packets and the device's own packets compete for the LMU write port in an arbiter
//    (received ones first).
//  * A NET receive instruction completes when the requested number of peer packets has arrived;
//    packets that arrive earlier are counted in advance, so no exchange waits for the instruction.
//
// Router. Devices form a ring that can be split into independent groups (8 = one ring,
// 4 = two lines of four, 2 = four lines of two). Given the device's position `dev_id` in its
// group of `grp_size` and whether the group is a closed ring, the sender puts in each packet
// header the number of hops it must travel: on a line, dev_id hops to the left and
// grp_size-1-dev_id to the right; on a ring, grp_size/2 to the right and grp_size/2-1 to the
// left, so every other member receives each packet exactly once over the shortest path.
//
// Ports: "right" leads to dev_id+1, "left" to dev_id-1 (on a ring, modulo grp_size). All
// streams use valid/ready. The serialiser, MAC and QSFP transceivers lie outside.
// Follows the paper: column-split results sized to the P2P width, buffer between SXE and P2P,
// concurrent compute/transmit/receive, arbitration of received and own results into the
// register file, ring of 2 ports per device, reconfiguration into 8-ring / 2x4 / 4x2 lines,
// hops and direction from the device ID. This design's own: packet format, buffer depths,
// priorities, the receive-count semantics of the NET receive instruction.
module esl
  import lpu_pkg::*;
#(
  parameter int unsigned L   = 32,
  parameter int unsigned V   = 64,
  parameter int unsigned BUF = 16,   // transmit buffer entries (packets)
  parameter int unsigned RXD = 4     // receive FIFO entries per port
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [2:0]            dev_id,
  input  logic [3:0]            grp_size,    // 1, 2, 4 or 8
  input  logic                  ring,
  // partial products from the SXE vectorizer
  input  logic                  sx_valid,
  input  logic [LMU_AW-1:0]     sx_addr,
  input  logic [OFF_W-1:0]      sx_off,
  input  logic [L-1:0][15:0]    sx_data,
  output logic                  afull,
  output logic                  tx_empty,     // transmit buffer drained
  // NET transmit: send len LMU words starting at src
  input  logic                  tx_cmd_valid,
  output logic                  tx_cmd_ready,
  input  logic [LMU_AW-1:0]     tx_cmd_src,
  input  logic [11:0]           tx_cmd_len,
  output logic                  tx_done,
  // NET receive: wait for len packets
  input  logic                  rx_cmd_valid,
  output logic                  rx_cmd_ready,
  input  logic [11:0]           rx_cmd_len,
  output logic                  rx_done,
  // LMU read (shared port B)
  output logic                  lr_req,
  output logic [LMU_AW-1:0]     lr_addr,
  input  logic                  lr_gnt,
  input  logic [V-1:0][15:0]    lr_data,
  // LMU write (L elements at an element offset)
  output logic                  lw_req,
  output logic [LMU_AW-1:0]     lw_addr,
  output logic [OFF_W-1:0]      lw_off,
  output logic [L-1:0][15:0]    lw_data,
  input  logic                  lw_gnt,
  // ring ports: transmit
  output logic                  txr_valid,
  input  logic                  txr_ready,
  output logic [2:0]            txr_hops,
  output logic [LMU_AW-1:0]     txr_addr,
  output logic [OFF_W-1:0]      txr_off,
  output logic [L-1:0][15:0]    txr_data,
  output logic                  txl_valid,
  input  logic                  txl_ready,
  output logic [2:0]            txl_hops,
  output logic [LMU_AW-1:0]     txl_addr,
  output logic [OFF_W-1:0]      txl_off,
  output logic [L-1:0][15:0]    txl_data,
  // ring ports: receive (rxl comes from the left neighbour, travelling right)
  input  logic                  rxl_valid,
  output logic                  rxl_ready,
  input  logic [2:0]            rxl_hops,
  input  logic [LMU_AW-1:0]     rxl_addr,
  input  logic [OFF_W-1:0]      rxl_off,
  input  logic [L-1:0][15:0]    rxl_data,
  input  logic                  rxr_valid,
  output logic                  rxr_ready,
  input  logic [2:0]            rxr_hops,
  input  logic [LMU_AW-1:0]     rxr_addr,
  input  logic [OFF_W-1:0]      rxr_off,
  input  logic [L-1:0][15:0]    rxr_data
);
  typedef struct packed {
    logic [2:0]        hops;
    logic [LMU_AW-1:0] addr;
    logic [OFF_W-1:0]  off;
    logic [L-1:0][15:0] data;
  } pkt_t;

  // ---------------- router: hops per direction ----------------
  logic [2:0] hops_r, hops_l;
  always_comb begin
    if (ring) begin
      hops_r = 3'(grp_size >> 3'd1);
      hops_l = 3'((grp_size >> 3'd1) - 4'd1);
    end else begin
      hops_r = 3'(grp_size - 4'd1 - 4'(dev_id));
      hops_l = dev_id;
    end
    if (grp_size <= 1) begin
      hops_r = '0;
      hops_l = '0;
    end
  end

  // ---------------- transmit buffer ----------------
  localparam int unsigned BP = $clog2(BUF);
  pkt_t            buf_q [BUF];
  logic [BP-1:0]   bwp, brp;
  logic [BP:0]     bcnt;
  logic            bpush, bpop;
  pkt_t            bin, bhead;
  logic            own_w, own_r, own_l;   // head already written / sent right / sent left

  assign afull    = bcnt >= (BP+1)'(BUF - 8);
  assign tx_empty = (bcnt == 0);
  assign bhead = buf_q[brp];

  // NET transmit sequencer
  typedef enum logic [1:0] {T_IDLE, T_RD, T_LD, T_PUSH} tst_e;
  tst_e                tst;
  logic [LMU_AW-1:0]   t_src;
  logic [11:0]         t_len, t_i;
  logic [V-1:0][15:0]  t_word;
  logic [$clog2(V/L+1)-1:0] t_g;

  assign tx_cmd_ready = (tst == T_IDLE);
  assign lr_req  = (tst == T_RD);
  assign lr_addr = t_src + LMU_AW'(t_i);

  always_comb begin
    bpush = 1'b0;
    bin   = '0;
    if (sx_valid) begin
      bpush = 1'b1;
      bin   = '{hops: 3'd0, addr: sx_addr, off: sx_off, data: sx_data};
    end else if (tst == T_PUSH && bcnt < (BP+1)'(BUF)) begin
      bpush = 1'b1;
      bin   = '{hops: 3'd0, addr: t_src + LMU_AW'(t_i), off: OFF_W'(32'(t_g) * L),
                data: t_word[32'(t_g) * L +: L]};
    end
  end

  // ---------------- receive FIFOs ----------------
  localparam int unsigned RP = $clog2(RXD);
  pkt_t          rfl [RXD];
  pkt_t          rfr [RXD];
  logic [RP-1:0] lwp, lrp, rwp, rrp;
  logic [RP:0]   lcnt, rcnt;
  logic          l_wr, r_wr, l_fw, r_fw;     // head written / forwarded
  logic          lpop, rpop;
  pkt_t          lh, rh;
  assign lh = rfl[lrp];
  assign rh = rfr[rrp];
  assign rxl_ready = lcnt < (RP+1)'(RXD);
  assign rxr_ready = rcnt < (RP+1)'(RXD);

  // ---------------- transmit port arbitration: forwarding first ----------------
  logic l_fwd_need, r_fwd_need;       // left-rx head must go right, right-rx head must go left
  assign l_fwd_need = (lcnt != 0) && (lh.hops > 1) && !l_fw;
  assign r_fwd_need = (rcnt != 0) && (rh.hops > 1) && !r_fw;

  logic own_need_r, own_need_l, own_need_w;
  assign own_need_r = (bcnt != 0) && (hops_r != 0) && !own_r;
  assign own_need_l = (bcnt != 0) && (hops_l != 0) && !own_l;
  assign own_need_w = (bcnt != 0) && !own_w;

  always_comb begin
    txr_valid = l_fwd_need || own_need_r;
    txr_hops  = l_fwd_need ? lh.hops - 1'b1 : hops_r;
    txr_addr  = l_fwd_need ? lh.addr : bhead.addr;
    txr_off   = l_fwd_need ? lh.off  : bhead.off;
    txr_data  = l_fwd_need ? lh.data : bhead.data;
    txl_valid = r_fwd_need || own_need_l;
    txl_hops  = r_fwd_need ? rh.hops - 1'b1 : hops_l;
    txl_addr  = r_fwd_need ? rh.addr : bhead.addr;
    txl_off   = r_fwd_need ? rh.off  : bhead.off;
    txl_data  = r_fwd_need ? rh.data : bhead.data;
  end

  // ---------------- LMU write arbitration: received first, then own ----------------
  logic l_wneed, r_wneed;
  logic [1:0] wsel;   // 0 left-rx, 1 right-rx, 2 own
  assign l_wneed = (lcnt != 0) && !l_wr;
  assign r_wneed = (rcnt != 0) && !r_wr;
  always_comb begin
    wsel    = l_wneed ? 2'd0 : (r_wneed ? 2'd1 : 2'd2);
    lw_req  = l_wneed || r_wneed || own_need_w;
    lw_addr = (wsel == 0) ? lh.addr : ((wsel == 1) ? rh.addr : bhead.addr);
    lw_off  = (wsel == 0) ? lh.off  : ((wsel == 1) ? rh.off  : bhead.off);
    lw_data = (wsel == 0) ? lh.data : ((wsel == 1) ? rh.data : bhead.data);
  end

  // completion of each head this cycle
  logic l_wr_n, r_wr_n, l_fw_n, r_fw_n, own_w_n, own_r_n, own_l_n;
  always_comb begin
    l_wr_n  = l_wr  || (lw_req && lw_gnt && wsel == 0);
    r_wr_n  = r_wr  || (lw_req && lw_gnt && wsel == 1);
    own_w_n = own_w || (lw_req && lw_gnt && wsel == 2);
    l_fw_n  = l_fw  || (lh.hops <= 1) || (l_fwd_need && txr_ready);
    r_fw_n  = r_fw  || (rh.hops <= 1) || (r_fwd_need && txl_ready);
    own_r_n = own_r || (hops_r == 0) || (!l_fwd_need && own_need_r && txr_ready);
    own_l_n = own_l || (hops_l == 0) || (!r_fwd_need && own_need_l && txl_ready);
    lpop    = (lcnt != 0) && l_wr_n && l_fw_n;
    rpop    = (rcnt != 0) && r_wr_n && r_fw_n;
    bpop    = (bcnt != 0) && own_w_n && own_r_n && own_l_n;
  end

  // ---------------- receive accounting ----------------
  logic [15:0] rx_avail;
  logic        rx_wait;
  logic [11:0] rx_need;
  assign rx_cmd_ready = !rx_wait;

  always_ff @(posedge clk) begin
    if (bpush) buf_q[bwp] <= bin;
    if (rxl_valid && rxl_ready)
      rfl[lwp] <= '{hops: rxl_hops, addr: rxl_addr, off: rxl_off, data: rxl_data};
    if (rxr_valid && rxr_ready)
      rfr[rwp] <= '{hops: rxr_hops, addr: rxr_addr, off: rxr_off, data: rxr_data};
    if (tst == T_LD) t_word <= lr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bwp <= '0; brp <= '0; bcnt <= '0; own_w <= 1'b0; own_r <= 1'b0; own_l <= 1'b0;
      lwp <= '0; lrp <= '0; lcnt <= '0; rwp <= '0; rrp <= '0; rcnt <= '0;
      l_wr <= 1'b0; r_wr <= 1'b0; l_fw <= 1'b0; r_fw <= 1'b0;
      tst <= T_IDLE; t_src <= '0; t_len <= '0; t_i <= '0; t_g <= '0; tx_done <= 1'b0;
      rx_avail <= '0; rx_wait <= 1'b0; rx_need <= '0; rx_done <= 1'b0;
    end else begin
      tx_done <= 1'b0;
      rx_done <= 1'b0;
      // transmit buffer
      if (bpush) bwp <= bwp + 1'b1;
      if (bpop) begin
        brp <= brp + 1'b1;
        own_w <= 1'b0; own_r <= 1'b0; own_l <= 1'b0;
      end else if (bcnt != 0) begin
        own_w <= own_w_n; own_r <= own_r_n; own_l <= own_l_n;
      end
      bcnt <= bcnt + (BP+1)'(bpush) - (BP+1)'(bpop);
      // receive FIFOs
      if (rxl_valid && rxl_ready) lwp <= lwp + 1'b1;
      if (rxr_valid && rxr_ready) rwp <= rwp + 1'b1;
      lcnt <= lcnt + (RP+1)'(rxl_valid && rxl_ready) - (RP+1)'(lpop);
      rcnt <= rcnt + (RP+1)'(rxr_valid && rxr_ready) - (RP+1)'(rpop);
      if (lpop) begin
        lrp <= lrp + 1'b1; l_wr <= 1'b0; l_fw <= 1'b0;
      end else if (lcnt != 0) begin
        l_wr <= l_wr_n; l_fw <= l_fw_n;
      end
      if (rpop) begin
        rrp <= rrp + 1'b1; r_wr <= 1'b0; r_fw <= 1'b0;
      end else if (rcnt != 0) begin
        r_wr <= r_wr_n; r_fw <= r_fw_n;
      end
      // NET transmit sequencer
      case (tst)
        T_IDLE: if (tx_cmd_valid) begin
          t_src <= tx_cmd_src; t_len <= tx_cmd_len; t_i <= '0; t_g <= '0;
          if (tx_cmd_len == 0) tx_done <= 1'b1;
          else tst <= T_RD;
        end
        T_RD: if (lr_gnt) tst <= T_LD;
        T_LD: tst <= T_PUSH;
        T_PUSH: if (!sx_valid && bcnt < (BP+1)'(BUF)) begin
          if (32'(t_g) == V / L - 1) begin
            t_g <= '0;
            t_i <= t_i + 1'b1;
            if (t_i + 1 == t_len) begin
              tst     <= T_IDLE;
              tx_done <= 1'b1;
            end else tst <= T_RD;
          end else t_g <= t_g + 1'b1;
        end
        default: tst <= T_IDLE;
      endcase
      // NET receive
      begin
        logic [15:0] avail;
        avail = rx_avail + 16'(lw_req && lw_gnt && wsel != 2);
        if (!rx_wait && rx_cmd_valid) begin
          rx_wait <= 1'b1;
          rx_need <= rx_cmd_len;
        end
        if (rx_wait && avail >= 16'(rx_need)) begin
          avail   = avail - 16'(rx_need);
          rx_wait <= 1'b0;
          rx_done <= 1'b1;
        end
        rx_avail <= avail;
      end
    end
  end

endmodule
