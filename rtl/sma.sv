// sma: streamlined memory access - the LPU's DMA between the HBM channels and the engines.
//
// The SMA is wired to all NCH HBM channels (NCH = L*V*16 / 512: two 512-bit channels per MAC
// tree). Because the weights are laid out in memory so that one address across all channels is
// exactly one V x L tile, a stream read needs no reshaping: the SMA sends the same address to
// every channel in lockstep, buffers the responses in per-channel FIFOs, and when every channel
// has data it hands the concatenation of all channels to the operand issue unit as one beat
// (channel c carries bits [c*512 +: 512]). Requests run ahead of consumption up to the FIFO
// depth, so the stream keeps the channels busy with back-to-back reads.
//
// Commands (one at a time, cmd_valid/cmd_ready, done pulses when finished):
//   RD_STREAM  read `count` consecutive addresses from all channels -> s_* stream (weights, KV)
//   RD_EMB     read `count` addresses from channels 0..CPT-1 (one V-element vector each)
//              and write them to consecutive LMU words (embedding, normalisation parameters)
//   WR_KV      read one vector from the LMU and write it to HBM with byte strobes:
//                normal     - the whole vector to the CPT channels of tree `sel`, address hbm
//                transposed - element d goes to tree d mod L, slot `sel` (0..V-1) of the word
//                             at address hbm + (d div L) << lg_stride; one write beat per group
//                             of L elements, only the strobes of slot `sel` set.
//              The transposed form stores a new token's Key/Value as one column of the tiles
//              it will later be read in, so the data arrives already transposed when streamed.
//
// Follows the paper: all channels to the engines at full width, continuous read requests,
// occasional KV writes, strobe-based transposition when writing. This design's own: the
// command set and encodings, channel port protocol, FIFO depth, the address arithmetic.
module sma
  import lpu_pkg::*;
#(
  parameter int unsigned L   = 32,
  parameter int unsigned V   = 64,
  parameter int unsigned FD  = 8,                    // response FIFO depth per channel
  localparam int unsigned NCH = L * V * 16 / CH_W,  // HBM channels
  localparam int unsigned CPT = V * 16 / CH_W,      // channels per MAC tree
  localparam int unsigned EPC = CH_W / 16           // FP16 elements per channel word
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  logic [1:0]              cmd_op,        // 0 RD_STREAM, 1 RD_EMB, 2 WR_KV
  input  logic [HBM_AW-1:0]       cmd_hbm,
  input  logic [31:0]             cmd_count,
  input  logic [LMU_AW-1:0]       cmd_lmu,
  input  logic                    cmd_tr,        // WR_KV transposed
  input  logic [4:0]              cmd_lgstr,     // WR_KV transposed: log2 group stride
  input  logic [5:0]              cmd_sel,       // WR_KV: tree (normal) / slot (transposed)
  output logic                    done,
  // HBM channels: read
  output logic [NCH-1:0]          rq_valid,
  output logic [HBM_AW-1:0]       rq_addr,
  input  logic [NCH-1:0]          rq_ready,
  input  logic [NCH-1:0]          rs_valid,
  input  logic [NCH-1:0][CH_W-1:0] rs_data,
  // HBM channels: write
  output logic [NCH-1:0]          wq_valid,
  output logic [NCH-1:0][HBM_AW-1:0] wq_addr,
  output logic [NCH-1:0][CH_W-1:0] wq_data,
  output logic [NCH-1:0][CH_W/8-1:0] wq_strb,
  input  logic [NCH-1:0]          wq_ready,
  // stream to the OIU
  output logic                    s_valid,
  input  logic                    s_ready,
  output logic [NCH-1:0][CH_W-1:0] s_data,
  // LMU write request (RD_EMB)
  output logic                    lw_req,
  output logic [LMU_AW-1:0]       lw_addr,
  output logic [V-1:0][15:0]      lw_data,
  input  logic                    lw_gnt,
  // LMU read request (WR_KV); data arrives the cycle after the grant
  output logic                    lr_req,
  output logic [LMU_AW-1:0]       lr_addr,
  input  logic                    lr_gnt,
  input  logic [V-1:0][15:0]      lr_data
);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_KV_RD, S_KV_WAIT, S_KV_WR} state_e;
  state_e st;

  logic [1:0]          op_q;
  logic [HBM_AW-1:0]   hbm_q;
  logic [31:0]         issued, popped, count_q;
  logic [LMU_AW-1:0]   lmu_q;
  logic                tr_q;
  logic [4:0]          lgstr_q;
  logic [5:0]          sel_q;
  logic [V-1:0][15:0]  vec_q;
  logic [$clog2(V/L+1)-1:0] grp;
  logic [NCH-1:0]      sent;

  // ---------------- response FIFOs ----------------
  localparam int unsigned PW = $clog2(FD);
  logic [CH_W-1:0]  fifo [NCH][FD];
  logic [PW-1:0]    fwp [NCH];
  logic [PW-1:0]    frp [NCH];
  logic [PW:0]      fcnt [NCH];
  logic [NCH-1:0]   nonempty, act;
  logic             pop;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign nonempty[c] = fcnt[c] != 0;
    assign act[c]      = (op_q == 2'd0) || (c < CPT);
    assign s_data[c]   = fifo[c][frp[c]];
    always_ff @(posedge clk) begin
      if (rs_valid[c]) fifo[c][fwp[c]] <= rs_data[c];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fwp[c] <= '0; frp[c] <= '0; fcnt[c] <= '0;
      end else begin
        if (rs_valid[c]) fwp[c] <= fwp[c] + 1'b1;
        if (pop && act[c]) frp[c] <= frp[c] + 1'b1;
        fcnt[c] <= fcnt[c] + (PW+1)'(rs_valid[c]) - (PW+1)'(pop && act[c]);
      end
    end
  end

  // ---------------- read issue: lockstep on the active channels ----------------
  logic all_rdy, all_data, issue, occ_ok;
  assign all_rdy  = &(rq_ready | ~act);
  assign all_data = &(nonempty | ~act);
  assign occ_ok   = (issued - popped) < FD;
  assign issue    = (st == S_READ) && (issued != count_q) && occ_ok && all_rdy;
  assign rq_valid = (st == S_READ && issued != count_q && occ_ok && all_rdy) ? act : '0;
  assign rq_addr  = hbm_q + HBM_AW'(issued);

  assign s_valid  = (st == S_READ) && (op_q == 2'd0) && all_data;
  assign lw_req   = (st == S_READ) && (op_q == 2'd1) && all_data;
  assign lw_addr  = lmu_q + LMU_AW'(popped);
  for (genvar c = 0; c < CPT; c++) begin : g_emb
    assign lw_data[c*EPC +: EPC] = s_data[c];
  end
  assign pop = (s_valid && s_ready) || (lw_req && lw_gnt);

  // ---------------- KV write ----------------
  assign lr_req  = (st == S_KV_RD);
  assign lr_addr = lmu_q;

  logic [NCH-1:0] want;
  always_comb begin
    want    = '0;
    wq_data = '0;
    wq_strb = '0;
    wq_addr = '0;
    for (int c = 0; c < NCH; c++) begin
      if (!tr_q) begin
        if (c / CPT == int'(sel_q)) want[c] = 1'b1;
        wq_data[c] = vec_q[(c % CPT) * EPC +: EPC];
        wq_strb[c] = '1;
        wq_addr[c] = hbm_q;
      end else begin
        if ((c % CPT) == int'(sel_q) / EPC) want[c] = 1'b1;
        wq_data[c] = {EPC{vec_q[int'(grp) * L + c / CPT]}};
        wq_strb[c][(int'(sel_q) % EPC) * 2 +: 2] = 2'b11;
        wq_addr[c] = hbm_q + (HBM_AW'(grp) << lgstr_q);
      end
    end
  end
  assign wq_valid = (st == S_KV_WR) ? (want & ~sent) : '0;

  logic beat_done;
  assign beat_done = (st == S_KV_WR) && (((sent | (wq_valid & wq_ready)) & want) == want);

  assign cmd_ready = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; op_q <= '0; hbm_q <= '0; issued <= '0; popped <= '0; count_q <= '0;
      lmu_q <= '0; tr_q <= 1'b0; lgstr_q <= '0; sel_q <= '0; vec_q <= '0; grp <= '0;
      sent <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (cmd_valid) begin
          op_q <= cmd_op; hbm_q <= cmd_hbm; count_q <= cmd_count; lmu_q <= cmd_lmu;
          tr_q <= cmd_tr; lgstr_q <= cmd_lgstr; sel_q <= cmd_sel;
          issued <= '0; popped <= '0; grp <= '0; sent <= '0;
          st <= (cmd_op == 2'd2) ? S_KV_RD : S_READ;
        end
        S_READ: begin
          if (issue) issued <= issued + 1;
          if (pop) begin
            popped <= popped + 1;
            if (popped + 1 == count_q) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end
          end
          if (count_q == 0) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_KV_RD:   if (lr_gnt) st <= S_KV_WAIT;
        S_KV_WAIT: begin
          vec_q <= lr_data;
          st    <= S_KV_WR;
        end
        S_KV_WR: begin
          sent <= sent | (wq_valid & wq_ready);
          if (beat_done) begin
            sent <= '0;
            if (!tr_q || 32'(grp) == V / L - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              grp <= grp + 1'b1;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
