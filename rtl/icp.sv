// icp: instruction control processor - the LPU's RISC control core, dispatcher and scoreboard.
//
// The host loads the program into the instruction buffer (IDEPTH x 64 bits) and the per-request
// arguments into the control registers, then pulses `start`. Each cycle the ICP looks at the
// instruction at PC:
//  * CTRL instructions execute here in one cycle: scalar ALU on 16 x 32-bit registers (r0 reads
//    as zero), moves from the control registers and from the LMU scalar registers, branch and
//    jump to absolute targets. They build the loop counters and HBM addresses (token, layer).
//  * MEM, COMP and NET instructions are dispatched to their unit (SMA, OIU/SXE, VXE, ESL
//    transmit, ESL receive, host DMA) once the unit is free and the scoreboard finds no hazard;
//    the PC then moves on without waiting for the unit to finish. Units therefore run
//    concurrently, and work on the SXE and the VXE completes out of program order.
//  * The scoreboard divides the LMU into 64-word regions plus one bit for the scalar registers.
//    For every busy unit it keeps the regions the instruction reads and writes; a new
//    instruction waits while it would read a region being written (RAW) or write a region being
//    read or written (WAR, WAW). A unit's regions are released when it reports idle.
//  * HLT waits for every unit to become idle, then stops and raises `halted`.
// Dispatch: unit_valid[u] is raised together with the decoded fields for one cycle, in which
// unit_ready[u] is high. unit_idle[u] must stay low from the cycle after a dispatch until the
// unit has finished all its LMU accesses.
//
// Follows the paper: RISC processor fetching from an instruction buffer, branch/jump on
// control registers (token, layer number), a dispatcher independent of the other modules,
// out-of-order execution of SXE and VXE, a scoreboard for data hazards. This design's own:
// the encoding (see lpu_pkg), one instruction in flight per unit, region granularity, the
// control-register map.
module icp
  import lpu_pkg::*;
#(
  parameter int unsigned IDEPTH = 1024,
  parameter int unsigned NCSR   = 8,
  parameter int unsigned L      = 32,
  parameter int unsigned V      = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host side
  input  logic                      im_we,
  input  logic [$clog2(IDEPTH)-1:0] im_addr,
  input  logic [63:0]               im_wdata,
  input  logic                      csr_we,
  input  logic [$clog2(NCSR)-1:0]   csr_addr,
  input  logic [31:0]               csr_wdata,
  output logic [NCSR-1:0][31:0]     csr,
  input  logic                      start,
  output logic                      running,
  output logic                      halted,
  // LMU scalar registers (read by MOVS)
  input  logic [NSREG_V-1:0][15:0]  lmu_sregs,
  // units: 0 SMA, 1 OIU, 2 VXE, 3 ESL tx, 4 ESL rx, 5 host DMA
  output logic [5:0]                unit_valid,
  input  logic [5:0]                unit_ready,
  input  logic [5:0]                unit_idle,
  // decoded fields shared by all units
  output logic [LMU_AW-1:0]         d_dst,
  output logic [LMU_AW-1:0]         d_src,
  output logic [11:0]               d_len,
  output logic [HBM_AW-1:0]         d_hbm,
  output logic [31:0]               d_count,
  output logic [1:0]                d_sma_op,
  output logic [17:0]               d_imm,
  output logic                      d_sample,
  output logic                      d_host_wr
);
  localparam int unsigned PW = $clog2(IDEPTH);
  localparam int unsigned NR = NREGION + 1;
  localparam int unsigned U_SMA = 0, U_OIU = 1, U_VXE = 2, U_TX = 3, U_RX = 4, U_HOST = 5;

  logic [63:0]        imem [IDEPTH];
  logic [PW-1:0]      pc;
  logic [31:0]        r [NSREG_I];
  logic [5:0]         busy;
  logic [NR-1:0]      rmask [6];
  logic [NR-1:0]      wmask [6];

  instr_t ins;
  assign ins = instr_t'(imem[pc]);

  always_ff @(posedge clk) begin
    if (im_we) imem[im_addr] <= im_wdata;
  end

  // region mask of n words starting at word a
  function automatic logic [NR-1:0] rmask_of(input logic [LMU_AW-1:0] a, input int n);
    logic [NR-1:0] m;
    int lo, hi;
    m = '0;
    if (n > 0) begin
      lo = int'(a) >> REGION_SHIFT;
      hi = (int'(a) + n - 1) >> REGION_SHIFT;
      for (int k = 0; k < NREGION; k++)
        if (k >= lo && k <= hi) m[k] = 1'b1;
    end
    return m;
  endfunction

  // ---------------- decode ----------------
  logic [31:0] rs1, rs2, simm;
  assign rs1  = (ins.src[3:0] == 0) ? 32'd0 : r[ins.src[3:0]];
  assign rs2  = (ins.sreg == 0) ? 32'd0 : r[ins.sreg];
  assign simm = 32'(signed'(ins.imm));

  logic [2:0]    unit;        // 0..5, 7 = none
  logic [NR-1:0] rd_m, wr_m;
  logic          is_ctrl, is_hlt;
  always_comb begin
    unit     = 3'd7;
    rd_m     = '0;
    wr_m     = '0;
    is_ctrl  = 1'b0;
    is_hlt   = 1'b0;
    d_dst    = ins.dst;
    d_src    = ins.src;
    d_len    = ins.len;
    d_imm    = ins.imm;
    d_hbm    = HBM_AW'(rs2 + 32'(ins.imm));
    d_count  = 32'(ins.len);
    d_sma_op = 2'd0;
    d_sample = 1'b0;
    d_host_wr = 1'b0;
    case (ins.op)
      OP_RD_EMB: begin
        unit = 3'(U_SMA); d_sma_op = 2'd1;
        wr_m = rmask_of(ins.dst, int'(ins.len));
      end
      OP_RD_KV, OP_RD_PARAM: begin
        unit = 3'(U_SMA); d_sma_op = 2'd0;
        d_count = 32'(ins.len) << ins.dst[4:0];
      end
      OP_WR_KV: begin
        unit = 3'(U_SMA); d_sma_op = 2'd2;
        rd_m = rmask_of(ins.src, 1);
      end
      OP_RD_HOST: begin
        unit = 3'(U_HOST);
        wr_m = rmask_of(ins.dst, int'(ins.len));
      end
      OP_WR_HOST: begin
        unit = 3'(U_HOST); d_host_wr = 1'b1;
        rd_m = rmask_of(ins.src, int'(ins.len));
      end
      OP_MATMUL: begin
        unit = 3'(U_OIU);
        rd_m = rmask_of(ins.src, int'(ins.len));
        wr_m = rmask_of(ins.dst, (int'(ins.imm[13:0]) * int'(L) + int'(V) - 1) / int'(V));
      end
      OP_VEC, OP_VFUSE: begin
        unit = 3'(U_VXE);
        rd_m = rmask_of(ins.src, int'(ins.len));
        case (vxf_e'(ins.imm[17:14]))
          VX_ADD, VX_SUB, VX_MUL: rd_m = rd_m | rmask_of(ins.imm[11:0], int'(ins.len));
          VX_ADDS, VX_SUBS, VX_MULS, VX_DIVS, VX_SUBEXP: rd_m[NREGION] = 1'b1;
          default: ;
        endcase
        if (vxf_e'(ins.imm[17:14]) == VX_SUM || vxf_e'(ins.imm[17:14]) == VX_MAX)
          wr_m[NREGION] = 1'b1;
        else
          wr_m = rmask_of(ins.dst, int'(ins.len));
      end
      OP_SAMPLE: begin
        unit = 3'(U_VXE); d_sample = 1'b1;
        rd_m = rmask_of(ins.src, int'(ins.len));
        wr_m[NREGION] = 1'b1;
      end
      OP_TX: begin
        unit = 3'(U_TX);
        rd_m = rmask_of(ins.src, int'(ins.len));
      end
      OP_RX: begin
        unit = 3'(U_RX);
        wr_m = rmask_of(ins.dst, int'(ins.imm[11:0]));
      end
      OP_ALU, OP_BR, OP_JMP: begin
        is_ctrl = 1'b1;
        if (ins.op == OP_ALU && alu_e'(ins.len[3:0]) == ALU_MOVS) rd_m[NREGION] = 1'b1;
      end
      OP_HLT: is_hlt = 1'b1;
      default: is_ctrl = 1'b1;   // NOP
    endcase
  end

  // ---------------- hazards ----------------
  logic [NR-1:0] w_all, r_all;
  always_comb begin
    w_all = '0;
    r_all = '0;
    for (int u = 0; u < 6; u++)
      if (busy[u]) begin
        w_all = w_all | wmask[u];
        r_all = r_all | rmask[u];
      end
  end

  logic hazard, can_go, all_idle;
  assign hazard   = |((rd_m & w_all) | (wr_m & (w_all | r_all)));
  assign all_idle = (busy == '0) && (&unit_idle);
  always_comb begin
    can_go = 1'b0;
    if (running && !hazard) begin
      if (is_hlt)       can_go = all_idle;
      else if (is_ctrl) can_go = 1'b1;
      else if (unit != 3'd7) can_go = unit_ready[unit] && !busy[unit];
    end
  end

  always_comb begin
    unit_valid = '0;
    if (can_go && !is_ctrl && !is_hlt && unit != 3'd7) unit_valid[unit] = 1'b1;
  end

  // ---------------- CTRL execution ----------------
  logic          br_take;
  logic [31:0]   alu_res;
  always_comb begin
    case (alu_e'(ins.len[3:0]))
      ALU_ADD:  alu_res = rs1 + rs2;
      ALU_SUB:  alu_res = rs1 - rs2;
      ALU_ADDI: alu_res = rs1 + simm;
      ALU_SHRI: alu_res = rs1 >> ins.imm[4:0];
      ALU_ANDI: alu_res = rs1 & 32'(ins.imm);
      ALU_SHLI: alu_res = rs1 << ins.imm[4:0];
      ALU_MOVI: alu_res = simm;
      ALU_MOVC: alu_res = csr[ins.imm[$clog2(NCSR)-1:0]];
      ALU_MOVS: alu_res = 32'(lmu_sregs[ins.imm[$clog2(NSREG_V)-1:0]]);
      ALU_MUL:  alu_res = rs1 * rs2;
      default:  alu_res = rs1;
    endcase
    case (brc_e'(ins.len[1:0]))
      BR_EQ:   br_take = (rs1 == rs2);
      BR_NE:   br_take = (rs1 != rs2);
      BR_LT:   br_take = ($signed(rs1) < $signed(rs2));
      default: br_take = ($signed(rs1) >= $signed(rs2));
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; halted <= 1'b0; busy <= '0; csr <= '0;
      for (int k = 0; k < NSREG_I; k++) r[k] <= '0;
      for (int u = 0; u < 6; u++) begin
        rmask[u] <= '0;
        wmask[u] <= '0;
      end
    end else begin
      if (csr_we) csr[csr_addr] <= csr_wdata;
      // release units that have finished
      for (int u = 0; u < 6; u++)
        if (busy[u] && unit_idle[u]) busy[u] <= 1'b0;
      if (start && !running) begin
        pc      <= '0;
        running <= 1'b1;
        halted  <= 1'b0;
      end else if (can_go) begin
        if (is_hlt) begin
          running <= 1'b0;
          halted  <= 1'b1;
        end else if (is_ctrl) begin
          if (ins.op == OP_ALU && ins.dst[3:0] != 0) r[ins.dst[3:0]] <= alu_res;
          if (ins.op == OP_JMP || (ins.op == OP_BR && br_take)) pc <= PW'(ins.imm);
          else pc <= pc + 1'b1;
        end else begin
          busy[unit]  <= 1'b1;
          rmask[unit] <= rd_m;
          wmask[unit] <= wr_m;
          pc          <= pc + 1'b1;
        end
      end
    end
  end

  // Program invariant: a unit is never dispatched while busy.
  assert property (@(posedge clk) disable iff (!rst_n) |(unit_valid & busy) == 1'b0);

endmodule
