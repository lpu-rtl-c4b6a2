// vxe: vector execution engine - FP16 vector ALU and the token sampler.
//
// Runs one instruction at a time over `len` words of V elements held in the LMU:
//   element-wise  d = a op b      (add for the residual, subtract, multiply for gamma)
//   vector-scalar d = a op s      (add, subtract, multiply, divide; s = LMU scalar register)
//   unary         d = exp(a), max(a,0), a, exp(a - s) (fused softmax numerator)
//   reductions    s = sum(a), max(a) - the V lanes are reduced by a tree and accumulated
//                 across words; the result is written to the LMU scalar register sidx
//   sampling      the words are fed to the sampler; the chosen token index goes to scalar
//                 register sidx and to the token output
// Softmax is therefore MAX -> SUBEXP (or SUBS, EXP) -> SUM -> DIVS, the same exp / sum /
// divide structure the LPU uses. Per word the engine reads a (and b), computes all V lanes in
// one cycle and writes the result; the LMU ports are shared, so every access waits for its grant.
// Layer normalisation needs a reciprocal square root that is not built (see the block notes).
//
// Interface: cmd_valid/cmd_ready start an instruction, done pulses at its end. LMU read: lr_req
// and lr_addr until lr_gnt, data on lr_data the next cycle. LMU write: lw_req until lw_gnt.
// Follows the paper: vector operations for embedding, softmax, residual and normalisation
// scaling on a separate engine that reads and writes the LMU, with a sampler inside. This
// design's own: the function list and encoding, one word per step, the shared-port protocol.
module vxe
  import lpu_pkg::*;
#(
  parameter int unsigned V     = 64,
  parameter int unsigned NSREG = 4,
  parameter int unsigned KMAX  = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic                     cmd_sample,   // 1: sampling, 0: vector function
  input  logic [3:0]               cmd_funct,
  input  logic [LMU_AW-1:0]        cmd_a,
  input  logic [LMU_AW-1:0]        cmd_b,
  input  logic [LMU_AW-1:0]        cmd_d,
  input  logic [11:0]              cmd_len,
  input  logic [$clog2(NSREG)-1:0] cmd_sidx,
  output logic                     done,
  // LMU read (shared port B)
  output logic                     lr_req,
  output logic [LMU_AW-1:0]        lr_addr,
  input  logic                     lr_gnt,
  input  logic [V-1:0][15:0]       lr_data,
  // LMU write
  output logic                     lw_req,
  output logic [LMU_AW-1:0]        lw_addr,
  output logic [V-1:0][15:0]       lw_data,
  input  logic                     lw_gnt,
  // LMU scalars
  input  logic [NSREG-1:0][15:0]   s_regs,
  output logic                     s_we,
  output logic [$clog2(NSREG)-1:0] s_waddr,
  output logic [15:0]              s_wdata,
  // sampling parameters (control registers) and result
  input  logic [4:0]               top_k,
  input  logic [15:0]              top_p,
  input  logic [15:0]              inv_temp,
  input  logic [15:0]              seed,
  output logic                     tok_valid,
  output logic [31:0]              tok
);
  typedef enum logic [3:0] {X_IDLE, X_RA, X_LA, X_RB, X_LB, X_OP, X_WR, X_SMP, X_SWAIT, X_FIN} st_e;
  st_e st;

  logic                     smp_q;
  vxf_e                     f_q;
  logic [LMU_AW-1:0]        a_q, b_q, d_q;
  logic [11:0]              len_q, i;
  logic [$clog2(NSREG)-1:0] sidx_q;
  logic [V-1:0][15:0]       va, vb, vr;
  logic [15:0]              acc, s;

  logic binop, reduce;
  assign binop  = !smp_q && (f_q == VX_ADD || f_q == VX_SUB || f_q == VX_MUL);
  assign reduce = !smp_q && (f_q == VX_SUM || f_q == VX_MAX);
  assign s      = s_regs[sidx_q];

  // lane results
  logic [V-1:0][15:0] lane;
  always_comb begin
    for (int e = 0; e < V; e++) begin
      case (f_q)
        VX_ADD:    lane[e] = fp_add(va[e], vb[e]);
        VX_SUB:    lane[e] = fp_sub(va[e], vb[e]);
        VX_MUL:    lane[e] = fp_mul(va[e], vb[e]);
        VX_ADDS:   lane[e] = fp_add(va[e], s);
        VX_SUBS:   lane[e] = fp_sub(va[e], s);
        VX_MULS:   lane[e] = fp_mul(va[e], s);
        VX_DIVS:   lane[e] = fp_div(va[e], s);
        VX_EXP:    lane[e] = fp_exp(va[e]);
        VX_RELU:   lane[e] = va[e][15] ? 16'd0 : va[e];
        VX_SUBEXP: lane[e] = fp_exp(fp_sub(va[e], s));
        default:   lane[e] = va[e];
      endcase
    end
  end

  // lane reduction tree (sum or max), then fold into the running value
  logic [15:0] red, red_acc;
  always_comb begin
    logic [V-1:0][15:0] t;
    t = va;
    for (int w = V / 2; w >= 1; w = w / 2)
      for (int e = 0; e < w; e++)
        t[e] = (f_q == VX_MAX) ? fp_max(t[2*e], t[2*e+1]) : fp_add(t[2*e], t[2*e+1]);
    red     = t[0];
    red_acc = (i == 0) ? red : ((f_q == VX_MAX) ? fp_max(acc, red) : fp_add(acc, red));
  end

  // sampler
  logic smp_start, smp_valid, smp_ready, smp_finish, smp_done;
  logic [31:0] smp_tok;
  sampler #(.V(V), .KMAX(KMAX)) u_sampler (
    .clk(clk), .rst_n(rst_n),
    .start(smp_start), .in_valid(smp_valid), .in_ready(smp_ready), .in_data(va),
    .in_base(32'(i) * V), .finish(smp_finish),
    .top_k(top_k), .top_p(top_p), .inv_temp(inv_temp), .seed(seed),
    .done(smp_done), .token(smp_tok)
  );

  assign cmd_ready  = (st == X_IDLE);
  assign lr_req     = (st == X_RA) || (st == X_RB);
  assign lr_addr    = (st == X_RB) ? (b_q + LMU_AW'(i)) : (a_q + LMU_AW'(i));
  assign lw_req     = (st == X_WR);
  assign lw_addr    = d_q + LMU_AW'(i);
  assign lw_data    = vr;
  assign smp_start  = (st == X_IDLE) && cmd_valid && cmd_sample;
  assign smp_valid  = (st == X_SMP) && (i != len_q);
  assign smp_finish = (st == X_SMP) && smp_ready && (i == len_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; smp_q <= 1'b0; f_q <= VX_ADD; a_q <= '0; b_q <= '0; d_q <= '0;
      len_q <= '0; i <= '0; sidx_q <= '0; va <= '0; vb <= '0; vr <= '0; acc <= '0;
      done <= 1'b0; s_we <= 1'b0; s_waddr <= '0; s_wdata <= '0; tok_valid <= 1'b0; tok <= '0;
    end else begin
      done      <= 1'b0;
      s_we      <= 1'b0;
      tok_valid <= 1'b0;
      case (st)
        X_IDLE: if (cmd_valid) begin
          smp_q <= cmd_sample; f_q <= vxf_e'(cmd_funct);
          a_q <= cmd_a; b_q <= cmd_b; d_q <= cmd_d; len_q <= cmd_len; sidx_q <= cmd_sidx;
          i <= '0;
          st <= (cmd_len == 0) ? X_FIN : X_RA;
        end
        X_RA: if (lr_gnt) st <= X_LA;
        X_LA: begin
          va <= lr_data;
          st <= binop ? X_RB : X_OP;
        end
        X_RB: if (lr_gnt) st <= X_LB;
        X_LB: begin
          vb <= lr_data;
          st <= X_OP;
        end
        X_OP: begin
          if (smp_q) begin
            st <= X_SMP;
          end else if (reduce) begin
            acc <= red_acc;
            i   <= i + 1'b1;
            st  <= (i + 1 == len_q) ? X_FIN : X_RA;
          end else begin
            vr <= lane;
            st <= X_WR;
          end
        end
        X_WR: if (lw_gnt) begin
          i  <= i + 1'b1;
          st <= (i + 1 == len_q) ? X_FIN : X_RA;
        end
        X_SMP: if (smp_ready) begin
          if (i == len_q) st <= X_SWAIT;
          else begin
            i  <= i + 1'b1;
            st <= (i + 1 == len_q) ? X_SMP : X_RA;
          end
        end
        X_SWAIT: if (smp_done) begin
          s_we      <= 1'b1;
          s_waddr   <= sidx_q;
          s_wdata   <= smp_tok[15:0];
          tok_valid <= 1'b1;
          tok       <= smp_tok;
          done      <= 1'b1;
          st        <= X_IDLE;
        end
        X_FIN: begin
          if (reduce) begin
            s_we    <= 1'b1;
            s_waddr <= sidx_q;
            s_wdata <= acc;
          end
          done <= 1'b1;
          st   <= X_IDLE;
        end
        default: st <= X_IDLE;
      endcase
    end
  end

endmodule
