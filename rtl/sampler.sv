// sampler: chooses the next output token from the logits, inside the vector execution engine.
//
// Two phases:
//  1. Sort. Logit words (V FP16 elements, with the vocabulary index of element 0) are accepted
//     one at a time and their elements are inserted, one per cycle, into a sorted list of the
//     KMAX largest logits seen so far (value and index; ties keep the lower index).
//  2. Select, after `finish`. For the k = min(top_k, KMAX) best logits l_0 >= l_1 >= ... the
//     weights w_i = exp((l_i - l_0) / T) (given as 1/T) and their running sums c_i are formed one
//     per cycle. Top-p keeps the first n entries with c_(n-1) >= top_p * c_(k-1). A 16-bit
//     pseudo-random fraction u (Galois LFSR, reseeded from `seed` at each start) picks
//     the first i < n with c_i > u * c_(n-1). With top_k = 1 the choice is greedy.
//
// Interface: start clears the list (one cycle); in_valid/in_ready hand over one word, which is
// accepted in one cycle and consumed in the V cycles after it; finish starts selection; done
// pulses with token.
// Follows the paper: sorting of the logits and selection by temperature, top-k and top-p.
// This design's own: the list length KMAX, one insertion per cycle, the weighting arithmetic and
// the random source.
module sampler
  import lpu_pkg::*;
#(
  parameter int unsigned V    = 64,
  parameter int unsigned KMAX = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [V-1:0][15:0] in_data,
  input  logic [31:0]        in_base,
  input  logic               finish,
  input  logic [4:0]         top_k,      // 1..KMAX
  input  logic [15:0]        top_p,      // FP16 in (0, 1]
  input  logic [15:0]        inv_temp,   // FP16 1/T
  input  logic [15:0]        seed,
  output logic               done,
  output logic [31:0]        token
);
  localparam int unsigned KW = $clog2(KMAX + 1);
  typedef enum logic [2:0] {P_IDLE, P_INS, P_W, P_P, P_PICK} ph_e;
  ph_e ph;

  logic [KMAX-1:0][15:0] key;
  logic [KMAX-1:0][31:0] kidx;
  logic [KMAX-1:0][15:0] cum;
  logic [KW-1:0]         cnt, k_eff, n_sel, i;
  logic [V-1:0][15:0]    word;
  logic [31:0]           base;
  logic [$clog2(V)-1:0]  e;
  logic [15:0]           lfsr, tgt;

  // insertion of element `word[e]`
  logic [15:0] ev;
  logic [31:0] ei;
  logic [KW-1:0] pos;
  assign ev = word[e];
  assign ei = base + 32'(e);
  always_comb begin
    pos = cnt;
    for (int j = KMAX - 1; j >= 0; j--)
      if (j < int'(cnt) && fp_gt(ev, key[j])) pos = KW'(j);
  end

  assign in_ready = (ph == P_IDLE);

  // k actually used: top_k limited to the list length and to the logits seen (at least 1)
  logic [KW-1:0] k_lim;
  always_comb begin
    k_lim = (top_k == 0) ? KW'(1) : ((32'(top_k) > KMAX) ? KW'(KMAX) : KW'(top_k));
    if (k_lim > cnt) k_lim = cnt;
    if (k_lim == 0) k_lim = KW'(1);
  end

  logic [15:0] w_i;
  assign w_i = fp_exp(fp_mul(fp_sub(key[i], key[0]), inv_temp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; key <= '0; kidx <= '0; cum <= '0; cnt <= '0; k_eff <= '0; n_sel <= '0;
      i <= '0; word <= '0; base <= '0; e <= '0; lfsr <= 16'hACE1; tgt <= '0;
      done <= 1'b0; token <= '0;
    end else begin
      done <= 1'b0;
      case (ph)
        P_IDLE: begin
          if (start) begin
            cnt  <= '0;
            lfsr <= (seed == 0) ? 16'hACE1 : seed;
          end else if (in_valid) begin
            word <= in_data;
            base <= in_base;
            e    <= '0;
            ph   <= P_INS;
          end else if (finish) begin
            k_eff <= k_lim;
            i  <= '0;
            ph <= P_W;
          end
        end
        P_INS: begin
          if (pos < KW'(KMAX)) begin
            for (int j = KMAX - 1; j > 0; j--)
              if (j > int'(pos)) begin
                key[j]  <= key[j-1];
                kidx[j] <= kidx[j-1];
              end
            key[pos]  <= ev;
            kidx[pos] <= ei;
            if (cnt < KW'(KMAX)) cnt <= cnt + 1'b1;
          end
          e <= e + 1'b1;
          if (32'(e) == V - 1) ph <= P_IDLE;
        end
        P_W: begin
          cum[i] <= (i == 0) ? w_i : fp_add(cum[i-1], w_i);
          if (i == k_eff - 1) begin
            i  <= '0;
            ph <= P_P;
          end else i <= i + 1'b1;
        end
        P_P: begin
          // top-p cut: smallest n with c_(n-1) >= top_p * c_(k-1)
          logic [15:0] t;
          logic [KW-1:0] n;
          t = fp_mul(top_p, cum[k_eff-1]);
          n = k_eff;
          for (int j = KMAX - 1; j >= 0; j--)
            if (j < int'(k_eff) && !fp_gt(t, cum[j])) n = KW'(j + 1);
          n_sel <= n;
          tgt   <= fp_mul(fp_pack(1'b0, -16, {32'd0, lfsr}), cum[n-1]);
          lfsr  <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0);
          ph    <= P_PICK;
        end
        P_PICK: begin
          logic [KW-1:0] pick;
          pick = n_sel - 1'b1;
          for (int j = KMAX - 1; j >= 0; j--)
            if (j < int'(n_sel) && fp_gt(cum[j], tgt)) pick = KW'(j);
          token <= kidx[pick];
          done  <= 1'b1;
          ph    <= P_IDLE;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

endmodule
