// mac_tree: one low-latency FP16 multiply-accumulate tree of the streamlined execution engine.
//
// Each cycle it takes V weight elements (first operand, streamed from HBM) and V input elements
// (second operand, from the register file) and forms their dot product; successive beats of the
// same output are accumulated, so a dot product of length K*V takes K beats ("first" marks the
// first beat of an output, "last" the beat on which the result is emitted).
//
// As in the LPU, the products are brought to fixed point before they are summed: every lane's
// product exponent is compared against the largest one of the beat and its 22-bit significand
// product is shifted right by the difference (the "preprocessing based on the larger operand"),
// after which the V aligned products are summed by an integer adder tree. The paper's tree is a
// Wallace tree; here the tree is written as plain additions, leaving the carry-save form to
// synthesis. The beat sum is then normalised into a wide float and added to the running partial
// sum, and the result is rounded to FP16 on the last beat.
//
// Pipeline (LAT = 5 cycles from in_valid to out_valid, one beat per cycle, no stalls):
//   1 multiply significands, add exponents     2 max exponent, align, apply sign
//   3 adder-tree levels 1..3                    4 remaining levels
//   5 normalise, accumulate, round
// The stage split, the guard bits (G) and the 32-bit accumulator mantissa are this design's choice.
module mac_tree
  import lpu_pkg::*;
#(
  parameter int unsigned V = 64   // vector elements per tree
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [V-1:0][15:0] w,
  input  logic [V-1:0][15:0] x,
  output logic             out_valid,
  output logic [15:0]      out_y
);
  localparam int unsigned LAT = 5;
  localparam int unsigned G   = 8;                  // guard bits kept below the product LSB
  localparam int unsigned AW  = 22 + G + 1;         // signed aligned product
  localparam int unsigned SW  = AW + $clog2(V);     // signed beat sum
  localparam int unsigned H   = V / 8;              // partial sums after three levels

  // ---------------- stage 1: multiply ----------------
  logic [V-1:0][21:0] s1_p;
  logic [V-1:0][5:0]  s1_e;
  logic [V-1:0]       s1_s;
  logic               s1_v, s1_f, s1_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s1_f <= 1'b0;
      s1_l <= 1'b0;
    end else begin
      s1_v <= in_valid;
      s1_f <= in_first;
      s1_l <= in_last;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < V; i++) begin
      s1_p[i] <= fp_sig(w[i]) * fp_sig(x[i]);
      s1_e[i] <= 6'(w[i][14:10]) + 6'(x[i][14:10]);
      s1_s[i] <= w[i][15] ^ x[i][15];
    end
  end

  // ---------------- stage 2: align to the largest exponent ----------------
  logic [5:0] emax;
  always_comb begin
    emax = '0;
    for (int i = 0; i < V; i++)
      if (s1_p[i] != '0 && s1_e[i] > emax) emax = s1_e[i];
  end

  logic signed [V-1:0][AW-1:0] s2_a;
  logic [5:0] s2_emax;
  logic       s2_v, s2_f, s2_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0;
      s2_f <= 1'b0;
      s2_l <= 1'b0;
    end else begin
      s2_v <= s1_v;
      s2_f <= s1_f;
      s2_l <= s1_l;
    end
  end

  always_ff @(posedge clk) begin
    s2_emax <= emax;
    for (int i = 0; i < V; i++) begin
      logic [AW-1:0] mag;
      mag = {1'b0, s1_p[i], G'(0)} >> (emax - s1_e[i]);
      s2_a[i] <= s1_s[i] ? -mag : mag;
    end
  end

  // ---------------- stages 3 and 4: adder tree ----------------
  logic signed [H-1:0][SW-1:0] s3_ps;
  logic [5:0] s3_emax;
  logic       s3_v, s3_f, s3_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0;
      s3_f <= 1'b0;
      s3_l <= 1'b0;
    end else begin
      s3_v <= s2_v;
      s3_f <= s2_f;
      s3_l <= s2_l;
    end
  end

  always_ff @(posedge clk) begin
    s3_emax <= s2_emax;
    for (int j = 0; j < H; j++) begin
      logic signed [SW-1:0] acc;
      acc = '0;
      for (int k = 0; k < 8; k++) acc = acc + SW'(signed'(s2_a[8*j+k]));
      s3_ps[j] <= acc;
    end
  end

  logic signed [SW-1:0] s4_sum;
  logic [5:0] s4_emax;
  logic       s4_v, s4_f, s4_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s4_v <= 1'b0;
      s4_f <= 1'b0;
      s4_l <= 1'b0;
    end else begin
      s4_v <= s3_v;
      s4_f <= s3_f;
      s4_l <= s3_l;
    end
  end

  always_ff @(posedge clk) begin
    logic signed [SW-1:0] acc;
    acc = '0;
    for (int j = 0; j < H; j++) acc = acc + s3_ps[j];
    s4_sum  <= acc;
    s4_emax <= s3_emax;
  end

  // ---------------- stage 5: normalise, accumulate, round ----------------
  wf_t beat, psum, nxt;
  logic [SW-1:0] bmag;
  always_comb begin
    bmag = s4_sum[SW-1] ? SW'(-s4_sum) : SW'(s4_sum);
    // LSB weight of the aligned products: 2^(emax - 30 - 20 - G)
    beat = wf_norm(s4_sum[SW-1], int'(s4_emax) - 50 - int'(G), 48'(bmag));
    nxt  = s4_f ? beat : wf_add(psum, beat);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum      <= '0;
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      out_valid <= s4_v && s4_l;
      if (s4_v) begin
        psum <= nxt;
        if (s4_l) out_y <= wf_to_fp16(nxt);
      end
    end
  end

endmodule
