// sxe: streamlined execution engine - L MAC trees and the vectorizer.
//
// The L trees work in lockstep on one tile per cycle: tree i receives the V weight elements of
// column i of the tile (the SMA beat is wired straight to the trees, tree i taking bits
// [i*V*16 +: V*16]) and all trees share the same V-element input slice, broadcast from the
// register file. This is the LPU's output-stationary vector-matrix scheme: a tile of V rows by
// L columns is consumed per cycle, walking down the columns, so the L dot products of one column
// group are finished before the next group begins and only one partial sum per tree is needed.
//
// The vectorizer collects the L tree results of a group into one output vector, applies the
// optional ReLU activation, and tags it with its register-file destination (word address and
// element offset) and whether it is to be sent to the peer devices through the ESL buffer.
// The tag travels down a delay line of the MAC-tree latency beside the data.
//
// Timing: out_valid follows the in_valid of a group's last beat by LAT+1 = 6 cycles. No
// back-pressure: the engine accepts a beat every cycle.
//
// Follows the paper: L trees of V elements, vertical tile order, vectorizer, activation support.
// This design's own: ReLU as the only activation (rotary embedding is not built), the tag format.
module sxe
  import lpu_pkg::*;
#(
  parameter int unsigned L = 32,  // MAC trees
  parameter int unsigned V = 64   // elements per tree
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the operand issue unit
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic                  in_last,
  input  logic [L-1:0][V-1:0][15:0] in_w,    // weight tile, column i for tree i
  input  logic [V-1:0][15:0]    in_x,        // shared input slice
  input  logic [LMU_AW-1:0]     in_dst,      // destination word of this group's results
  input  logic [OFF_W-1:0]      in_off,      // element offset inside that word
  input  logic                  in_relu,
  input  logic                  in_esl,
  // vectorizer output
  output logic                  out_valid,
  output logic [L-1:0][15:0]    out_y,
  output logic [LMU_AW-1:0]     out_dst,
  output logic [OFF_W-1:0]      out_off,
  output logic                  out_esl
);
  localparam int unsigned LAT = 5;

  typedef struct packed {
    logic [LMU_AW-1:0] dst;
    logic [OFF_W-1:0]  off;
    logic              relu;
    logic              esl;
  } tag_t;

  logic [L-1:0]       t_valid;
  logic [L-1:0][15:0] t_y;

  for (genvar i = 0; i < L; i++) begin : g_tree
    mac_tree #(.V(V)) u_tree (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_first (in_first),
      .in_last  (in_last),
      .w        (in_w[i]),
      .x        (in_x),
      .out_valid(t_valid[i]),
      .out_y    (t_y[i])
    );
  end

  // tag delay line, aligned with the tree outputs
  tag_t tag_q [LAT];
  always_ff @(posedge clk) begin
    tag_q[0] <= '{dst: in_dst, off: in_off, relu: in_relu, esl: in_esl};
    for (int k = 1; k < LAT; k++) tag_q[k] <= tag_q[k-1];
  end

  // vectorizer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      out_dst   <= '0;
      out_off   <= '0;
      out_esl   <= 1'b0;
    end else begin
      out_valid <= t_valid[0];
      if (t_valid[0]) begin
        for (int i = 0; i < L; i++)
          out_y[i] <= (tag_q[LAT-1].relu && t_y[i][15]) ? 16'd0 : t_y[i];
        out_dst <= tag_q[LAT-1].dst;
        out_off <= tag_q[LAT-1].off;
        out_esl <= tag_q[LAT-1].esl;
      end
    end
  end

endmodule
