// lmu: local memory unit - the LPU's multi-bank, multi-port register file.
//
// Vector part: DEPTH words of V FP16 elements, split into NBANK banks interleaved on the low
// address bits. Two read ports and one write port:
//   * read port A serves the operand issue unit (the input slice for the MAC trees),
//   * read port B serves the vector engine, the sampler, the SMA (Key/Value writes), the ESL
//     transmitter and the host interface, through an arbiter outside this module,
//   * the write port takes results from the write-back arbiter; a per-element enable lets the
//     SXE write L-element groups into a V-element word.
// Reads are synchronous: data appears the cycle after the address. A read of a word written in
// the same cycle returns the old contents.
//
// Scalar part: NSREG FP16/integer registers kept apart from the vectors ("scalar-vector
// segregation"), written by the vector engine and sampler, all readable at once.
//
// Follows the paper: multi-bank, multi-port, separate scalar and vector storage, simultaneous
// read to the OIU and write from write-back. This design's own: sizes (4096 x 64 elements =
// 512 KB, 4 banks, 4 scalars), port count and synchronous read timing.
module lmu
  import lpu_pkg::*;
#(
  parameter int unsigned V     = 64,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NBANK = 4,
  parameter int unsigned NSREG = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // read port A (OIU)
  input  logic                    ra_en,
  input  logic [LMU_AW-1:0]       ra_addr,
  output logic [V-1:0][15:0]      ra_data,
  // read port B (shared)
  input  logic                    rb_en,
  input  logic [LMU_AW-1:0]       rb_addr,
  output logic [V-1:0][15:0]      rb_data,
  // write port
  input  logic                    w_en,
  input  logic [LMU_AW-1:0]       w_addr,
  input  logic [V-1:0]            w_mask,
  input  logic [V-1:0][15:0]      w_data,
  // scalar registers
  input  logic                    s_we,
  input  logic [$clog2(NSREG)-1:0] s_waddr,
  input  logic [15:0]             s_wdata,
  output logic [NSREG-1:0][15:0]  s_regs
);
  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned BD = DEPTH / NBANK;
  localparam int unsigned IW = $clog2(BD);

  logic [V-1:0][15:0] ra_bank [NBANK];
  logic [V-1:0][15:0] rb_bank [NBANK];
  logic [BW-1:0] ra_sel, rb_sel;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [V-1:0][15:0] mem [BD];
    always_ff @(posedge clk) begin
      if (w_en && w_addr[BW-1:0] == BW'(b))
        for (int e = 0; e < V; e++)
          if (w_mask[e]) mem[w_addr[BW +: IW]][e] <= w_data[e];
      if (ra_en && ra_addr[BW-1:0] == BW'(b)) ra_bank[b] <= mem[ra_addr[BW +: IW]];
      if (rb_en && rb_addr[BW-1:0] == BW'(b)) rb_bank[b] <= mem[rb_addr[BW +: IW]];
    end
  end

  always_ff @(posedge clk) begin
    if (ra_en) ra_sel <= ra_addr[BW-1:0];
    if (rb_en) rb_sel <= rb_addr[BW-1:0];
  end

  assign ra_data = ra_bank[ra_sel];
  assign rb_data = rb_bank[rb_sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_regs <= '0;
    else if (s_we) s_regs[s_waddr] <= s_wdata;
  end

endmodule
