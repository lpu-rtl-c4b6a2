// hbm_model: behavioural model of the HBM channels seen by the SMA (not synthesizable logic;
// it stands in for the HBM3 stacks and their controllers, which lie outside the design).
// NCH independent channels of DEPTH 512-bit words. Reads return after LAT cycles in order;
// when STALL is set a channel refuses a request now and then. Writes apply the byte strobes
// at once. The testbench fills and inspects `mem` directly.
module hbm_model #(
  parameter int unsigned NCH   = 64,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned LAT   = 6,
  parameter bit          STALL = 1'b0,
  parameter int unsigned AW    = 25,
  parameter int unsigned CW    = 512
) (
  input  logic                   clk,
  input  logic [NCH-1:0]         rq_valid,
  input  logic [AW-1:0]          rq_addr,
  output logic [NCH-1:0]         rq_ready,
  output logic [NCH-1:0]         rs_valid,
  output logic [NCH-1:0][CW-1:0] rs_data,
  input  logic [NCH-1:0]         wq_valid,
  input  logic [NCH-1:0][AW-1:0] wq_addr,
  input  logic [NCH-1:0][CW-1:0] wq_data,
  input  logic [NCH-1:0][CW/8-1:0] wq_strb,
  output logic [NCH-1:0]         wq_ready
);
  logic [CW-1:0] mem [NCH][DEPTH];
  logic [NCH-1:0]          pv [LAT];
  logic [AW-1:0]           pa [LAT];
  int unsigned reads = 0, writes = 0;

  initial begin
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < DEPTH; a++) mem[c][a] = '0;
    for (int k = 0; k < LAT; k++) begin
      pv[k] = '0;
      pa[k] = '0;
    end
    rq_ready = '1;
  end

  assign wq_ready = '1;

  always_ff @(posedge clk) begin
    pv[0] <= rq_valid & rq_ready;
    pa[0] <= rq_addr;
    for (int k = 1; k < LAT; k++) begin
      pv[k] <= pv[k-1];
      pa[k] <= pa[k-1];
    end
    if (STALL) rq_ready <= NCH'({$urandom, $urandom}) | NCH'({$urandom, $urandom});
    if (|(rq_valid & rq_ready)) reads++;
    for (int c = 0; c < NCH; c++) begin
      if (wq_valid[c]) begin
        writes++;
        for (int b = 0; b < CW / 8; b++)
          if (wq_strb[c][b]) mem[c][wq_addr[c] % DEPTH][8*b +: 8] <= wq_data[c][8*b +: 8];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      rs_valid[c] = pv[LAT-1][c];
      rs_data[c]  = mem[c][pa[LAT-1] % DEPTH];
    end
  end

endmodule
