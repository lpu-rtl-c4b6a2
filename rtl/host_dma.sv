// host_dma: moves vectors between the host interface and the LMU ("read from host" and
// "write to host" memory instructions).
//
// Read from host: `len` words arriving on the host-in stream are written to consecutive LMU
// words from `lmu`. Write to host: `len` LMU words from `lmu` are read through the shared read
// port and offered on the host-out stream. One word moves at a time; the PCIe core that would
// carry these streams lies outside the design.
// Interface: cmd_valid/cmd_ready, idle high when nothing is pending; streams use valid/ready;
// LMU read data arrives the cycle after lr_gnt.
// Follows the paper: host <-> LMU transfers of the instruction table. This design's own:
// everything else (the paper gives no detail of its host interface).
module host_dma
  import lpu_pkg::*;
#(
  parameter int unsigned V = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic               cmd_wr,      // 1: LMU -> host, 0: host -> LMU
  input  logic [LMU_AW-1:0]  cmd_lmu,
  input  logic [11:0]        cmd_len,
  // host streams
  input  logic               hin_valid,
  output logic               hin_ready,
  input  logic [V-1:0][15:0] hin_data,
  output logic               hout_valid,
  input  logic               hout_ready,
  output logic [V-1:0][15:0] hout_data,
  // LMU
  output logic               lr_req,
  output logic [LMU_AW-1:0]  lr_addr,
  input  logic               lr_gnt,
  input  logic [V-1:0][15:0] lr_data,
  output logic               lw_req,
  output logic [LMU_AW-1:0]  lw_addr,
  output logic [V-1:0][15:0] lw_data,
  input  logic               lw_gnt
);
  typedef enum logic [2:0] {H_IDLE, H_IN, H_RD, H_LD, H_OUT} st_e;
  st_e st;
  logic [LMU_AW-1:0]  a_q;
  logic [11:0]        n_q, i;
  logic [V-1:0][15:0] w_q;

  assign cmd_ready  = (st == H_IDLE);
  assign lw_req     = (st == H_IN) && hin_valid;
  assign lw_addr    = a_q + LMU_AW'(i);
  assign lw_data    = hin_data;
  assign hin_ready  = (st == H_IN) && lw_gnt;
  assign lr_req     = (st == H_RD);
  assign lr_addr    = a_q + LMU_AW'(i);
  assign hout_valid = (st == H_OUT);
  assign hout_data  = w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; a_q <= '0; n_q <= '0; i <= '0; w_q <= '0;
    end else begin
      case (st)
        H_IDLE: if (cmd_valid && cmd_len != 0) begin
          a_q <= cmd_lmu; n_q <= cmd_len; i <= '0;
          st  <= cmd_wr ? H_RD : H_IN;
        end
        H_IN: if (hin_valid && lw_gnt) begin
          i <= i + 1'b1;
          if (i + 1 == n_q) st <= H_IDLE;
        end
        H_RD: if (lr_gnt) st <= H_LD;
        H_LD: begin
          w_q <= lr_data;
          st  <= H_OUT;
        end
        H_OUT: if (hout_ready) begin
          i  <= i + 1'b1;
          st <= (i + 1 == n_q) ? H_IDLE : H_RD;
        end
        default: st <= H_IDLE;
      endcase
    end
  end

endmodule
