// oiu: operand issue unit.
//
// Executes one vector-matrix instruction at a time. It pairs each beat of the weight stream
// coming from the SMA (the first operand: one V x L tile per beat) with the matching V-element
// slice of the input vector held in the LMU (the second operand), and issues both to the SXE
// together with the microcode the trees need: first/last beat of an output, destination word
// and element offset in the LMU, ReLU, and whether the results go to the ESL buffer.
//
// Tile order is vertical: for each group g of L output columns (g = 0..N-1) the K input slices
// k = 0..K-1 are visited in turn, so input slice k is read from LMU address src + k and the
// group's results land at element (g*L) mod V of word dst + (g*L) div V.
//
// Input slices are prefetched: LMU reads run ahead of the weight stream into a four-entry
// buffer, so a slice is waiting whenever a weight beat arrives and a beat is issued every cycle
// the stream is valid. Issue pauses while the ESL buffer reports it is nearly full and the
// instruction targets the ESL.
//
// Interface: cmd_valid/cmd_ready start an instruction; done pulses one cycle after its last
// beat is issued. Stream handshake: a beat moves when s_valid && s_ready.
// Follows the paper: operand pairing, prefetch, microcode to the engines. This design's own:
// buffer depth, encoding of the microcode.
module oiu
  import lpu_pkg::*;
#(
  parameter int unsigned L = 32,
  parameter int unsigned V = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [LMU_AW-1:0]     cmd_src,
  input  logic [LMU_AW-1:0]     cmd_dst,
  input  logic [11:0]           cmd_k,      // input slices per output (>= 1)
  input  logic [13:0]           cmd_n,      // column groups (>= 1)
  input  logic                  cmd_relu,
  input  logic                  cmd_esl,
  output logic                  done,
  // LMU read port A
  output logic                  ra_en,
  output logic [LMU_AW-1:0]     ra_addr,
  input  logic [V-1:0][15:0]    ra_data,
  // weight stream from the SMA
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [L-1:0][V-1:0][15:0] s_data,
  // ESL buffer level
  input  logic                  esl_afull,
  // to the SXE
  output logic                  x_valid,
  output logic                  x_first,
  output logic                  x_last,
  output logic [L-1:0][V-1:0][15:0] x_w,
  output logic [V-1:0][15:0]    x_x,
  output logic [LMU_AW-1:0]     x_dst,
  output logic [OFF_W-1:0]      x_off,
  output logic                  x_relu,
  output logic                  x_esl
);
  logic               busy;
  logic [LMU_AW-1:0]  src_q;
  logic [11:0]        k_q;
  logic [13:0]        n_q;
  logic               relu_q, esl_q;
  // prefetch side
  logic [11:0]        rk;
  logic [13:0]        rg;
  logic               rd_more;
  logic               inflight;
  // issue side
  logic [11:0]        ik;
  logic [13:0]        ig;
  logic [LMU_AW-1:0]  gword;
  logic [OFF_W:0]     goff;
  // slice buffer
  localparam int unsigned FD = 4;   // covers the one-cycle register-file latency at full rate
  logic [V-1:0][15:0] fifo [FD];
  logic [1:0]         wp, rp;
  logic [2:0]         cnt;

  logic fire, push, room;
  assign cmd_ready = !busy;
  assign room      = (32'(cnt) + 32'(inflight)) < FD;
  assign ra_en     = busy && rd_more && room;
  assign ra_addr   = src_q + LMU_AW'(rk);
  assign push      = inflight;
  assign fire      = busy && (cnt != 0) && s_valid && !(esl_q && esl_afull);
  assign s_ready   = fire;

  assign x_valid = fire;
  assign x_first = (ik == 0);
  assign x_last  = (ik == k_q - 1);
  assign x_w     = s_data;
  assign x_x     = fifo[rp];
  assign x_dst   = gword;
  assign x_off   = goff[OFF_W-1:0];
  assign x_relu  = relu_q;
  assign x_esl   = esl_q;

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= ra_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; src_q <= '0; k_q <= '0; n_q <= '0; relu_q <= 1'b0; esl_q <= 1'b0;
      rk <= '0; rg <= '0; rd_more <= 1'b0; inflight <= 1'b0;
      ik <= '0; ig <= '0; gword <= '0; goff <= '0;
      wp <= '0; rp <= '0; cnt <= '0; done <= 1'b0;
    end else begin
      done     <= 1'b0;
      inflight <= ra_en;
      if (push) wp <= wp + 1'b1;
      if (fire) rp <= rp + 1'b1;
      cnt <= cnt + 3'(push) - 3'(fire);

      if (cmd_valid && cmd_ready) begin
        busy   <= 1'b1;
        src_q  <= cmd_src;
        k_q    <= cmd_k;
        n_q    <= cmd_n;
        relu_q <= cmd_relu;
        esl_q  <= cmd_esl;
        rk <= '0; rg <= '0; rd_more <= 1'b1;
        ik <= '0; ig <= '0; gword <= cmd_dst; goff <= '0;
      end

      if (ra_en) begin
        if (rk == k_q - 1) begin
          rk <= '0;
          rg <= rg + 1;
          if (rg == n_q - 1) rd_more <= 1'b0;
        end else begin
          rk <= rk + 1;
        end
      end

      if (fire) begin
        if (ik == k_q - 1) begin
          ik <= '0;
          ig <= ig + 1;
          if (goff + (OFF_W+1)'(L) >= (OFF_W+1)'(V)) begin
            goff  <= '0;
            gword <= gword + 1;
          end else begin
            goff <= goff + (OFF_W+1)'(L);
          end
          if (ig == n_q - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          ik <= ik + 1;
        end
      end
    end
  end

endmodule
