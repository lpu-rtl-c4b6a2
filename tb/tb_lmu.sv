// tb_lmu: checks the register file against a reference array: random masked writes, reads on
// both ports in the same cycle (data one cycle after the address), a write and a read of the
// same word in one cycle (old data), and the scalar registers.
module tb_lmu;
  localparam int V = 64, DEPTH = 256;
  logic clk = 0, rst_n = 0;
  logic ra_en = 0, rb_en = 0, w_en = 0, s_we = 0;
  logic [11:0] ra_addr = 0, rb_addr = 0, w_addr = 0;
  logic [V-1:0][15:0] ra_data, rb_data, w_data;
  logic [V-1:0] w_mask;
  logic [1:0] s_waddr = 0;
  logic [15:0] s_wdata = 0;
  logic [3:0][15:0] s_regs;
  int checks = 0, failures = 0;

  lmu #(.V(V), .DEPTH(DEPTH), .NBANK(4), .NSREG(4)) dut (.*);
  always #5 clk = ~clk;

  logic [V-1:0][15:0] ref_m [DEPTH];
  logic [15:0] ref_s [4];

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [V-1:0][15:0] ea, eb, d;
    logic [V-1:0] m;
    int a;
    w_data = '0; w_mask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      for (int e = 0; e < V; e++) d[e] = 16'($urandom);
      ref_m[i] = d;
      w_en <= 1; w_addr <= 12'(i); w_data <= d; w_mask <= '1;
      @(posedge clk);
    end
    w_en <= 0;
    for (int i = 0; i < 4; i++) ref_s[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      int x, y;
      x = $urandom % DEPTH; y = $urandom % DEPTH;
      a = (t % 10 == 0) ? x : ($urandom % DEPTH);
      for (int e = 0; e < V; e++) begin
        d[e] = 16'($urandom);
        m[e] = $urandom % 2;
      end
      ea = ref_m[x]; eb = ref_m[y];       // old contents, before this cycle's write
      ra_en <= 1; ra_addr <= 12'(x); rb_en <= 1; rb_addr <= 12'(y);
      w_en <= 1; w_addr <= 12'(a); w_data <= d; w_mask <= m;
      s_we <= 1; s_waddr <= 2'(t); s_wdata <= 16'(t * 7);
      for (int e = 0; e < V; e++) if (m[e]) ref_m[a][e] = d[e];
      ref_s[t % 4] = 16'(t * 7);
      @(posedge clk);
      ra_en <= 0; rb_en <= 0; w_en <= 0; s_we <= 0;
      #1;
      checks += 2;
      if (ra_data != ea) begin failures++; $display("port A mismatch at %0d", x); end
      if (rb_data != eb) begin failures++; $display("port B mismatch at %0d", y); end
      checks++;
      if (s_regs[t % 4] != ref_s[t % 4]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
