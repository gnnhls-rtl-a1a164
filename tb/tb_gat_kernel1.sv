// tb_gat_kernel1: runs GAT kernel 1 (sizes reduced) on random features,
// weights and attention vectors and checks every written z = U h and the
// per-head scores a_src . z and a_dest . z against real arithmetic.
// Equations follow the paper; sizes (DIN 8, K 2, F 4) and the score word
// layout are this test's and this design's choices.
module tb_gat_kernel1;
  import tb_pkg::*;
  localparam int DIN = 8, K = 2, F = 4, N = 10, DO = K * F;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start = 0, done, w_we = 0;
  logic [3:0]        w_sel = 0;
  logic [31:0]       node_begin = 0, node_end = N;
  logic [15:0]       w_row = 0, w_col = 0;
  logic [31:0]       w_data = 0;
  logic              h_rd_en, z_wr_en, s_wr_en;
  logic [31:0]       h_rd_addr, z_wr_addr, s_wr_addr;
  logic [DIN*32-1:0] h_rd_data;
  logic [DO*32-1:0]  z_wr_data;
  logic [2*K*32-1:0] s_wr_data;

  gat_kernel1 #(.DIN(DIN), .K(K), .F(F)) dut (.*);

  logic [DIN*32-1:0] hmem [N];
  real U [DO][DIN];
  real AS [DO];
  real AD [DO];
  real H [N][DIN];
  int  checks = 0, failures = 0, written [N] = '{default: 0};

  always_ff @(posedge clk) if (h_rd_en) h_rd_data <= hmem[h_rd_addr];

  always @(posedge clk) if (rst_n) begin
    if (z_wr_en) begin
      int i;
      real z [DO];
      i = z_wr_addr;
      written[i]++;
      checks++;
      if (!s_wr_en || s_wr_addr != z_wr_addr) begin
        failures++;
        $display("score write missing for vertex %0d", i);
      end
      for (int r = 0; r < DO; r++) begin
        z[r] = 0.0;
        for (int c = 0; c < DIN; c++) z[r] += U[r][c] * H[i][c];
        checks++;
        if (!near(f2r(z_wr_data[r*32 +: 32]), z[r], 1e-3, 1e-4)) begin
          failures++;
          $display("z vertex %0d elem %0d: %f exp %f", i, r, f2r(z_wr_data[r*32 +: 32]), z[r]);
        end
      end
      for (int k = 0; k < K; k++) begin
        real sl, sr;
        sl = 0.0; sr = 0.0;
        for (int f = 0; f < F; f++) begin
          sl += AS[k*F+f] * z[k*F+f];
          sr += AD[k*F+f] * z[k*F+f];
        end
        checks += 2;
        if (!near(f2r(s_wr_data[k*32 +: 32]), sl, 1e-3, 1e-4) ||
            !near(f2r(s_wr_data[(K+k)*32 +: 32]), sr, 1e-3, 1e-4)) begin
          failures++;
          $display("scores vertex %0d head %0d: %f %f exp %f %f", i, k,
                   f2r(s_wr_data[k*32 +: 32]), f2r(s_wr_data[(K+k)*32 +: 32]), sl, sr);
        end
      end
    end
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int sel, input int r, input int c, input real v);
    @(negedge clk);
    w_we = 1; w_sel = 4'(sel); w_row = 16'(r); w_col = 16'(c); w_data = r2f(v);
  endtask

  initial begin
    for (int i = 0; i < N; i++)
      for (int k = 0; k < DIN; k++) begin
        H[i][k] = f2r(r2f(rnd(1.0)));
        hmem[i][k*32 +: 32] = r2f(H[i][k]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < DO; r++) begin
      for (int c = 0; c < DIN; c++) begin
        U[r][c] = f2r(r2f(rnd(1.0)));
        wr(0, r, c, U[r][c]);
      end
      AS[r] = f2r(r2f(rnd(1.0)));
      wr(1, 0, r, AS[r]);
      AD[r] = f2r(r2f(rnd(1.0)));
      wr(2, 0, r, AD[r]);
    end
    @(negedge clk) w_we = 0;
    start = 1;
    @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (written[i] != 1) begin
        failures++;
        $display("vertex %0d written %0d times", i, written[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
