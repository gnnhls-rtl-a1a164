// tb_gcn_workloads: runs the GCN kernel at its default size (d = 128, two
// units) on small graphs shaped like the four evaluation graphs: MOLTOX21
// (degree up to 6, average about 2), MOLHIV (up to 10, average about 2),
// ARXIV (power-law: mostly low degree plus one hub) and PROTEINS (average
// degree near 600). Each shape is a segment of 8 target vertices of one
// random CSR graph; the kernel is started once per segment. The degree
// limits and averages come from the paper's dataset table; the full graphs
// (up to a million vertices and 79 million edges) are far beyond simulation,
// so each is reduced to 8 vertices, and the ARXIV hub has 300 neighbours
// instead of 13155. Every written vertex is compared with ReLU(U * sum h_j)
// in real arithmetic; each vertex must be written once, by the unit owning
// its half of the segment. The run time of each segment is checked against
// a loose bound of (3 per edge + d + 6 per vertex) cycles, which catches a
// stalled or repeated walk; the exact rate is this design's, not the paper's.
module tb_gcn_workloads;
  import tb_pkg::*;
  localparam int D = 128, SEG = 8, NSEG = 4, N = SEG * NSEG, MAXE = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start = 0, done, w_we = 0;
  logic [31:0]     node_begin = 0, node_end = 0;
  logic [15:0]     w_row = 0, w_col = 0;
  logic [31:0]     w_data = 0;
  logic            ptr_rd_en [2], idx_rd_en [2], h_rd_en [2], h_wr_en [2];
  logic [31:0]     ptr_rd_addr [2], idx_rd_addr [2], h_rd_addr [2], h_wr_addr [2];
  logic [31:0]     ptr_rd_data [2], idx_rd_data [2];
  logic [D*32-1:0] h_rd_data [2], h_wr_data [2];

  gcn_kernel dut (.*);

  int unsigned     ptr [N+1];
  int unsigned     col [MAXE];
  logic [D*32-1:0] hmem [N];
  real U [D][D];
  real H [N][D];
  int  checks = 0, failures = 0, written [N] = '{default: 0};
  int  seg_lo = 0, seg_hi = 0;

  for (genvar c = 0; c < 2; c++) begin : g_mem
    always_ff @(posedge clk) begin
      if (ptr_rd_en[c]) ptr_rd_data[c] <= ptr[ptr_rd_addr[c]];
      if (idx_rd_en[c]) idx_rd_data[c] <= col[idx_rd_addr[c]];
      if (h_rd_en[c])   h_rd_data[c]   <= hmem[h_rd_addr[c]];
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (h_wr_en[c]) begin
      int i;
      real a [D];
      i = h_wr_addr[c];
      written[i]++;
      checks++;
      if (i < seg_lo || i >= seg_hi || ((c == 0) != (i < seg_lo + SEG / 2))) begin
        failures++;
        $display("vertex %0d written by unit %0d", i, c);
      end
      for (int k = 0; k < D; k++) a[k] = 0.0;
      for (int e = ptr[i]; e < ptr[i+1]; e++)
        for (int k = 0; k < D; k++) a[k] += H[col[e]][k];
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) s += U[r][k] * a[k];
        checks++;
        if (!near(f2r(h_wr_data[c][r*32 +: 32]), relu_r(s), 1e-3, 1e-4 * (ptr[i+1] - ptr[i] + 1))) begin
          failures++;
          if (failures < 10)
            $display("vertex %0d elem %0d: %f exp %f", i, r, f2r(h_wr_data[c][r*32 +: 32]), relu_r(s));
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // degree of vertex v of segment s (0 MT, 1 MH, 2 AX, 3 PT)
  function automatic int unsigned degree(input int s, input int v);
    case (s)
      0: return (v == 0) ? 6 : 1 + $urandom_range(2);
      1: return (v == 0) ? 10 : 1 + $urandom_range(2);
      2: return (v == 3) ? 300 : 1 + $urandom_range(12);
      default: return 520 + $urandom_range(150);
    endcase
  endfunction

  initial begin
    static string names [NSEG] = '{"MOLTOX21-like", "MOLHIV-like", "ARXIV-like", "PROTEINS-like"};
    ptr[0] = 0;
    for (int s = 0; s < NSEG; s++)
      for (int v = 0; v < SEG; v++) begin
        int i;
        i = s * SEG + v;
        ptr[i+1] = ptr[i] + degree(s, v);
        for (int e = ptr[i]; e < ptr[i+1]; e++) col[e] = $urandom_range(N - 1);
      end
    if (ptr[N] > MAXE) $fatal(1, "graph too large");
    for (int i = 0; i < N; i++)
      for (int k = 0; k < D; k++) begin
        H[i][k] = f2r(r2f(rnd(1.0)));
        hmem[i][k*32 +: 32] = r2f(H[i][k]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < D; r++)
      for (int k = 0; k < D; k++) begin
        @(negedge clk);
        U[r][k] = f2r(r2f(rnd(0.2)));
        w_we = 1; w_row = 16'(r); w_col = 16'(k); w_data = r2f(U[r][k]);
      end
    @(negedge clk) w_we = 0;
    for (int s = 0; s < NSEG; s++) begin
      int cycles, bound;
      seg_lo = s * SEG; seg_hi = seg_lo + SEG;
      bound = 50;
      for (int i = seg_lo; i < seg_hi; i++) bound += 3 * (ptr[i+1] - ptr[i]) + D + 6;
      node_begin = seg_lo; node_end = seg_hi;
      start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin
        @(posedge clk);
        cycles++;
      end
      checks++;
      if (cycles > bound) begin
        failures++;
        $display("%s: %0d cycles, bound %0d", names[s], cycles, bound);
      end
      $display("%s: %0d edges, %0d cycles", names[s], ptr[seg_hi] - ptr[seg_lo], cycles);
      @(negedge clk);
    end
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
