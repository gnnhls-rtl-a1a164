// tb_gnnhls_top: end-to-end test of the whole accelerator at its default
// (paper) feature sizes. One random graph with vertices of degree zero is
// shared by all kernels. The testbench loads every kernel's parameters over
// the shared bus, runs the kernels one after the other (GAT kernel 1 before
// kernel 2, which reads kernel 1's results back from the testbench memory,
// as the two share memory banks on the card) and checks every written vector
// against real-valued references. It counts how often the mechanisms of the
// design happen and fails any that never did: vertices without neighbours,
// work done by each of the two GCN and MoNet units, back-pressure from a
// busy VMM on a neighbour stream, the second softmax pass of GAT, the
// GAT kernel 1 -> kernel 2 hand-over and GatedGCN edge-feature write-back.
module tb_gnnhls_top;
  import tb_pkg::*;
  localparam int D = 128, GK = 8, GF = 16, MI = 64, MK = 2, MO = 64, GD = 32, N = 10;
  localparam int GO = GK * GF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [6:0]  start = 0, done;
  logic [31:0] node_begin = 0, node_end = N;
  logic        prm_we = 0;
  logic [2:0]  prm_kernel = 0;
  logic [3:0]  prm_sel = 0;
  logic [15:0] prm_row = 0, prm_col = 0;
  logic [31:0] prm_data = 0;

  logic            gcn_ptr_rd_en [2], gcn_idx_rd_en [2], gcn_h_rd_en [2], gcn_h_wr_en [2];
  logic [31:0]     gcn_ptr_rd_addr [2], gcn_idx_rd_addr [2], gcn_h_rd_addr [2], gcn_h_wr_addr [2];
  logic [31:0]     gcn_ptr_rd_data [2], gcn_idx_rd_data [2];
  logic [D*32-1:0] gcn_h_rd_data [2], gcn_h_wr_data [2];
  logic            gs_ptr_rd_en, gs_idx_rd_en, gs_hj_rd_en, gs_hi_rd_en, gs_h_wr_en;
  logic [31:0]     gs_ptr_rd_addr, gs_idx_rd_addr, gs_hj_rd_addr, gs_hi_rd_addr, gs_h_wr_addr;
  logic [31:0]     gs_ptr_rd_data, gs_idx_rd_data;
  logic [D*32-1:0] gs_hj_rd_data, gs_hi_rd_data, gs_h_wr_data;
  logic            gin_ptr_rd_en, gin_idx_rd_en, gin_hj_rd_en, gin_hi_rd_en, gin_h_wr_en;
  logic [31:0]     gin_ptr_rd_addr, gin_idx_rd_addr, gin_hj_rd_addr, gin_hi_rd_addr, gin_h_wr_addr;
  logic [31:0]     gin_ptr_rd_data, gin_idx_rd_data;
  logic [D*32-1:0] gin_hj_rd_data, gin_hi_rd_data, gin_h_wr_data;
  logic            gat1_h_rd_en, gat1_z_wr_en, gat1_s_wr_en;
  logic [31:0]     gat1_h_rd_addr, gat1_z_wr_addr, gat1_s_wr_addr;
  logic [D*32-1:0] gat1_h_rd_data;
  logic [GO*32-1:0]   gat1_z_wr_data, gat2_z_rd_data, gat2_h_wr_data;
  logic [2*GK*32-1:0] gat1_s_wr_data, gat2_s_rd_data;
  logic            gat2_ptr_rd_en, gat2_idx_rd_en, gat2_s_rd_en, gat2_z_rd_en, gat2_h_wr_en;
  logic [31:0]     gat2_ptr_rd_addr, gat2_idx_rd_addr, gat2_s_rd_addr, gat2_z_rd_addr, gat2_h_wr_addr;
  logic [31:0]     gat2_ptr_rd_data, gat2_idx_rd_data;
  logic            mn_ptr_rd_en [2], mn_idx_rd_en [2], mn_ps_rd_en [2], mn_h_rd_en [2], mn_h_wr_en [2];
  logic [31:0]     mn_ptr_rd_addr [2], mn_idx_rd_addr [2], mn_ps_rd_addr [2], mn_h_rd_addr [2], mn_h_wr_addr [2];
  logic [31:0]     mn_ptr_rd_data [2], mn_idx_rd_data [2];
  logic [63:0]     mn_ps_rd_data [2];
  logic [MI*32-1:0] mn_h_rd_data [2];
  logic [MO*32-1:0] mn_h_wr_data [2];
  logic            gg_ptr_rd_en, gg_idx_rd_en, gg_hi_rd_en, gg_hj_rd_en, gg_e_rd_en, gg_h_wr_en, gg_e_wr_en;
  logic [31:0]     gg_ptr_rd_addr, gg_idx_rd_addr, gg_hi_rd_addr, gg_hj_rd_addr, gg_e_rd_addr, gg_h_wr_addr, gg_e_wr_addr;
  logic [31:0]     gg_ptr_rd_data, gg_idx_rd_data;
  logic [GD*32-1:0] gg_hi_rd_data, gg_hj_rd_data, gg_e_rd_data, gg_h_wr_data, gg_e_wr_data;

  gnnhls_top dut (.*);

  // ---------------- memories ----------------
  real H [N][D];
  real P [512][2];
  real EF [512][GD];
  logic [D*32-1:0]    hmem [N];
  logic [63:0]        pmem [512];
  logic [GD*32-1:0]   emem [512];
  logic [GO*32-1:0]   zmem [N];
  logic [2*GK*32-1:0] smem [N];

  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      if (gcn_ptr_rd_en[c]) gcn_ptr_rd_data[c] <= g_ptr[gcn_ptr_rd_addr[c]];
      if (gcn_idx_rd_en[c]) gcn_idx_rd_data[c] <= g_col[gcn_idx_rd_addr[c]];
      if (gcn_h_rd_en[c])   gcn_h_rd_data[c]   <= hmem[gcn_h_rd_addr[c]];
      if (mn_ptr_rd_en[c])  mn_ptr_rd_data[c]  <= g_ptr[mn_ptr_rd_addr[c]];
      if (mn_idx_rd_en[c])  mn_idx_rd_data[c]  <= g_col[mn_idx_rd_addr[c]];
      if (mn_ps_rd_en[c])   mn_ps_rd_data[c]   <= pmem[mn_ps_rd_addr[c]];
      if (mn_h_rd_en[c])    mn_h_rd_data[c]    <= hmem[mn_h_rd_addr[c]][MI*32-1:0];
    end
    if (gs_ptr_rd_en)   gs_ptr_rd_data   <= g_ptr[gs_ptr_rd_addr];
    if (gs_idx_rd_en)   gs_idx_rd_data   <= g_col[gs_idx_rd_addr];
    if (gs_hj_rd_en)    gs_hj_rd_data    <= hmem[gs_hj_rd_addr];
    if (gs_hi_rd_en)    gs_hi_rd_data    <= hmem[gs_hi_rd_addr];
    if (gin_ptr_rd_en)  gin_ptr_rd_data  <= g_ptr[gin_ptr_rd_addr];
    if (gin_idx_rd_en)  gin_idx_rd_data  <= g_col[gin_idx_rd_addr];
    if (gin_hj_rd_en)   gin_hj_rd_data   <= hmem[gin_hj_rd_addr];
    if (gin_hi_rd_en)   gin_hi_rd_data   <= hmem[gin_hi_rd_addr];
    if (gat1_h_rd_en)   gat1_h_rd_data   <= hmem[gat1_h_rd_addr];
    if (gat1_z_wr_en)   zmem[gat1_z_wr_addr] <= gat1_z_wr_data;
    if (gat1_s_wr_en)   smem[gat1_s_wr_addr] <= gat1_s_wr_data;
    if (gat2_ptr_rd_en) gat2_ptr_rd_data <= g_ptr[gat2_ptr_rd_addr];
    if (gat2_idx_rd_en) gat2_idx_rd_data <= g_col[gat2_idx_rd_addr];
    if (gat2_s_rd_en)   gat2_s_rd_data   <= smem[gat2_s_rd_addr];
    if (gat2_z_rd_en)   gat2_z_rd_data   <= zmem[gat2_z_rd_addr];
    if (gg_ptr_rd_en)   gg_ptr_rd_data   <= g_ptr[gg_ptr_rd_addr];
    if (gg_idx_rd_en)   gg_idx_rd_data   <= g_col[gg_idx_rd_addr];
    if (gg_hi_rd_en)    gg_hi_rd_data    <= hmem[gg_hi_rd_addr][GD*32-1:0];
    if (gg_hj_rd_en)    gg_hj_rd_data    <= hmem[gg_hj_rd_addr][GD*32-1:0];
    if (gg_e_rd_en)     gg_e_rd_data     <= emem[gg_e_rd_addr];
  end

  // ---------------- parameters (real copies) ----------------
  real Ugcn [D][D];
  real Vgs [D][D];
  real Wgs [D][D];
  real Ugin [D][D];
  real Vgin [D][D];
  real EPS;
  real Ugat [GO][D];
  real AS [GO];
  real AD [GO];
  real Umn [MO][MK*MI];
  real VP [2][2];
  real VB [2];
  real MU [MK][2];
  real IS [MK][2];
  real Wgg [5][GD][GD];

  int checks = 0, failures = 0;
  int n_written [7] = '{default: 0};
  int ev_empty = 0, ev_cu1 = 0, ev_cu2 = 0, ev_stall = 0, ev_pass2 = 0, ev_handover = 0, ev_ewb = 0;

  function automatic int deg(input int i);
    return int'(g_ptr[i+1]) - int'(g_ptr[i]);
  endfunction

  task automatic chk(input string what, input int i, input int r, input logic [31:0] got, input real e);
    checks++;
    if (!near(f2r(got), e, 2e-3, 2e-3)) begin
      failures++;
      $display("%s vertex %0d elem %0d: %f exp %f", what, i, r, f2r(got), e);
    end
  endtask

  // ---------------- references and monitors ----------------
  always @(posedge clk) if (rst_n) begin
    // GCN, both units
    for (int c = 0; c < 2; c++) if (gcn_h_wr_en[c]) begin
      int i;
      real a [D];
      i = gcn_h_wr_addr[c];
      n_written[0]++;
      if (c == 1) ev_cu1++;
      if (deg(i) == 0) ev_empty++;
      for (int k = 0; k < D; k++) begin
        a[k] = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) a[k] += H[g_col[e]][k];
      end
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) s += Ugcn[r][k] * a[k];
        chk("gcn", i, r, gcn_h_wr_data[c][r*32 +: 32], relu_r(s));
      end
    end
    // GraphSage
    if (gs_h_wr_en) begin
      int i;
      real m [D];
      i = gs_h_wr_addr;
      n_written[1]++;
      for (int k = 0; k < D; k++) begin
        m[k] = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) m[k] += H[g_col[e]][k];
        if (deg(i) != 0) m[k] = m[k] / deg(i);
      end
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) s += Vgs[r][k] * H[i][k] + Wgs[r][k] * m[k];
        chk("graphsage", i, r, gs_h_wr_data[r*32 +: 32], relu_r(s));
      end
    end
    // GIN
    if (gin_h_wr_en) begin
      int i;
      real x [D];
      real t [D];
      i = gin_h_wr_addr;
      n_written[2]++;
      for (int k = 0; k < D; k++) begin
        x[k] = (1.0 + EPS) * H[i][k];
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) x[k] += H[g_col[e]][k];
      end
      for (int r = 0; r < D; r++) begin
        t[r] = 0.0;
        for (int k = 0; k < D; k++) t[r] += Vgin[r][k] * x[k];
        t[r] = relu_r(t[r]);
      end
      for (int r = 0; r < D; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < D; k++) s += Ugin[r][k] * t[k];
        chk("gin", i, r, gin_h_wr_data[r*32 +: 32], relu_r(s));
      end
    end
    // GAT kernel 1
    if (gat1_z_wr_en) begin
      int i;
      real z [GO];
      i = gat1_z_wr_addr;
      n_written[3]++;
      for (int r = 0; r < GO; r++) begin
        z[r] = 0.0;
        for (int k = 0; k < D; k++) z[r] += Ugat[r][k] * H[i][k];
        chk("gat1 z", i, r, gat1_z_wr_data[r*32 +: 32], z[r]);
      end
      for (int h = 0; h < GK; h++) begin
        real sl, sr;
        sl = 0.0; sr = 0.0;
        for (int f = 0; f < GF; f++) begin
          sl += AS[h*GF+f] * z[h*GF+f];
          sr += AD[h*GF+f] * z[h*GF+f];
        end
        chk("gat1 el", i, h, gat1_s_wr_data[h*32 +: 32], sl);
        chk("gat1 er", i, h, gat1_s_wr_data[(GK+h)*32 +: 32], sr);
      end
    end
    // GAT kernel 2, from what kernel 1 left in memory
    if (gat2_z_rd_en) ev_handover++;
    if (gat2_h_wr_en) begin
      int i;
      i = gat2_h_wr_addr;
      n_written[4]++;
      for (int h = 0; h < GK; h++) begin
        real den, a, el;
        real acc [GF];
        el = f2r(smem[i][h*32 +: 32]);
        den = 0.0;
        for (int f = 0; f < GF; f++) acc[f] = 0.0;
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++)
          den += $exp(lrelu_r(el + f2r(smem[g_col[e]][(GK+h)*32 +: 32])));
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
          a = $exp(lrelu_r(el + f2r(smem[g_col[e]][(GK+h)*32 +: 32]))) / den;
          for (int f = 0; f < GF; f++) acc[f] += a * f2r(zmem[g_col[e]][(h*GF+f)*32 +: 32]);
        end
        for (int f = 0; f < GF; f++) chk("gat2", i, h*GF+f, gat2_h_wr_data[(h*GF+f)*32 +: 32], elu_r(acc[f]));
      end
    end
    // MoNet, both units
    for (int c = 0; c < 2; c++) if (mn_h_wr_en[c]) begin
      int i;
      real g [MK][MI];
      i = mn_h_wr_addr[c];
      n_written[5]++;
      if (c == 1) ev_cu2++;
      for (int k = 0; k < MK; k++) for (int x = 0; x < MI; x++) g[k][x] = 0.0;
      for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
        real u [2];
        for (int d = 0; d < 2; d++) u[d] = $tanh(VP[d][0] * P[e][0] + VP[d][1] * P[e][1] + VB[d]);
        for (int k = 0; k < MK; k++) begin
          real q;
          q = 0.0;
          for (int d = 0; d < 2; d++) q += (u[d] - MU[k][d]) * (u[d] - MU[k][d]) * IS[k][d];
          for (int x = 0; x < MI; x++) g[k][x] += $exp(-0.5 * q) * H[g_col[e]][x];
        end
      end
      for (int r = 0; r < MO; r++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < MK; k++) for (int x = 0; x < MI; x++) s += Umn[r][k*MI+x] * g[k][x];
        chk("monet", i, r, mn_h_wr_data[c][r*32 +: 32], relu_r(s));
      end
    end
    // GatedGCN
    if (gg_e_wr_en) ev_ewb++;
    if (gg_h_wr_en) begin
      int i;
      i = gg_h_wr_addr;
      n_written[6]++;
      for (int r = 0; r < GD; r++) begin
        real num, den, s, ah;
        num = 0.0; den = 0.0; ah = 0.0;
        for (int k = 0; k < GD; k++) ah += Wgg[0][r][k] * H[i][k];
        for (int e = g_ptr[i]; e < g_ptr[i+1]; e++) begin
          real en, bh;
          en = 0.0; bh = 0.0;
          for (int k = 0; k < GD; k++) begin
            en += Wgg[4][r][k] * H[i][k] + Wgg[3][r][k] * H[g_col[e]][k] + Wgg[2][r][k] * EF[e][k];
            bh += Wgg[1][r][k] * H[g_col[e]][k];
          end
          s = sigmoid_r(en);
          num += bh * s;
          den += s;
        end
        chk("gatedgcn", i, r, gg_h_wr_data[r*32 +: 32], relu_r(ah + num / (den + 1e-6)));
      end
    end
    // mechanisms
    if (dut.u_gcn.g_cu[0].u_cu.e_valid && !dut.u_gcn.g_cu[0].u_cu.e_ready) ev_stall++;
    if (dut.u_gat2.state == dut.u_gat2.S_C && dut.u_gat2.pass2) ev_pass2++;
  end

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prm(input int kern, input int sel, input int r, input int c, input real v);
    @(negedge clk);
    prm_we = 1; prm_kernel = 3'(kern); prm_sel = 4'(sel); prm_row = 16'(r); prm_col = 16'(c);
    prm_data = r2f(v);
  endtask

  function automatic real q(input real v);
    return f2r(r2f(v));
  endfunction

  task automatic run(input int k);
    @(negedge clk) start = 7'(1 << k);
    @(negedge clk) start = 0;
    while (!done[k]) @(posedge clk);
    checks++;
    if (n_written[k] != N) begin
      failures++;
      $display("kernel %0d wrote %0d vertices, expected %0d", k, n_written[k], N);
    end
  endtask

  initial begin
    real sc;
    sc = 1.0 / $sqrt(real'(D));
    make_graph(N, 4);
    for (int i = 0; i < N; i++)
      for (int k = 0; k < D; k++) begin
        H[i][k] = q(rnd(1.0));
        hmem[i][k*32 +: 32] = r2f(H[i][k]);
      end
    for (int e = 0; e < int'(g_ptr[N]); e++) begin
      for (int d = 0; d < 2; d++) begin
        P[e][d] = q(0.8 + rnd(0.6));
        pmem[e][d*32 +: 32] = r2f(P[e][d]);
      end
      for (int k = 0; k < GD; k++) begin
        EF[e][k] = q(rnd(1.0));
        emem[e][k*32 +: 32] = r2f(EF[e][k]);
      end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // parameters over the shared bus
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        Ugcn[r][c] = q(rnd(sc)); prm(0, 0, r, c, Ugcn[r][c]);
        Vgs[r][c]  = q(rnd(sc)); prm(1, 0, r, c, Vgs[r][c]);
        Wgs[r][c]  = q(rnd(sc)); prm(1, 1, r, c, Wgs[r][c]);
        Ugin[r][c] = q(rnd(sc)); prm(2, 0, r, c, Ugin[r][c]);
        Vgin[r][c] = q(rnd(sc)); prm(2, 1, r, c, Vgin[r][c]);
      end
    EPS = q(0.1); prm(2, 2, 0, 0, EPS);
    for (int r = 0; r < GO; r++) begin
      for (int c = 0; c < D; c++) begin
        Ugat[r][c] = q(rnd(sc)); prm(3, 0, r, c, Ugat[r][c]);
      end
      AS[r] = q(rnd(0.5)); prm(3, 1, 0, r, AS[r]);
      AD[r] = q(rnd(0.5)); prm(3, 2, 0, r, AD[r]);
    end
    for (int r = 0; r < MO; r++)
      for (int c = 0; c < MK * MI; c++) begin
        Umn[r][c] = q(rnd(sc)); prm(5, 0, r, c, Umn[r][c]);
      end
    for (int d = 0; d < 2; d++) begin
      for (int c = 0; c < 2; c++) begin
        VP[d][c] = q(rnd(1.0)); prm(5, 1, d, c, VP[d][c]);
      end
      VB[d] = q(rnd(0.5)); prm(5, 2, 0, d, VB[d]);
    end
    for (int k = 0; k < MK; k++)
      for (int d = 0; d < 2; d++) begin
        MU[k][d] = q(rnd(1.0)); prm(5, 3, k, d, MU[k][d]);
        IS[k][d] = q(1.0 + rnd(0.5)); prm(5, 4, k, d, IS[k][d]);
      end
    for (int m = 0; m < 5; m++)
      for (int r = 0; r < GD; r++)
        for (int c = 0; c < GD; c++) begin
          Wgg[m][r][c] = q(rnd(1.0 / $sqrt(real'(GD)))); prm(6, m, r, c, Wgg[m][r][c]);
        end
    @(negedge clk) prm_we = 0;
    // one layer of each model
    for (int k = 0; k < 7; k++) run(k);
    // every mechanism must have happened
    begin
      int ev [7];
      string nm [7];
      ev = '{ev_empty, ev_cu1, ev_cu2, ev_stall, ev_pass2, ev_handover, ev_ewb};
      nm = '{"empty vertex", "GCN unit 1 writes", "MoNet unit 1 writes", "VMM back-pressure",
             "GAT second pass", "GAT kernel hand-over", "GatedGCN edge write-back"};
      for (int k = 0; k < 7; k++) begin
        checks++;
        $display("%s: %0d", nm[k], ev[k]);
        if (ev[k] == 0) begin
          failures++;
          $display("mechanism never exercised: %s", nm[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
