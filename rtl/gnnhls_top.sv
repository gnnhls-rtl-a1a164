// gnnhls_top: the six GNN layer kernels of the accelerator side by side:
// GCN (2 compute units), GraphSage, GIN, GAT (two kernels sharing memory
// through the host side), MoNet (2 compute units) and GatedGCN.
//
// On the FPGA card each kernel is its own accelerator, attached to its own
// off-chip memory banks and started by the host. This top keeps that shape:
// every kernel has its own start and done bit (index 0 GCN, 1 GraphSage,
// 2 GIN, 3 GAT kernel 1, 4 GAT kernel 2, 5 MoNet, 6 GatedGCN) and its own
// memory ports, brought out with a prefix per kernel; the off-chip memories
// themselves are outside. All kernels share the vertex range [node_begin,
// node_end) and one parameter-load bus: a write with prm_kernel = k goes to
// kernel k, where prm_sel picks the matrix or vector (see each kernel).
// Connecting gat1's z and score writes to gat2's reads is the memory's job:
// the paper links both GAT kernels to the same memory banks.
//
// All memory read ports return data one cycle after *_rd_en and never stall;
// write ports always accept. Feature sizes default to the paper's
// configuration: 128 for GCN, GraphSage and GIN; (128 in, 8 heads, 16 out)
// for GAT; (64 in, 2 kernels, 64 out) for MoNet; 32 for GatedGCN.
module gnnhls_top
  import gnn_pkg::*;
#(
  parameter int unsigned D_GCN   = 128,
  parameter int unsigned D_GS    = 128,
  parameter int unsigned D_GIN   = 128,
  parameter int unsigned GAT_DIN = 128,
  parameter int unsigned GAT_K   = 8,
  parameter int unsigned GAT_F   = 16,
  parameter int unsigned MN_DIN  = 64,
  parameter int unsigned MN_K    = 2,
  parameter int unsigned MN_DOUT = 64,
  parameter int unsigned GG_D    = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [6:0]  start,
  output logic [6:0]  done,
  input  logic [31:0] node_begin,
  input  logic [31:0] node_end,
  // parameter load bus
  input  logic        prm_we,
  input  logic [2:0]  prm_kernel,
  input  logic [3:0]  prm_sel,
  input  logic [15:0] prm_row,
  input  logic [15:0] prm_col,
  input  fp32_t       prm_data,
  // GCN, two compute units
  output logic                gcn_ptr_rd_en   [2],
  output logic [31:0]         gcn_ptr_rd_addr [2],
  input  logic [31:0]         gcn_ptr_rd_data [2],
  output logic                gcn_idx_rd_en   [2],
  output logic [31:0]         gcn_idx_rd_addr [2],
  input  logic [31:0]         gcn_idx_rd_data [2],
  output logic                gcn_h_rd_en     [2],
  output logic [31:0]         gcn_h_rd_addr   [2],
  input  logic [D_GCN*32-1:0] gcn_h_rd_data   [2],
  output logic                gcn_h_wr_en     [2],
  output logic [31:0]         gcn_h_wr_addr   [2],
  output logic [D_GCN*32-1:0] gcn_h_wr_data   [2],
  // GraphSage
  output logic                gs_ptr_rd_en,
  output logic [31:0]         gs_ptr_rd_addr,
  input  logic [31:0]         gs_ptr_rd_data,
  output logic                gs_idx_rd_en,
  output logic [31:0]         gs_idx_rd_addr,
  input  logic [31:0]         gs_idx_rd_data,
  output logic                gs_hj_rd_en,
  output logic [31:0]         gs_hj_rd_addr,
  input  logic [D_GS*32-1:0]  gs_hj_rd_data,
  output logic                gs_hi_rd_en,
  output logic [31:0]         gs_hi_rd_addr,
  input  logic [D_GS*32-1:0]  gs_hi_rd_data,
  output logic                gs_h_wr_en,
  output logic [31:0]         gs_h_wr_addr,
  output logic [D_GS*32-1:0]  gs_h_wr_data,
  // GIN
  output logic                gin_ptr_rd_en,
  output logic [31:0]         gin_ptr_rd_addr,
  input  logic [31:0]         gin_ptr_rd_data,
  output logic                gin_idx_rd_en,
  output logic [31:0]         gin_idx_rd_addr,
  input  logic [31:0]         gin_idx_rd_data,
  output logic                gin_hj_rd_en,
  output logic [31:0]         gin_hj_rd_addr,
  input  logic [D_GIN*32-1:0] gin_hj_rd_data,
  output logic                gin_hi_rd_en,
  output logic [31:0]         gin_hi_rd_addr,
  input  logic [D_GIN*32-1:0] gin_hi_rd_data,
  output logic                gin_h_wr_en,
  output logic [31:0]         gin_h_wr_addr,
  output logic [D_GIN*32-1:0] gin_h_wr_data,
  // GAT kernel 1
  output logic                        gat1_h_rd_en,
  output logic [31:0]                 gat1_h_rd_addr,
  input  logic [GAT_DIN*32-1:0]       gat1_h_rd_data,
  output logic                        gat1_z_wr_en,
  output logic [31:0]                 gat1_z_wr_addr,
  output logic [GAT_K*GAT_F*32-1:0]   gat1_z_wr_data,
  output logic                        gat1_s_wr_en,
  output logic [31:0]                 gat1_s_wr_addr,
  output logic [2*GAT_K*32-1:0]       gat1_s_wr_data,
  // GAT kernel 2
  output logic                        gat2_ptr_rd_en,
  output logic [31:0]                 gat2_ptr_rd_addr,
  input  logic [31:0]                 gat2_ptr_rd_data,
  output logic                        gat2_idx_rd_en,
  output logic [31:0]                 gat2_idx_rd_addr,
  input  logic [31:0]                 gat2_idx_rd_data,
  output logic                        gat2_s_rd_en,
  output logic [31:0]                 gat2_s_rd_addr,
  input  logic [2*GAT_K*32-1:0]       gat2_s_rd_data,
  output logic                        gat2_z_rd_en,
  output logic [31:0]                 gat2_z_rd_addr,
  input  logic [GAT_K*GAT_F*32-1:0]   gat2_z_rd_data,
  output logic                        gat2_h_wr_en,
  output logic [31:0]                 gat2_h_wr_addr,
  output logic [GAT_K*GAT_F*32-1:0]   gat2_h_wr_data,
  // MoNet, two compute units
  output logic                  mn_ptr_rd_en   [2],
  output logic [31:0]           mn_ptr_rd_addr [2],
  input  logic [31:0]           mn_ptr_rd_data [2],
  output logic                  mn_idx_rd_en   [2],
  output logic [31:0]           mn_idx_rd_addr [2],
  input  logic [31:0]           mn_idx_rd_data [2],
  output logic                  mn_ps_rd_en    [2],
  output logic [31:0]           mn_ps_rd_addr  [2],
  input  logic [63:0]           mn_ps_rd_data  [2],
  output logic                  mn_h_rd_en     [2],
  output logic [31:0]           mn_h_rd_addr   [2],
  input  logic [MN_DIN*32-1:0]  mn_h_rd_data   [2],
  output logic                  mn_h_wr_en     [2],
  output logic [31:0]           mn_h_wr_addr   [2],
  output logic [MN_DOUT*32-1:0] mn_h_wr_data   [2],
  // GatedGCN
  output logic                gg_ptr_rd_en,
  output logic [31:0]         gg_ptr_rd_addr,
  input  logic [31:0]         gg_ptr_rd_data,
  output logic                gg_idx_rd_en,
  output logic [31:0]         gg_idx_rd_addr,
  input  logic [31:0]         gg_idx_rd_data,
  output logic                gg_hi_rd_en,
  output logic [31:0]         gg_hi_rd_addr,
  input  logic [GG_D*32-1:0]  gg_hi_rd_data,
  output logic                gg_hj_rd_en,
  output logic [31:0]         gg_hj_rd_addr,
  input  logic [GG_D*32-1:0]  gg_hj_rd_data,
  output logic                gg_e_rd_en,
  output logic [31:0]         gg_e_rd_addr,
  input  logic [GG_D*32-1:0]  gg_e_rd_data,
  output logic                gg_h_wr_en,
  output logic [31:0]         gg_h_wr_addr,
  output logic [GG_D*32-1:0]  gg_h_wr_data,
  output logic                gg_e_wr_en,
  output logic [31:0]         gg_e_wr_addr,
  output logic [GG_D*32-1:0]  gg_e_wr_data
);

  logic [6:0] we;

  always_comb begin
    for (int k = 0; k < 7; k++) we[k] = prm_we && (prm_kernel == 3'(k));
  end

  gcn_kernel #(.D(D_GCN), .NCU(2)) u_gcn (
    .clk, .rst_n, .start(start[0]), .node_begin, .node_end, .done(done[0]),
    .w_we(we[0]), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .ptr_rd_en(gcn_ptr_rd_en), .ptr_rd_addr(gcn_ptr_rd_addr), .ptr_rd_data(gcn_ptr_rd_data),
    .idx_rd_en(gcn_idx_rd_en), .idx_rd_addr(gcn_idx_rd_addr), .idx_rd_data(gcn_idx_rd_data),
    .h_rd_en(gcn_h_rd_en), .h_rd_addr(gcn_h_rd_addr), .h_rd_data(gcn_h_rd_data),
    .h_wr_en(gcn_h_wr_en), .h_wr_addr(gcn_h_wr_addr), .h_wr_data(gcn_h_wr_data)
  );

  graphsage_kernel #(.D(D_GS)) u_gs (
    .clk, .rst_n, .start(start[1]), .node_begin, .node_end, .done(done[1]),
    .w_we(we[1]), .w_sel(prm_sel), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .ptr_rd_en(gs_ptr_rd_en), .ptr_rd_addr(gs_ptr_rd_addr), .ptr_rd_data(gs_ptr_rd_data),
    .idx_rd_en(gs_idx_rd_en), .idx_rd_addr(gs_idx_rd_addr), .idx_rd_data(gs_idx_rd_data),
    .hj_rd_en(gs_hj_rd_en), .hj_rd_addr(gs_hj_rd_addr), .hj_rd_data(gs_hj_rd_data),
    .hi_rd_en(gs_hi_rd_en), .hi_rd_addr(gs_hi_rd_addr), .hi_rd_data(gs_hi_rd_data),
    .h_wr_en(gs_h_wr_en), .h_wr_addr(gs_h_wr_addr), .h_wr_data(gs_h_wr_data)
  );

  gin_kernel #(.D(D_GIN)) u_gin (
    .clk, .rst_n, .start(start[2]), .node_begin, .node_end, .done(done[2]),
    .w_we(we[2]), .w_sel(prm_sel), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .ptr_rd_en(gin_ptr_rd_en), .ptr_rd_addr(gin_ptr_rd_addr), .ptr_rd_data(gin_ptr_rd_data),
    .idx_rd_en(gin_idx_rd_en), .idx_rd_addr(gin_idx_rd_addr), .idx_rd_data(gin_idx_rd_data),
    .hj_rd_en(gin_hj_rd_en), .hj_rd_addr(gin_hj_rd_addr), .hj_rd_data(gin_hj_rd_data),
    .hi_rd_en(gin_hi_rd_en), .hi_rd_addr(gin_hi_rd_addr), .hi_rd_data(gin_hi_rd_data),
    .h_wr_en(gin_h_wr_en), .h_wr_addr(gin_h_wr_addr), .h_wr_data(gin_h_wr_data)
  );

  gat_kernel1 #(.DIN(GAT_DIN), .K(GAT_K), .F(GAT_F)) u_gat1 (
    .clk, .rst_n, .start(start[3]), .node_begin, .node_end, .done(done[3]),
    .w_we(we[3]), .w_sel(prm_sel), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .h_rd_en(gat1_h_rd_en), .h_rd_addr(gat1_h_rd_addr), .h_rd_data(gat1_h_rd_data),
    .z_wr_en(gat1_z_wr_en), .z_wr_addr(gat1_z_wr_addr), .z_wr_data(gat1_z_wr_data),
    .s_wr_en(gat1_s_wr_en), .s_wr_addr(gat1_s_wr_addr), .s_wr_data(gat1_s_wr_data)
  );

  gat_kernel2 #(.K(GAT_K), .F(GAT_F)) u_gat2 (
    .clk, .rst_n, .start(start[4]), .node_begin, .node_end, .done(done[4]),
    .ptr_rd_en(gat2_ptr_rd_en), .ptr_rd_addr(gat2_ptr_rd_addr), .ptr_rd_data(gat2_ptr_rd_data),
    .idx_rd_en(gat2_idx_rd_en), .idx_rd_addr(gat2_idx_rd_addr), .idx_rd_data(gat2_idx_rd_data),
    .s_rd_en(gat2_s_rd_en), .s_rd_addr(gat2_s_rd_addr), .s_rd_data(gat2_s_rd_data),
    .z_rd_en(gat2_z_rd_en), .z_rd_addr(gat2_z_rd_addr), .z_rd_data(gat2_z_rd_data),
    .h_wr_en(gat2_h_wr_en), .h_wr_addr(gat2_h_wr_addr), .h_wr_data(gat2_h_wr_data)
  );

  monet_kernel #(.DIN(MN_DIN), .K(MN_K), .DOUT(MN_DOUT), .NCU(2)) u_mn (
    .clk, .rst_n, .start(start[5]), .node_begin, .node_end, .done(done[5]),
    .w_we(we[5]), .w_sel(prm_sel), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .ptr_rd_en(mn_ptr_rd_en), .ptr_rd_addr(mn_ptr_rd_addr), .ptr_rd_data(mn_ptr_rd_data),
    .idx_rd_en(mn_idx_rd_en), .idx_rd_addr(mn_idx_rd_addr), .idx_rd_data(mn_idx_rd_data),
    .ps_rd_en(mn_ps_rd_en), .ps_rd_addr(mn_ps_rd_addr), .ps_rd_data(mn_ps_rd_data),
    .h_rd_en(mn_h_rd_en), .h_rd_addr(mn_h_rd_addr), .h_rd_data(mn_h_rd_data),
    .h_wr_en(mn_h_wr_en), .h_wr_addr(mn_h_wr_addr), .h_wr_data(mn_h_wr_data)
  );

  gatedgcn_kernel #(.D(GG_D)) u_gg (
    .clk, .rst_n, .start(start[6]), .node_begin, .node_end, .done(done[6]),
    .w_we(we[6]), .w_sel(prm_sel), .w_row(prm_row), .w_col(prm_col), .w_data(prm_data),
    .ptr_rd_en(gg_ptr_rd_en), .ptr_rd_addr(gg_ptr_rd_addr), .ptr_rd_data(gg_ptr_rd_data),
    .idx_rd_en(gg_idx_rd_en), .idx_rd_addr(gg_idx_rd_addr), .idx_rd_data(gg_idx_rd_data),
    .hi_rd_en(gg_hi_rd_en), .hi_rd_addr(gg_hi_rd_addr), .hi_rd_data(gg_hi_rd_data),
    .hj_rd_en(gg_hj_rd_en), .hj_rd_addr(gg_hj_rd_addr), .hj_rd_data(gg_hj_rd_data),
    .e_rd_en(gg_e_rd_en), .e_rd_addr(gg_e_rd_addr), .e_rd_data(gg_e_rd_data),
    .h_wr_en(gg_h_wr_en), .h_wr_addr(gg_h_wr_addr), .h_wr_data(gg_h_wr_data),
    .e_wr_en(gg_e_wr_en), .e_wr_addr(gg_e_wr_addr), .e_wr_data(gg_e_wr_data)
  );

endmodule
