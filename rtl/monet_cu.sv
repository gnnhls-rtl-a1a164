// monet_cu: one compute unit of the Mixture Model Network (MoNet) layer.
// For every target vertex i in [node_begin, node_end):
//   u_ij   = tanh(Vp * pseudo_ij + vb)                        (2 values)
//   w_k    = exp(-1/2 * sum_d (u_ij[d] - mu[k][d])^2 * isig[k][d])
//   g_k    = sum_{j in N(i)} w_k(u_ij) * h_j                 (k = 0..K-1)
//   h_i'   = ReLU(sum_k U_k g_k)
// The multi-head VMM with U is applied after the aggregation, once per vertex
// instead of once per edge, as the source paper does.
//
// Dataflow, after the paper's MoNet diagram: CSR Ptr -> Nbr Idx, then two
// parallel reads per edge, pseudo_ij (by edge index) and h_j (by neighbour
// index); a combine stage computes u_ij and the Gaussian weights
// (combinational, one edge per cycle) and accumulates the K weighted sums
// ("MH, Agg"); the K*DIN sums of a vertex go to one VMM of K*DIN inputs and
// DOUT outputs, which adds the K heads' products ("MH U" and "MH Agg"); then
// ReLU and write. The inverse covariance isig is taken as the K x 2 diagonal
// the paper lists and used as given (not squared).
//
// Memory words: pseudo is two fp32 values {deg-term of j, deg-term of i} with
// pseudo[0] in bits 31:0; h_j has DIN values. Parameters: w_sel 0 writes U
// (w_row = output index, w_col = k*DIN + input index), 1 writes Vp[w_row][w_col],
// 2 writes vb[w_col], 3 writes mu[w_row=k][w_col=d], 4 writes isig[k][d].
module monet_cu
  import gnn_pkg::*;
#(
  parameter int unsigned DIN  = 64,
  parameter int unsigned K    = 2,
  parameter int unsigned DOUT = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        node_begin,
  input  logic [31:0]        node_end,
  output logic               done,
  input  logic               w_we,
  input  logic [3:0]         w_sel,
  input  logic [15:0]        w_row,
  input  logic [15:0]        w_col,
  input  fp32_t              w_data,
  output logic               ptr_rd_en,
  output logic [31:0]        ptr_rd_addr,
  input  logic [31:0]        ptr_rd_data,
  output logic               idx_rd_en,
  output logic [31:0]        idx_rd_addr,
  input  logic [31:0]        idx_rd_data,
  output logic               ps_rd_en,
  output logic [31:0]        ps_rd_addr,
  input  logic [63:0]        ps_rd_data,
  output logic               h_rd_en,
  output logic [31:0]        h_rd_addr,
  input  logic [DIN*32-1:0]  h_rd_data,
  output logic               h_wr_en,
  output logic [31:0]        h_wr_addr,
  output logic [DOUT*32-1:0] h_wr_data
);

  localparam int unsigned GW = K * DIN;

  fp32_t               vp [2][2];
  fp32_t               vb [2];
  fp32_t               mu [K][2];
  fp32_t               isig [K][2];
  logic                e_valid, e_ready, e_last, e_empty, rd_done;
  logic [31:0]         e_node, e_edge, e_nbr, e_deg;
  logic                p_valid, p_ready, p_in_ready, f_valid, f_in_ready;
  logic [63:0]         p_vec;
  logic [33:0]         p_tag, f_tag;
  logic [DIN*32-1:0]   f_vec;
  logic                c_fire, g_valid, g_ready, y_valid;
  logic [GW*32-1:0]    acc, acc_nx, g_vec;
  logic [31:0]         g_node, y_node, n_written;
  logic [DOUT*32-1:0]  y_vec;
  fp32_t               u [2];
  fp32_t               wk [K];

  always_ff @(posedge clk) begin
    if (w_we) begin
      case (w_sel)
        4'd1: vp[w_row[0]][w_col[0]] <= w_data;
        4'd2: vb[w_col[0]] <= w_data;
        4'd3: mu[w_row[$clog2(K)-1:0]][w_col[0]] <= w_data;
        4'd4: isig[w_row[$clog2(K)-1:0]][w_col[0]] <= w_data;
        default: ;
      endcase
    end
  end

  csr_nbr_reader u_nbr (
    .clk, .rst_n, .start, .node_begin, .node_end, .done(rd_done),
    .ptr_rd_en, .ptr_rd_addr, .ptr_rd_data, .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .out_valid(e_valid), .out_ready(e_ready), .out_node(e_node), .out_edge(e_edge),
    .out_nbr(e_nbr), .out_deg(e_deg), .out_last(e_last), .out_empty(e_empty)
  );

  // fork the edge beat to both readers
  assign e_ready = p_in_ready && f_in_ready;

  vec_reader #(.W(64), .TW(34)) u_ps (
    .clk, .rst_n, .in_valid(e_valid && f_in_ready), .in_ready(p_in_ready), .in_addr(e_edge),
    .in_tag({e_node, e_last, e_empty}),
    .rd_en(ps_rd_en), .rd_addr(ps_rd_addr), .rd_data(ps_rd_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_vec), .out_tag(p_tag)
  );

  vec_reader #(.W(DIN*32), .TW(34)) u_hj (
    .clk, .rst_n, .in_valid(e_valid && p_in_ready), .in_ready(f_in_ready), .in_addr(e_nbr),
    .in_tag({e_node, e_last, e_empty}),
    .rd_en(h_rd_en), .rd_addr(h_rd_addr), .rd_data(h_rd_data),
    .out_valid(f_valid), .out_ready(p_ready), .out_data(f_vec), .out_tag(f_tag)
  );

  // pseudo-coordinate VMM, Gaussian weights and weighted aggregation
  assign c_fire  = p_valid && f_valid && (!g_valid || g_ready);
  assign p_ready = c_fire;

  always_comb begin
    for (int d = 0; d < 2; d++)
      u[d] = fp_tanh(fp_add(fp_add(fp_mul(vp[d][0], p_vec[31:0]), fp_mul(vp[d][1], p_vec[63:32])), vb[d]));
    for (int k = 0; k < K; k++) begin
      fp32_t q, t;
      q = FP_ZERO;
      for (int d = 0; d < 2; d++) begin
        t = fp_sub(u[d], mu[k][d]);
        q = fp_add(q, fp_mul(fp_mul(t, t), isig[k][d]));
      end
      wk[k] = fp_exp(fp_mul(FP_MHALF, q));
    end
    for (int k = 0; k < K; k++)
      for (int c = 0; c < DIN; c++)
        acc_nx[(k*DIN+c)*32 +: 32] = fp_add(acc[(k*DIN+c)*32 +: 32], fp_mul(wk[k], f_vec[c*32 +: 32]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      g_valid <= 1'b0;
      g_vec   <= '0;
      g_node  <= '0;
    end else begin
      if (g_valid && g_ready) g_valid <= 1'b0;
      if (c_fire) begin
        if (p_tag[1]) begin
          g_valid <= 1'b1;
          g_vec   <= p_tag[0] ? acc : acc_nx;
          g_node  <= p_tag[33:2];
          acc     <= '0;
        end else if (!p_tag[0]) begin
          acc <= acc_nx;
        end
      end
    end
  end

  // multi-head VMM: [U_0 .. U_K-1] * [g_0; ..; g_K-1]
  vmm #(.DIN(GW), .DOUT(DOUT), .TW(32)) u_u (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd0), .w_row, .w_col, .w_data,
    .in_valid(g_valid), .in_ready(g_ready), .in_vec(g_vec), .in_tag(g_node),
    .out_valid(y_valid), .out_ready(1'b1), .out_vec(y_vec), .out_tag(y_node)
  );

  always_comb begin
    h_wr_en   = y_valid;
    h_wr_addr = y_node;
    for (int k = 0; k < DOUT; k++) h_wr_data[k*32 +: 32] = fp_relu(y_vec[k*32 +: 32]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_written <= '0;
    else if (start) n_written <= '0;
    else if (h_wr_en) n_written <= n_written + 32'd1;
  end

  assign done = rd_done && (n_written == node_end - node_begin);

  assert property (@(posedge clk) disable iff (!rst_n) p_valid && f_valid |-> p_tag == f_tag);

endmodule
