// gin_kernel: one Graph Isomorphism Network layer,
//   h_i' = ReLU(U * ReLU(V * ((1+eps) h_i + sum_{j in N(i)} h_j))),
// for every target vertex i in [node_begin, node_end).
//
// The neighbour path (CSR Ptr -> Nbr Idx -> read h_j -> Agg) runs next to the
// read of h_i; a combine stage forms (1+eps) h_i + sum h_j, hiding the h_i
// read, and two cascaded VMM stages follow, each with its ReLU. The order of
// the two matrices follows the paper's formula (V first, then U); the paper's
// diagram draws U before V, which only renames the two matrices. Single
// compute unit, as in the paper.
//
// Parameters: w_sel 0 writes U, 1 writes V (w_row output, w_col input
// index), 2 writes the scalar eps. Memory timing as in gcn_cu.
module gin_kernel
  import gnn_pkg::*;
#(
  parameter int unsigned D = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [31:0]     node_begin,
  input  logic [31:0]     node_end,
  output logic            done,
  input  logic            w_we,
  input  logic [3:0]      w_sel,
  input  logic [15:0]     w_row,
  input  logic [15:0]     w_col,
  input  fp32_t           w_data,
  output logic            ptr_rd_en,
  output logic [31:0]     ptr_rd_addr,
  input  logic [31:0]     ptr_rd_data,
  output logic            idx_rd_en,
  output logic [31:0]     idx_rd_addr,
  input  logic [31:0]     idx_rd_data,
  output logic            hj_rd_en,
  output logic [31:0]     hj_rd_addr,
  input  logic [D*32-1:0] hj_rd_data,
  output logic            hi_rd_en,
  output logic [31:0]     hi_rd_addr,
  input  logic [D*32-1:0] hi_rd_data,
  output logic            h_wr_en,
  output logic [31:0]     h_wr_addr,
  output logic [D*32-1:0] h_wr_data
);

  logic            e_valid, e_ready, e_last, e_empty, rd_done;
  logic [31:0]     e_node, e_edge, e_nbr, e_deg;
  logic            f_valid, f_ready;
  logic [D*32-1:0] f_vec;
  logic [33:0]     f_tag;
  logic            a_valid, a_ready;
  logic [D*32-1:0] a_sum, x_vec;
  logic [31:0]     a_cnt, a_node;
  logic            n_valid, n_ready;
  logic [31:0]     n_node;
  logic            hi_valid;
  logic [D*32-1:0] hi_vec;
  logic [31:0]     hi_node;
  logic            x_valid, x_ready;
  logic            v_valid, v_ready;
  logic [D*32-1:0] v_vec, v_relu, u_vec;
  logic [31:0]     v_node, u_node, n_written;
  logic            u_valid;
  fp32_t           eps_q, one_eps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eps_q <= FP_ZERO;
    else if (w_we && w_sel == 4'd2) eps_q <= w_data;
  end
  assign one_eps = fp_add(FP_ONE, eps_q);

  csr_nbr_reader u_nbr (
    .clk, .rst_n, .start, .node_begin, .node_end, .done(rd_done),
    .ptr_rd_en, .ptr_rd_addr, .ptr_rd_data, .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .out_valid(e_valid), .out_ready(e_ready), .out_node(e_node), .out_edge(e_edge),
    .out_nbr(e_nbr), .out_deg(e_deg), .out_last(e_last), .out_empty(e_empty)
  );

  vec_reader #(.W(D*32), .TW(34)) u_hj (
    .clk, .rst_n, .in_valid(e_valid), .in_ready(e_ready), .in_addr(e_nbr),
    .in_tag({e_node, e_last, e_empty}),
    .rd_en(hj_rd_en), .rd_addr(hj_rd_addr), .rd_data(hj_rd_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_vec), .out_tag(f_tag)
  );

  vec_agg #(.N(D), .TW(32)) u_agg (
    .clk, .rst_n, .in_valid(f_valid), .in_ready(f_ready), .in_vec(f_vec),
    .in_last(f_tag[1]), .in_empty(f_tag[0]), .in_tag(f_tag[33:2]),
    .out_valid(a_valid), .out_ready(a_ready), .out_sum(a_sum), .out_cnt(a_cnt), .out_tag(a_node)
  );

  node_seq u_seq (
    .clk, .rst_n, .start, .node_begin, .node_end,
    .out_valid(n_valid), .out_ready(n_ready), .out_node(n_node)
  );

  vec_reader #(.W(D*32), .TW(32)) u_hi (
    .clk, .rst_n, .in_valid(n_valid), .in_ready(n_ready), .in_addr(n_node), .in_tag(n_node),
    .rd_en(hi_rd_en), .rd_addr(hi_rd_addr), .rd_data(hi_rd_data),
    .out_valid(hi_valid), .out_ready(a_ready), .out_data(hi_vec), .out_tag(hi_node)
  );

  // combine (1+eps) h_i + sum h_j when both are present
  assign x_valid = a_valid && hi_valid;
  assign a_ready = x_valid && x_ready;

  always_comb begin
    for (int k = 0; k < D; k++)
      x_vec[k*32 +: 32] = fp_add(fp_mul(one_eps, hi_vec[k*32 +: 32]), a_sum[k*32 +: 32]);
  end

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_v (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd1), .w_row, .w_col, .w_data,
    .in_valid(x_valid), .in_ready(x_ready), .in_vec(x_vec), .in_tag(a_node),
    .out_valid(v_valid), .out_ready(v_ready), .out_vec(v_vec), .out_tag(v_node)
  );

  always_comb begin
    for (int k = 0; k < D; k++) v_relu[k*32 +: 32] = fp_relu(v_vec[k*32 +: 32]);
  end

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_u (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd0), .w_row, .w_col, .w_data,
    .in_valid(v_valid), .in_ready(v_ready), .in_vec(v_relu), .in_tag(v_node),
    .out_valid(u_valid), .out_ready(1'b1), .out_vec(u_vec), .out_tag(u_node)
  );

  always_comb begin
    h_wr_en   = u_valid;
    h_wr_addr = u_node;
    for (int k = 0; k < D; k++) h_wr_data[k*32 +: 32] = fp_relu(u_vec[k*32 +: 32]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_written <= '0;
    else if (start) n_written <= '0;
    else if (h_wr_en) n_written <= n_written + 32'd1;
  end

  assign done = rd_done && (n_written == node_end - node_begin);

  assert property (@(posedge clk) disable iff (!rst_n) x_valid |-> a_node == hi_node);

endmodule
