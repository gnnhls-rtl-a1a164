// graphsage_kernel: one GraphSage layer with a mean aggregator,
//   h_i' = ReLU(V h_i + W * (1/|N(i)|) * sum_{j in N(i)} h_j),
// for every target vertex i in [node_begin, node_end).
//
// As in the source paper, the weight U = [V W] is split so that the target
// vertex path (read h_i -> VMM with V) and the neighbour path (CSR Ptr -> Nbr
// Idx -> read h_j -> Agg -> mean -> VMM with W) run in parallel; a final
// combine stage adds the two results, applies ReLU and writes h_i'. Both
// paths visit the vertices in the same order. A vertex without neighbours
// gets a zero mean. The mean multiplies the sum by 1/count (one fp32
// divider), which is this design's choice. Single compute unit, as in the
// paper.
//
// Weights: w_sel 0 writes V, 1 writes W; w_row is the output index, w_col the
// input index. Memory ports are synchronous reads with one cycle of latency;
// the write port always accepts. done rises when all vertices are written.
module graphsage_kernel
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
  logic [D*32-1:0] a_sum, a_mean;
  logic [31:0]     a_cnt, a_node;
  fp32_t           a_inv;
  logic            n_valid, n_ready;
  logic [31:0]     n_node;
  logic            hi_valid, hi_ready;
  logic [D*32-1:0] hi_vec;
  logic [31:0]     hi_node;
  logic            yv_valid, yw_valid, y_fire;
  logic [D*32-1:0] yv_vec, yw_vec;
  logic [31:0]     yv_node, yw_node, n_written;

  // neighbour path
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

  always_comb begin
    a_inv = (a_cnt == 32'd0) ? FP_ZERO : fp_div(FP_ONE, fp_from_uint(a_cnt));
    for (int k = 0; k < D; k++) a_mean[k*32 +: 32] = fp_mul(a_sum[k*32 +: 32], a_inv);
  end

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_w (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd1), .w_row, .w_col, .w_data,
    .in_valid(a_valid), .in_ready(a_ready), .in_vec(a_mean), .in_tag(a_node),
    .out_valid(yw_valid), .out_ready(y_fire), .out_vec(yw_vec), .out_tag(yw_node)
  );

  // target vertex path
  node_seq u_seq (
    .clk, .rst_n, .start, .node_begin, .node_end,
    .out_valid(n_valid), .out_ready(n_ready), .out_node(n_node)
  );

  vec_reader #(.W(D*32), .TW(32)) u_hi (
    .clk, .rst_n, .in_valid(n_valid), .in_ready(n_ready), .in_addr(n_node), .in_tag(n_node),
    .rd_en(hi_rd_en), .rd_addr(hi_rd_addr), .rd_data(hi_rd_data),
    .out_valid(hi_valid), .out_ready(hi_ready), .out_data(hi_vec), .out_tag(hi_node)
  );

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_v (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd0), .w_row, .w_col, .w_data,
    .in_valid(hi_valid), .in_ready(hi_ready), .in_vec(hi_vec), .in_tag(hi_node),
    .out_valid(yv_valid), .out_ready(y_fire), .out_vec(yv_vec), .out_tag(yv_node)
  );

  // combine: both paths deliver vertex results in the same order
  assign y_fire = yv_valid && yw_valid;

  always_comb begin
    h_wr_en   = y_fire;
    h_wr_addr = yv_node;
    for (int k = 0; k < D; k++)
      h_wr_data[k*32 +: 32] = fp_relu(fp_add(yv_vec[k*32 +: 32], yw_vec[k*32 +: 32]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_written <= '0;
    else if (start) n_written <= '0;
    else if (h_wr_en) n_written <= n_written + 32'd1;
  end

  assign done = rd_done && (n_written == node_end - node_begin);

  assert property (@(posedge clk) disable iff (!rst_n) y_fire |-> yv_node == yw_node);

endmodule
