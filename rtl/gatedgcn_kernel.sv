// gatedgcn_kernel: one Gated Graph ConvNet layer. For every target vertex i
// in [node_begin, node_end) and every incoming edge (j -> i) with feature
// e_ij:
//   e_ij'  = E h_i + D h_j + C e_ij            (written back per edge)
//   s_ij   = sigmoid(e_ij')
//   h_i'   = ReLU(A h_i + (sum_j B h_j (.) s_ij) / (sum_j s_ij + eps))
// with (.) the element-wise product and eps = 1e-6 (the value of eps is this
// design's choice).
//
// As in the source paper, all five VMMs run in parallel and a single pipeline
// follows: the vertex path reads h_i and feeds VMM A and VMM E; the edge path
// (CSR Ptr -> Edge Idx / Nbr Idx) reads e_ij into VMM C and h_j into VMM D
// and VMM B. The soft-attention stage ("Sum", "Softatt") takes one edge per
// cycle from C, D and B, pairs it with the A and E results of the vertex in
// work, writes e_ij', and accumulates numerator and denominator; on the
// vertex's last edge it forms h_i' ("Sum, ReLU") and writes it. A vertex
// without edges gets ReLU(A h_i).
//
// Memory words hold D fp32 values (h and edge features alike). Parameters:
// w_sel 0..4 write A, B, C, D, E (w_row output, w_col input index).
module gatedgcn_kernel
  import gnn_pkg::*;
#(
  parameter int unsigned D = 32
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
  output logic            hi_rd_en,
  output logic [31:0]     hi_rd_addr,
  input  logic [D*32-1:0] hi_rd_data,
  output logic            hj_rd_en,
  output logic [31:0]     hj_rd_addr,
  input  logic [D*32-1:0] hj_rd_data,
  output logic            e_rd_en,
  output logic [31:0]     e_rd_addr,
  input  logic [D*32-1:0] e_rd_data,
  output logic            h_wr_en,
  output logic [31:0]     h_wr_addr,
  output logic [D*32-1:0] h_wr_data,
  output logic            e_wr_en,
  output logic [31:0]     e_wr_addr,
  output logic [D*32-1:0] e_wr_data
);

  localparam int unsigned TW = 66;  // {node, edge, last, empty}

  logic            rd_done;
  // vertex path
  logic            n_valid, n_ready, hi_valid, hi_ready, a_in_ready, ei_in_ready;
  logic [31:0]     n_node, hi_node, a_node, ei_node;
  logic [D*32-1:0] hi_vec, a_vec, ei_vec;
  logic            a_valid, ei_valid, node_pop;
  // edge path
  logic            x_valid, x_ready, x_last, x_empty;
  logic [31:0]     x_node, x_edge, x_nbr, x_deg;
  logic            er_in_ready, hj_in_ready, er_valid, hj_valid, er_ready, hj_ready;
  logic [D*32-1:0] er_vec, hj_vec;
  logic [TW-1:0]   er_tag, hj_tag, c_tag, d_tag, b_tag;
  logic            c_in_ready, d_in_ready, b_in_ready;
  logic            c_valid, d_valid, b_valid, s_fire;
  logic [D*32-1:0] c_vec, d_vec, b_vec;
  // soft attention
  logic [D*32-1:0] num, den, num_nx, den_nx, enew;
  logic [31:0]     n_written;
  logic            s_last, s_empty;

  // ---------------- vertex path: h_i -> A, E ----------------
  node_seq u_seq (
    .clk, .rst_n, .start, .node_begin, .node_end,
    .out_valid(n_valid), .out_ready(n_ready), .out_node(n_node)
  );

  vec_reader #(.W(D*32), .TW(32)) u_hi (
    .clk, .rst_n, .in_valid(n_valid), .in_ready(n_ready), .in_addr(n_node), .in_tag(n_node),
    .rd_en(hi_rd_en), .rd_addr(hi_rd_addr), .rd_data(hi_rd_data),
    .out_valid(hi_valid), .out_ready(hi_ready), .out_data(hi_vec), .out_tag(hi_node)
  );

  assign hi_ready = a_in_ready && ei_in_ready;

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_a (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd0), .w_row, .w_col, .w_data,
    .in_valid(hi_valid && ei_in_ready), .in_ready(a_in_ready), .in_vec(hi_vec), .in_tag(hi_node),
    .out_valid(a_valid), .out_ready(node_pop), .out_vec(a_vec), .out_tag(a_node)
  );

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_e (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd4), .w_row, .w_col, .w_data,
    .in_valid(hi_valid && a_in_ready), .in_ready(ei_in_ready), .in_vec(hi_vec), .in_tag(hi_node),
    .out_valid(ei_valid), .out_ready(node_pop), .out_vec(ei_vec), .out_tag(ei_node)
  );

  // ---------------- edge path: e_ij -> C, h_j -> D, B ----------------
  csr_nbr_reader u_nbr (
    .clk, .rst_n, .start, .node_begin, .node_end, .done(rd_done),
    .ptr_rd_en, .ptr_rd_addr, .ptr_rd_data, .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .out_valid(x_valid), .out_ready(x_ready), .out_node(x_node), .out_edge(x_edge),
    .out_nbr(x_nbr), .out_deg(x_deg), .out_last(x_last), .out_empty(x_empty)
  );

  assign x_ready = er_in_ready && hj_in_ready;

  vec_reader #(.W(D*32), .TW(TW)) u_er (
    .clk, .rst_n, .in_valid(x_valid && hj_in_ready), .in_ready(er_in_ready), .in_addr(x_edge),
    .in_tag({x_node, x_edge, x_last, x_empty}),
    .rd_en(e_rd_en), .rd_addr(e_rd_addr), .rd_data(e_rd_data),
    .out_valid(er_valid), .out_ready(er_ready), .out_data(er_vec), .out_tag(er_tag)
  );

  vec_reader #(.W(D*32), .TW(TW)) u_hj (
    .clk, .rst_n, .in_valid(x_valid && er_in_ready), .in_ready(hj_in_ready), .in_addr(x_nbr),
    .in_tag({x_node, x_edge, x_last, x_empty}),
    .rd_en(hj_rd_en), .rd_addr(hj_rd_addr), .rd_data(hj_rd_data),
    .out_valid(hj_valid), .out_ready(hj_ready), .out_data(hj_vec), .out_tag(hj_tag)
  );

  assign er_ready = c_in_ready;
  assign hj_ready = d_in_ready && b_in_ready;

  vmm #(.DIN(D), .DOUT(D), .TW(TW)) u_c (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd2), .w_row, .w_col, .w_data,
    .in_valid(er_valid), .in_ready(c_in_ready), .in_vec(er_vec), .in_tag(er_tag),
    .out_valid(c_valid), .out_ready(s_fire), .out_vec(c_vec), .out_tag(c_tag)
  );

  vmm #(.DIN(D), .DOUT(D), .TW(TW)) u_d (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd3), .w_row, .w_col, .w_data,
    .in_valid(hj_valid && b_in_ready), .in_ready(d_in_ready), .in_vec(hj_vec), .in_tag(hj_tag),
    .out_valid(d_valid), .out_ready(s_fire), .out_vec(d_vec), .out_tag(d_tag)
  );

  vmm #(.DIN(D), .DOUT(D), .TW(TW)) u_b (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd1), .w_row, .w_col, .w_data,
    .in_valid(hj_valid && d_in_ready), .in_ready(b_in_ready), .in_vec(hj_vec), .in_tag(hj_tag),
    .out_valid(b_valid), .out_ready(s_fire), .out_vec(b_vec), .out_tag(b_tag)
  );

  // ---------------- soft attention and update ----------------
  assign s_fire   = c_valid && d_valid && b_valid && a_valid && ei_valid;
  assign s_last   = c_tag[1];
  assign s_empty  = c_tag[0];
  assign node_pop = s_fire && s_last;

  always_comb begin
    for (int k = 0; k < D; k++) begin
      fp32_t sg;
      enew[k*32 +: 32]   = fp_add(fp_add(ei_vec[k*32 +: 32], d_vec[k*32 +: 32]), c_vec[k*32 +: 32]);
      sg                 = fp_sigmoid(enew[k*32 +: 32]);
      num_nx[k*32 +: 32] = s_empty ? num[k*32 +: 32]
                                   : fp_add(num[k*32 +: 32], fp_mul(b_vec[k*32 +: 32], sg));
      den_nx[k*32 +: 32] = s_empty ? den[k*32 +: 32] : fp_add(den[k*32 +: 32], sg);
      h_wr_data[k*32 +: 32] = fp_relu(fp_add(a_vec[k*32 +: 32],
                                fp_div(num_nx[k*32 +: 32], fp_add(den_nx[k*32 +: 32], FP_EPS))));
    end
    e_wr_en   = s_fire && !s_empty;
    e_wr_addr = c_tag[33:2];
    e_wr_data = enew;
    h_wr_en   = node_pop;
    h_wr_addr = a_node;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num <= '0;
      den <= '0;
    end else if (s_fire) begin
      num <= s_last ? '0 : num_nx;
      den <= s_last ? '0 : den_nx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_written <= '0;
    else if (start) n_written <= '0;
    else if (h_wr_en) n_written <= n_written + 32'd1;
  end

  assign done = rd_done && (n_written == node_end - node_begin);

  assert property (@(posedge clk) disable iff (!rst_n)
                   s_fire |-> c_tag == d_tag && d_tag == b_tag && a_node == c_tag[65:34] && a_node == ei_node);

endmodule
