// gcn_cu: one compute unit of the GCN kernel. For every target vertex i in
// [node_begin, node_end) it computes h_i' = ReLU(U * sum_{j in N(i)} h_j) and
// writes h_i' to the output feature memory at address i.
//
// Dataflow, as in the source paper's GCN diagram: CSR Ptr -> Nbr Idx ->
// read h_j -> Agg -> VMM with U -> ReLU and write h_i'. The stages are joined
// by valid/ready handshakes and run concurrently on different vertices.
// Features are D fp32 values; one memory word holds one whole vector.
// The vertex index travels with the data as a tag. done rises when the
// neighbour walk has finished and every vertex of the range has been written.
module gcn_cu
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
  input  logic [15:0]     w_row,
  input  logic [15:0]     w_col,
  input  fp32_t           w_data,
  output logic            ptr_rd_en,
  output logic [31:0]     ptr_rd_addr,
  input  logic [31:0]     ptr_rd_data,
  output logic            idx_rd_en,
  output logic [31:0]     idx_rd_addr,
  input  logic [31:0]     idx_rd_data,
  output logic            h_rd_en,
  output logic [31:0]     h_rd_addr,
  input  logic [D*32-1:0] h_rd_data,
  output logic            h_wr_en,
  output logic [31:0]     h_wr_addr,
  output logic [D*32-1:0] h_wr_data
);

  localparam int unsigned TW = 34;  // {node, last, empty}

  logic            e_valid, e_ready, e_last, e_empty, rd_done;
  logic [31:0]     e_node, e_edge, e_nbr, e_deg;
  logic            f_valid, f_ready;
  logic [D*32-1:0] f_vec;
  logic [TW-1:0]   f_tag;
  logic            a_valid, a_ready;
  logic [D*32-1:0] a_sum;
  logic [31:0]     a_cnt, a_node, y_node, n_written;
  logic            y_valid;
  logic [D*32-1:0] y_vec;

  csr_nbr_reader u_nbr (
    .clk, .rst_n, .start, .node_begin, .node_end, .done(rd_done),
    .ptr_rd_en, .ptr_rd_addr, .ptr_rd_data, .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .out_valid(e_valid), .out_ready(e_ready), .out_node(e_node), .out_edge(e_edge),
    .out_nbr(e_nbr), .out_deg(e_deg), .out_last(e_last), .out_empty(e_empty)
  );

  vec_reader #(.W(D*32), .TW(TW)) u_hj (
    .clk, .rst_n, .in_valid(e_valid), .in_ready(e_ready), .in_addr(e_nbr),
    .in_tag({e_node, e_last, e_empty}),
    .rd_en(h_rd_en), .rd_addr(h_rd_addr), .rd_data(h_rd_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_vec), .out_tag(f_tag)
  );

  vec_agg #(.N(D), .TW(32)) u_agg (
    .clk, .rst_n, .in_valid(f_valid), .in_ready(f_ready), .in_vec(f_vec),
    .in_last(f_tag[1]), .in_empty(f_tag[0]), .in_tag(f_tag[33:2]),
    .out_valid(a_valid), .out_ready(a_ready), .out_sum(a_sum), .out_cnt(a_cnt), .out_tag(a_node)
  );

  vmm #(.DIN(D), .DOUT(D), .TW(32)) u_u (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data,
    .in_valid(a_valid), .in_ready(a_ready), .in_vec(a_sum), .in_tag(a_node),
    .out_valid(y_valid), .out_ready(1'b1), .out_vec(y_vec), .out_tag(y_node)
  );

  // ReLU and write-back; the memory always accepts a write
  always_comb begin
    h_wr_en   = y_valid;
    h_wr_addr = y_node;
    for (int k = 0; k < D; k++) h_wr_data[k*32 +: 32] = fp_relu(y_vec[k*32 +: 32]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_written <= '0;
    else if (start) n_written <= '0;
    else if (h_wr_en) n_written <= n_written + 32'd1;
  end

  assign done = rd_done && (n_written == node_end - node_begin);

endmodule
