// gat_kernel1: first of the two kernels of the Graph Attention Network
// layer. For every vertex n in [node_begin, node_end) it computes the
// projected features z_n = U h_n (K heads of F elements each) and, per head
// k, the two attention terms
//   el_n[k] = a_src[k]  . z_n[k]    (used when n is the target vertex)
//   er_n[k] = a_dest[k] . z_n[k]    (used when n is a neighbour),
// and writes z_n and the scores to memory for gat_kernel2. Moving U h from
// the edges to the vertices this way follows the source paper.
//
// Dataflow: vertex sequence -> read h_n -> VMM with U -> multi-headed
// element-wise multiply (MHEWM) with a_src and a_dest -> write. The MHEWM
// stage is combinational: K dot products of F terms each for both vectors.
//
// Memory words: h is DIN fp32 values; z is K*F values (head k at elements
// k*F .. k*F+F-1); the score word holds el[0..K-1] in elements 0..K-1 and
// er[0..K-1] in elements K..2K-1 (this layout is this design's choice).
// Parameters: w_sel 0 writes U (w_row output, w_col input index), 1 writes
// a_src[w_col], 2 writes a_dest[w_col], with w_col = k*F + f.
module gat_kernel1
  import gnn_pkg::*;
#(
  parameter int unsigned DIN = 128,
  parameter int unsigned K   = 8,
  parameter int unsigned F   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [31:0]         node_begin,
  input  logic [31:0]         node_end,
  output logic                done,
  input  logic                w_we,
  input  logic [3:0]          w_sel,
  input  logic [15:0]         w_row,
  input  logic [15:0]         w_col,
  input  fp32_t               w_data,
  output logic                h_rd_en,
  output logic [31:0]         h_rd_addr,
  input  logic [DIN*32-1:0]   h_rd_data,
  output logic                z_wr_en,
  output logic [31:0]         z_wr_addr,
  output logic [K*F*32-1:0]   z_wr_data,
  output logic                s_wr_en,
  output logic [31:0]         s_wr_addr,
  output logic [2*K*32-1:0]   s_wr_data
);

  localparam int unsigned DO = K * F;

  fp32_t             a_src  [DO];
  fp32_t             a_dest [DO];
  logic              n_valid, n_ready, h_valid, h_ready, z_valid;
  logic [31:0]       n_node, h_node, z_node, n_written;
  logic [DIN*32-1:0] h_vec;
  logic [DO*32-1:0]  z_vec;
  logic              run;

  always_ff @(posedge clk) begin
    if (w_we && w_sel == 4'd1) a_src[w_col[$clog2(DO)-1:0]]  <= w_data;
    if (w_we && w_sel == 4'd2) a_dest[w_col[$clog2(DO)-1:0]] <= w_data;
  end

  node_seq u_seq (
    .clk, .rst_n, .start, .node_begin, .node_end,
    .out_valid(n_valid), .out_ready(n_ready), .out_node(n_node)
  );

  vec_reader #(.W(DIN*32), .TW(32)) u_h (
    .clk, .rst_n, .in_valid(n_valid), .in_ready(n_ready), .in_addr(n_node), .in_tag(n_node),
    .rd_en(h_rd_en), .rd_addr(h_rd_addr), .rd_data(h_rd_data),
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_vec), .out_tag(h_node)
  );

  vmm #(.DIN(DIN), .DOUT(DO), .TW(32)) u_u (
    .clk, .rst_n, .w_we(w_we && w_sel == 4'd0), .w_row, .w_col, .w_data,
    .in_valid(h_valid), .in_ready(h_ready), .in_vec(h_vec), .in_tag(h_node),
    .out_valid(z_valid), .out_ready(1'b1), .out_vec(z_vec), .out_tag(z_node)
  );

  // MHEWM: per-head dot products with a_src and a_dest
  always_comb begin
    z_wr_en   = z_valid;
    z_wr_addr = z_node;
    z_wr_data = z_vec;
    s_wr_en   = z_valid;
    s_wr_addr = z_node;
    for (int k = 0; k < K; k++) begin
      fp32_t sl, sr;
      sl = FP_ZERO;
      sr = FP_ZERO;
      for (int f = 0; f < F; f++) begin
        sl = fp_add(sl, fp_mul(a_src[k*F+f],  z_vec[(k*F+f)*32 +: 32]));
        sr = fp_add(sr, fp_mul(a_dest[k*F+f], z_vec[(k*F+f)*32 +: 32]));
      end
      s_wr_data[k*32 +: 32]     = sl;
      s_wr_data[(K+k)*32 +: 32] = sr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_written <= '0;
      run       <= 1'b0;
    end else if (start) begin
      n_written <= '0;
      run       <= 1'b1;
    end else if (z_valid) n_written <= n_written + 32'd1;
  end

  assign done = run && !n_valid && (n_written == node_end - node_begin);

endmodule
