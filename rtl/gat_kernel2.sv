// gat_kernel2: second kernel of the Graph Attention Network layer. For every
// target vertex i in [node_begin, node_end) it computes, per head k,
//   e_ij[k]     = LeakyReLU(el_i[k] + er_j[k])            for j in N(i)
//   alpha_ij[k] = exp(e_ij[k]) / sum_{j'} exp(e_ij'[k])   (softmax)
//   h_i'[k]     = ELU(sum_j alpha_ij[k] * z_j[k])
// and writes the K heads, concatenated, as h_i'. el, er and z come from
// gat_kernel1 through memory, as in the source paper.
//
// The softmax denominator must be complete before any alpha can be formed.
// The paper solves this by computing e_ij twice, once for the denominator
// and once for the weights. This controller does the same in two passes over
// the neighbour list of each vertex: pass 1 reads er_j and accumulates the
// denominator per head; pass 2 reads er_j and z_j again, recomputes e_ij,
// divides by the denominator and accumulates the weighted z_j. A final step
// applies ELU and writes. A vertex without neighbours gets ELU(0) = 0.
// Running the two passes one after the other in one controller, instead of
// as concurrent dataflow stages, is this design's simplification.
//
// Timing: 3 cycles for the row pointers and 1 for el_i, 3 cycles per edge and
// pass, 1 cycle for the write. Memory reads have one cycle of latency.
// Memory words are laid out as in gat_kernel1.
module gat_kernel2
  import gnn_pkg::*;
#(
  parameter int unsigned K = 8,
  parameter int unsigned F = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       node_begin,
  input  logic [31:0]       node_end,
  output logic              done,
  output logic              ptr_rd_en,
  output logic [31:0]       ptr_rd_addr,
  input  logic [31:0]       ptr_rd_data,
  output logic              idx_rd_en,
  output logic [31:0]       idx_rd_addr,
  input  logic [31:0]       idx_rd_data,
  output logic              s_rd_en,
  output logic [31:0]       s_rd_addr,
  input  logic [2*K*32-1:0] s_rd_data,
  output logic              z_rd_en,
  output logic [31:0]       z_rd_addr,
  input  logic [K*F*32-1:0] z_rd_data,
  output logic              h_wr_en,
  output logic [31:0]       h_wr_addr,
  output logic [K*F*32-1:0] h_wr_data
);

  typedef enum logic [3:0] {S_IDLE, S_P0, S_P1, S_P2, S_P3, S_I0, S_I1, S_C, S_WR, S_DONE} state_t;

  state_t      state;
  logic [31:0] node, edge_q, beg_q, end_q;
  logic        pass2;
  fp32_t       el   [K];
  fp32_t       den  [K];
  fp32_t       acc  [K*F];
  fp32_t       ex   [K];
  fp32_t       alpha [K];

  assign done = (state == S_DONE);

  always_comb begin
    ptr_rd_en   = (state == S_P0) || (state == S_P1);
    ptr_rd_addr = (state == S_P1) ? node + 32'd1 : node;
    idx_rd_en   = (state == S_I0);
    idx_rd_addr = edge_q;
    s_rd_en     = (state == S_P2) || (state == S_I1);
    s_rd_addr   = (state == S_P2) ? node : idx_rd_data;
    z_rd_en     = (state == S_I1) && pass2;
    z_rd_addr   = idx_rd_data;
    h_wr_en     = (state == S_WR);
    h_wr_addr   = node;
    for (int k = 0; k < K*F; k++) h_wr_data[k*32 +: 32] = fp_elu(acc[k]);
    // attention term of the current edge, recomputed in both passes
    for (int k = 0; k < K; k++) begin
      ex[k]    = fp_exp(fp_lrelu(fp_add(el[k], s_rd_data[(K+k)*32 +: 32])));
      alpha[k] = fp_div(ex[k], den[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      node   <= '0;
      edge_q <= '0;
      beg_q  <= '0;
      end_q  <= '0;
      pass2  <= 1'b0;
      for (int k = 0; k < K; k++) begin
        el[k]  <= FP_ZERO;
        den[k] <= FP_ZERO;
      end
      for (int k = 0; k < K*F; k++) acc[k] <= FP_ZERO;
    end else begin
      case (state)
        S_IDLE, S_DONE: if (start) begin
          node  <= node_begin;
          state <= (node_begin < node_end) ? S_P0 : S_DONE;
        end
        S_P0: state <= S_P1;
        S_P1: begin
          beg_q  <= ptr_rd_data;
          edge_q <= ptr_rd_data;
          state  <= S_P2;
        end
        S_P2: begin
          end_q <= ptr_rd_data;
          state <= S_P3;
        end
        S_P3: begin
          for (int k = 0; k < K; k++) begin
            el[k]  <= s_rd_data[k*32 +: 32];
            den[k] <= FP_ZERO;
          end
          for (int k = 0; k < K*F; k++) acc[k] <= FP_ZERO;
          pass2 <= 1'b0;
          state <= (beg_q == end_q) ? S_WR : S_I0;
        end
        S_I0: state <= S_I1;
        S_I1: state <= S_C;
        S_C: begin
          if (!pass2) begin
            for (int k = 0; k < K; k++) den[k] <= fp_add(den[k], ex[k]);
          end else begin
            for (int k = 0; k < K; k++)
              for (int f = 0; f < F; f++)
                acc[k*F+f] <= fp_add(acc[k*F+f], fp_mul(alpha[k], z_rd_data[(k*F+f)*32 +: 32]));
          end
          if (edge_q + 32'd1 == end_q) begin
            edge_q <= beg_q;
            pass2  <= 1'b1;
            state  <= pass2 ? S_WR : S_I0;
          end else begin
            edge_q <= edge_q + 32'd1;
            state  <= S_I0;
          end
        end
        S_WR: begin
          node  <= node + 32'd1;
          state <= (node + 32'd1 < node_end) ? S_P0 : S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
