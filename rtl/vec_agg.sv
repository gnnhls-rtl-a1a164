// vec_agg: the "Agg" (combine) stage. It adds up, element by element, the
// feature vectors of all neighbours of one target vertex and emits the sum and
// the number of vectors added when the beat marked last arrives.
//
// Input beats carry an N-element fp32 vector, a last flag, an empty flag (the
// vertex has no neighbours: the beat's vector is ignored) and a tag that is
// passed on with the sum. Additions run in neighbour order, one beat per
// cycle, with N fp32 adders; an input beat is taken whenever the output
// register is free. The sum is available the cycle after the last beat.
// The paper gives the function (sum of h_j); the one-adder-per-element
// structure is this design's.
module vec_agg
  import gnn_pkg::*;
#(
  parameter int unsigned N  = 128,
  parameter int unsigned TW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [N*32-1:0] in_vec,
  input  logic            in_last,
  input  logic            in_empty,
  input  logic [TW-1:0]   in_tag,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [N*32-1:0] out_sum,
  output logic [31:0]     out_cnt,
  output logic [TW-1:0]   out_tag
);

  logic [N*32-1:0] acc, acc_nx;
  logic [31:0]     cnt;

  assign in_ready = !out_valid || out_ready;

  always_comb begin
    for (int k = 0; k < N; k++)
      acc_nx[k*32 +: 32] = fp_add(acc[k*32 +: 32], in_vec[k*32 +: 32]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_sum   <= '0;
      out_cnt   <= '0;
      out_tag   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_last) begin
          out_valid <= 1'b1;
          out_sum   <= in_empty ? acc : acc_nx;
          out_cnt   <= in_empty ? cnt : cnt + 32'd1;
          out_tag   <= in_tag;
          acc       <= '0;
          cnt       <= '0;
        end else if (!in_empty) begin
          acc <= acc_nx;
          cnt <= cnt + 32'd1;
        end
      end
    end
  end

endmodule
