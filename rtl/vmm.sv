// vmm: vector-matrix multiplication with a weight matrix held on chip,
// y = Wt * x, with x of DIN and y of DOUT fp32 elements.
//
// The source paper splits its VMM into a grouped-multiply and a sum function
// so that it starts a new vector every d+36 cycles instead of d^2. This block
// follows the same idea in its simplest form: in each cycle it takes one input
// element x[c], multiplies it by the column c of the matrix with DOUT
// multipliers and adds the products into DOUT accumulators. A vector takes DIN
// cycles; the result is offered DIN+1 cycles after the vector is taken, and held
// until taken. A new vector is accepted only when the unit is idle, so one
// vector is in the unit at a time (this design's choice).
//
// Weights are written one element at a time: w_row is the output index r and
// w_col the input index c of element W[r][c]. A tag travels with each vector.
module vmm
  import gnn_pkg::*;
#(
  parameter int unsigned DIN  = 128,
  parameter int unsigned DOUT = 128,
  parameter int unsigned TW   = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight load
  input  logic               w_we,
  input  logic [15:0]        w_row,
  input  logic [15:0]        w_col,
  input  fp32_t              w_data,
  // input vector stream
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [DIN*32-1:0]  in_vec,
  input  logic [TW-1:0]      in_tag,
  // output vector stream
  output logic               out_valid,
  input  logic               out_ready,
  output logic [DOUT*32-1:0] out_vec,
  output logic [TW-1:0]      out_tag
);

  localparam int unsigned CW = $clog2(DIN + 1);

  fp32_t              wmem [DIN][DOUT];  // indexed by input column, then output row
  logic [DIN*32-1:0]  x_q;
  logic [CW-1:0]      col;
  logic               busy;
  logic [DOUT*32-1:0] acc_nx;
  fp32_t              xc;

  assign in_ready = !busy && !out_valid;
  assign xc       = x_q[col*32 +: 32];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_col][w_row] <= w_data;
  end

  always_comb begin
    for (int r = 0; r < DOUT; r++)
      acc_nx[r*32 +: 32] = fp_add(out_vec[r*32 +: 32], fp_mul(wmem[col][r], xc));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      col       <= '0;
      x_q       <= '0;
      out_vec   <= '0;
      out_tag   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        busy    <= 1'b1;
        col     <= '0;
        x_q     <= in_vec;
        out_tag <= in_tag;
        out_vec <= '0;
      end else if (busy) begin
        out_vec <= acc_nx;
        if (col == CW'(DIN - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_vec));

endmodule
