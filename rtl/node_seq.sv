// node_seq: issues the target vertex indices node_begin .. node_end-1 as a
// valid/ready stream, one per cycle when taken. It feeds the "read h_i"
// stage of kernels that need the target vertex's own features next to the
// neighbour walk; both paths visit vertices in the same order, so their
// results pair up in order without further matching.
// The paper draws the target-vertex read as its own stage; this small counter
// that drives it is this design's.
module node_seq (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] node_begin,
  input  logic [31:0] node_end,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_node
);
  logic        run;
  logic [31:0] last_q;

  assign out_valid = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      out_node <= '0;
      last_q   <= '0;
    end else if (start) begin
      run      <= node_begin < node_end;
      out_node <= node_begin;
      last_q   <= node_end;
    end else if (run && out_ready) begin
      out_node <= out_node + 32'd1;
      run      <= out_node + 32'd1 < last_q;
    end
  end
endmodule
