// vec_reader: one "Memory Read" stage of a kernel's dataflow. It takes a
// stream of addresses, each with a tag, reads one word per address from an
// off-chip memory port and streams {data, tag} on.
//
// A word holds a whole feature vector (W bits), so one request fetches all of
// h_j, h_i, e_ij or a pseudo-coordinate pair at once. This models the widened
// memory ports and burst reads of the source paper in the simplest form; the
// single-beat word is this design's choice.
//
// The memory port is a synchronous read (data one cycle after rd_en) that
// never stalls. One read is in flight at a time and the result is held in an
// output register until taken, so the stage sustains one word every two
// cycles. Tags are passed through unchanged.
module vec_reader #(
  parameter int unsigned W  = 32,
  parameter int unsigned TW = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [31:0]   in_addr,
  input  logic [TW-1:0] in_tag,
  output logic          rd_en,
  output logic [31:0]   rd_addr,
  input  logic [W-1:0]  rd_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic [TW-1:0] out_tag
);

  logic pend;

  assign in_ready = !pend && (!out_valid || out_ready);
  assign rd_en    = in_valid && in_ready;
  assign rd_addr  = in_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_en) begin
        pend    <= 1'b1;
        out_tag <= in_tag;
      end
      if (pend) begin
        pend      <= 1'b0;
        out_valid <= 1'b1;
        out_data  <= rd_data;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid);

endmodule
