// csr_nbr_reader: walks a range of target vertices of a graph stored in
// compressed sparse row (CSR) form and streams one beat per incoming edge.
//
// For each vertex i in [node_begin, node_end) it reads the row pointers
// ptr[i] and ptr[i+1] ("CSR Ptr" stage), then reads the neighbour index
// col[e] of every edge e in [ptr[i], ptr[i+1]) ("Nbr Idx" stage) and emits
// {node i, edge e, neighbour j, degree, last}. A vertex without neighbours
// still emits one beat, flagged empty and last, with edge and neighbour 0, so
// that every downstream stage sees exactly one end-of-vertex marker per vertex.
// The two stages follow the source paper; folding them into one controller and
// the empty-vertex marker are this design's choices.
//
// Memory ports are synchronous reads: data for an address presented with
// *_rd_en in cycle t is on *_rd_data in cycle t+1. The memories never stall.
// The output is a valid/ready stream; the reader holds a beat until it is
// taken. Timing: three cycles per vertex for the pointers, then three per
// edge (index read, data, hand-over) plus consumer stalls. done rises after the
// last beat has been taken and stays high until the next start.
module csr_nbr_reader (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] node_begin,
  input  logic [31:0] node_end,
  output logic        done,
  // row pointer memory
  output logic        ptr_rd_en,
  output logic [31:0] ptr_rd_addr,
  input  logic [31:0] ptr_rd_data,
  // neighbour index memory
  output logic        idx_rd_en,
  output logic [31:0] idx_rd_addr,
  input  logic [31:0] idx_rd_data,
  // edge stream
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_node,
  output logic [31:0] out_edge,
  output logic [31:0] out_nbr,
  output logic [31:0] out_deg,
  output logic        out_last,
  output logic        out_empty
);

  typedef enum logic [2:0] {S_IDLE, S_PTR0, S_PTR1, S_PTRW, S_IDX, S_IDXW, S_OUT, S_DONE} state_t;
  state_t      state;
  logic [31:0] node, edge_q, beg_q, end_q;

  assign done      = (state == S_DONE);
  assign out_valid = (state == S_OUT);
  assign out_node  = node;
  assign out_deg   = end_q - beg_q;
  assign out_empty = (end_q == beg_q);
  assign out_last  = out_empty || (edge_q + 32'd1 == end_q);
  assign out_edge  = out_empty ? 32'd0 : edge_q;

  always_comb begin
    ptr_rd_en   = 1'b0;
    ptr_rd_addr = node;
    idx_rd_en   = 1'b0;
    idx_rd_addr = edge_q;
    case (state)
      S_PTR0: ptr_rd_en = 1'b1;
      S_PTR1: begin
        ptr_rd_en   = 1'b1;
        ptr_rd_addr = node + 32'd1;
      end
      S_IDX: idx_rd_en = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      node    <= '0;
      edge_q  <= '0;
      beg_q   <= '0;
      end_q   <= '0;
      out_nbr <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: if (start) begin
          node  <= node_begin;
          state <= (node_begin < node_end) ? S_PTR0 : S_DONE;
        end
        S_PTR0: state <= S_PTR1;
        S_PTR1: begin
          beg_q  <= ptr_rd_data;
          edge_q <= ptr_rd_data;
          state  <= S_PTRW;
        end
        S_PTRW: begin
          end_q   <= ptr_rd_data;
          out_nbr <= '0;
          state   <= (ptr_rd_data == beg_q) ? S_OUT : S_IDX;
        end
        S_IDX:  state <= S_IDXW;
        S_IDXW: begin
          out_nbr <= idx_rd_data;
          state   <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (out_last) begin
            node  <= node + 32'd1;
            state <= (node + 32'd1 < node_end) ? S_PTR0 : S_DONE;
          end else begin
            edge_q <= edge_q + 32'd1;
            state  <= S_IDX;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a beat, once offered, stays until taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_nbr);
  endproperty
  assert property (p_hold);

endmodule
