// monet_kernel: the MoNet layer built from two compute units (monet_cu), as
// in the source paper, which creates two units that process vertices with
// distinct indices. The vertex range [node_begin, node_end) is split at its
// midpoint: unit 0 takes the lower half, unit 1 the upper half. Each unit has
// its own memory ports (index [c] of every port array) and its own copy of
// all parameters; a parameter write goes to both. done rises when both units
// have finished. See monet_cu for the arithmetic and the parameter map.
module monet_kernel
  import gnn_pkg::*;
#(
  parameter int unsigned DIN  = 64,
  parameter int unsigned K    = 2,
  parameter int unsigned DOUT = 64,
  parameter int unsigned NCU  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        node_begin,
  input  logic [31:0]        node_end,
  output logic               done,
  input  logic               w_we,
  input  logic [3:0]         w_sel,
  input  logic [15:0]        w_row,
  input  logic [15:0]        w_col,
  input  fp32_t              w_data,
  output logic               ptr_rd_en   [NCU],
  output logic [31:0]        ptr_rd_addr [NCU],
  input  logic [31:0]        ptr_rd_data [NCU],
  output logic               idx_rd_en   [NCU],
  output logic [31:0]        idx_rd_addr [NCU],
  input  logic [31:0]        idx_rd_data [NCU],
  output logic               ps_rd_en    [NCU],
  output logic [31:0]        ps_rd_addr  [NCU],
  input  logic [63:0]        ps_rd_data  [NCU],
  output logic               h_rd_en     [NCU],
  output logic [31:0]        h_rd_addr   [NCU],
  input  logic [DIN*32-1:0]  h_rd_data   [NCU],
  output logic               h_wr_en     [NCU],
  output logic [31:0]        h_wr_addr   [NCU],
  output logic [DOUT*32-1:0] h_wr_data   [NCU]
);

  logic [NCU-1:0] cu_done;
  logic [31:0]    span;

  assign span = node_end - node_begin;

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    logic [31:0] lo, hi;
    assign lo = node_begin + 32'((64'(span) * c) / NCU);
    assign hi = node_begin + 32'((64'(span) * (c + 1)) / NCU);
    monet_cu #(.DIN(DIN), .K(K), .DOUT(DOUT)) u_cu (
      .clk, .rst_n, .start, .node_begin(lo), .node_end(hi), .done(cu_done[c]),
      .w_we, .w_sel, .w_row, .w_col, .w_data,
      .ptr_rd_en(ptr_rd_en[c]), .ptr_rd_addr(ptr_rd_addr[c]), .ptr_rd_data(ptr_rd_data[c]),
      .idx_rd_en(idx_rd_en[c]), .idx_rd_addr(idx_rd_addr[c]), .idx_rd_data(idx_rd_data[c]),
      .ps_rd_en(ps_rd_en[c]), .ps_rd_addr(ps_rd_addr[c]), .ps_rd_data(ps_rd_data[c]),
      .h_rd_en(h_rd_en[c]), .h_rd_addr(h_rd_addr[c]), .h_rd_data(h_rd_data[c]),
      .h_wr_en(h_wr_en[c]), .h_wr_addr(h_wr_addr[c]), .h_wr_data(h_wr_data[c])
    );
  end

  assign done = &cu_done;

endmodule
