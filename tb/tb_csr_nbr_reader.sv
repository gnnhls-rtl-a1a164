// tb_csr_nbr_reader: builds a random CSR graph with some vertices of degree
// zero, walks a sub-range of it with random back-pressure and checks every
// emitted beat (vertex, edge, neighbour, degree, last, empty) against the
// expected walk, then checks done and the cycle count of an unstalled walk
// (3 cycles per vertex for the pointers plus 3 per edge).
// The CSR walk is the paper's; the beat format and the cycle schedule checked
// here are this design's, since the paper gives no rate for this stage.
module tb_csr_nbr_reader;
  localparam int N = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start = 0, done;
  logic [31:0] node_begin = 0, node_end = 0;
  logic        ptr_rd_en, idx_rd_en;
  logic [31:0] ptr_rd_addr, idx_rd_addr, ptr_rd_data, idx_rd_data;
  logic        out_valid, out_ready = 0, out_last, out_empty;
  logic [31:0] out_node, out_edge, out_nbr, out_deg;

  csr_nbr_reader dut (.*);

  int unsigned ptr [N+1];
  int unsigned col [64];
  int checks = 0, failures = 0, cyc = 0;
  int exp_node, exp_edge, t0;
  bit stall = 1;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ptr_rd_en) ptr_rd_data <= ptr[ptr_rd_addr];
    if (idx_rd_en) idx_rd_data <= col[idx_rd_addr];
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    out_ready <= stall ? ($urandom % 2) == 1 : 1'b1;
    if (out_valid && out_ready) begin
      int deg;
      deg = ptr[exp_node+1] - ptr[exp_node];
      checks++;
      if (out_node != exp_node || out_deg != deg || out_empty != (deg == 0) ||
          (deg != 0 && (out_edge != exp_edge || out_nbr != col[exp_edge] ||
                        out_last != (exp_edge + 1 == ptr[exp_node+1]))) ||
          (deg == 0 && !out_last)) begin
        failures++;
        $display("bad beat node %0d edge %0d nbr %0d last %0b empty %0b (exp node %0d edge %0d)",
                 out_node, out_edge, out_nbr, out_last, out_empty, exp_node, exp_edge);
      end
      if (deg == 0 || exp_edge + 1 == ptr[exp_node+1]) begin
        exp_node++;
        exp_edge = ptr[exp_node];
      end else exp_edge++;
    end
  end

  task automatic run(input int b, input int e);
    exp_node = b;
    exp_edge = ptr[b];
    @(negedge clk);
    node_begin = b; node_end = e; start = 1;
    @(negedge clk) start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    checks++;
    if (exp_node != e) begin
      failures++;
      $display("walk ended at %0d, expected %0d", exp_node, e);
    end
  endtask

  initial begin
    ptr[0] = 0;
    for (int i = 0; i < N; i++) begin
      int d;
      d = (i % 4 == 1) ? 0 : 1 + ($urandom % 4);
      ptr[i+1] = ptr[i] + d;
      for (int k = 0; k < d; k++) col[ptr[i] + k] = $urandom % N;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    run(0, N);
    run(3, 9);
    stall = 0;
    run(2, 7);
    begin
      int expc;
      expc = 3 * 5 + 3 * (ptr[7] - ptr[2]);  // 3 per vertex, 3 per edge
      checks++;
      if (cyc - t0 != expc + 1) begin  // +1: the empty vertex 5 emits one beat
        failures++;
        $display("cycles %0d expected %0d", cyc - t0, expc + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
