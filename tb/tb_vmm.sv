// tb_vmm: checks the vector-matrix unit against a real-valued product for
// random weights and vectors, including back-pressure on the output, and
// checks that a vector takes DIN+1 cycles from acceptance to result. The VMM
// itself is named by the paper; its column-serial schedule and thus the
// latency checked here are this design's (the paper reports d+36 for its
// Vitis build).
module tb_vmm;
  import tb_pkg::*;

  localparam int DIN = 16, DOUT = 8, NV = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               w_we = 0;
  logic [15:0]        w_row = 0, w_col = 0;
  logic [31:0]        w_data = 0;
  logic               in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [DIN*32-1:0]  in_vec = '0;
  logic [DOUT*32-1:0] out_vec;
  logic [7:0]         in_tag = 0, out_tag;

  vmm #(.DIN(DIN), .DOUT(DOUT), .TW(8)) dut (.*);

  real W [DOUT][DIN];
  real X [NV][DIN];
  int  checks = 0, failures = 0, cyc = 0, t_in, t_out, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: random stalls, compare each result
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom % 3) != 0;
    if (out_valid && out_ready) begin
      for (int r = 0; r < DOUT; r++) begin
        real e;
        e = 0.0;
        for (int c = 0; c < DIN; c++) e += W[r][c] * X[out_tag][c];
        checks++;
        if (!near(f2r(out_vec[r*32 +: 32]), e, 1e-4, 1e-4)) begin
          failures++;
          $display("mismatch v%0d r%0d got %f exp %f", out_tag, r, f2r(out_vec[r*32 +: 32]), e);
        end
      end
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < DOUT; r++)
      for (int c = 0; c < DIN; c++) begin
        W[r][c] = rnd(1.0);
        @(negedge clk);
        w_we = 1; w_row = 16'(r); w_col = 16'(c); w_data = r2f(W[r][c]);
        W[r][c] = f2r(w_data);
      end
    @(negedge clk) w_we = 0;
    for (int v = 0; v < NV; v++) begin
      for (int c = 0; c < DIN; c++) begin
        X[v][c] = f2r(r2f(rnd(2.0)));
        in_vec[c*32 +: 32] = r2f(X[v][c]);
      end
      in_tag = 8'(v);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t_in = cyc;
      @(negedge clk) in_valid = 0;
      if (v == 0) begin
        while (!out_valid) @(posedge clk);
        t_out = cyc;
        checks++;
        // accepted at t_in, DIN accumulate cycles, result visible after
        if (t_out - t_in != DIN + 1) begin
          failures++;
          $display("latency %0d expected %0d", t_out - t_in, DIN + 1);
        end
      end
    end
    while (nout < NV) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
