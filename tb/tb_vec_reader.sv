// tb_vec_reader: streams random addresses with tags through the read stage
// against a memory model, with random gaps on the input and random stalls
// on the output, and checks that every word and tag comes out once, in
// order; also checks the best-case rate of one word per two cycles.
// The read stage is the paper's; its rate of one word per two cycles is this
// design's and is what the test checks.
module tb_vec_reader;
  import tb_pkg::*;
  localparam int W = 64, NREQ = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid = 0, in_ready, rd_en, out_valid, out_ready = 0;
  logic [31:0]   in_addr = 0, rd_addr;
  logic [7:0]    in_tag = 0, out_tag;
  logic [W-1:0]  rd_data, out_data;

  vec_reader #(.W(W), .TW(8)) dut (.*);

  logic [W-1:0] mem [32];
  int unsigned  addrs [NREQ];
  int checks = 0, failures = 0, nout = 0, cyc = 0, t0;
  bit fast = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd_en) rd_data <= mem[rd_addr[4:0]];
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    out_ready <= fast ? 1'b1 : ($urandom % 3) != 0;
    if (out_valid && out_ready) begin
      checks++;
      if (out_tag != 8'(nout) || out_data != mem[addrs[nout % NREQ]]) begin
        failures++;
        $display("item %0d: tag %0d data %h", nout, out_tag, out_data);
      end
      nout++;
    end
  end

  initial begin
    for (int i = 0; i < 32; i++) mem[i] = {$urandom, $urandom};
    for (int i = 0; i < NREQ; i++) addrs[i] = $urandom % 32;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) begin
        fast = 1;
        @(posedge clk);
        t0 = cyc;
      end
      if (pass == 0) begin
        for (int i = 0; i < NREQ; i++) begin
          @(negedge clk);
          while (($urandom % 3) == 0) @(negedge clk);
          in_valid = 1; in_addr = addrs[i]; in_tag = 8'(i);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      end else begin
        // back-to-back requests: a new one as soon as the last was taken
        int i;
        i = 0;
        @(negedge clk);
        while (i < NREQ) begin
          in_valid = 1; in_addr = addrs[i]; in_tag = 8'(NREQ + i);
          @(posedge clk);
          if (in_ready) i++;
          @(negedge clk);
        end
        in_valid = 0;
      end
      while (nout < (pass + 1) * NREQ) @(posedge clk);
    end
    checks++;
    if (cyc - t0 > 2 * NREQ + 4) begin
      failures++;
      $display("unstalled stream took %0d cycles for %0d words", cyc - t0, NREQ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
