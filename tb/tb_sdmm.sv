// tb_sdmm: drives random a < q, signed-magnitude b0/b1 and s every cycle and
// compares d0/d1, two cycles later, with a reference computed here.
module tb_sdmm;
  localparam int Q = 7681;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [12:0] a;
  logic [5:0] b0, b1;
  logic [1:0] s;
  logic out_valid;
  logic [12:0] d0, d1;
  int checks = 0, failures = 0;

  sdmm dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_mul(int av, logic [5:0] bv, logic sx);
    int m = (av * int'(bv[4:0])) % Q;
    if ((bv[5] ^ sx) && m != 0) m = Q - m;
    return m;
  endfunction

  int exp0 [$], exp1 [$], expv [$];

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (expv.size() == 0) begin
        failures++; $display("FAIL unexpected out_valid");
      end else begin
        int e0, e1;
        e0 = exp0.pop_front();
        e1 = exp1.pop_front();
        void'(expv.pop_front());
        if (d0 != 13'(e0) || d1 != 13'(e1)) begin
          failures++;
          if (failures < 10) $display("FAIL d0=%0d exp %0d d1=%0d exp %0d", d0, e0, d1, e1);
        end
      end
    end
    if (in_valid) begin
      exp0.push_back(ref_mul(a, b0, s[0]));
      exp1.push_back(ref_mul(a, b1, s[1]));
      expv.push_back(1);
    end
  end

  initial begin
    in_valid = 0; a = 0; b0 = 0; b1 = 0; s = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency check: one isolated beat, out_valid exactly 2 cycles later
    @(negedge clk); in_valid = 1; a = 13'd7680; b0 = 6'h1f; b1 = 6'h3f; s = 2'b00;
    @(negedge clk); in_valid = 0;
    checks++;
    if (out_valid) begin failures++; $display("FAIL early valid"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency is not 2 cycles"); end
    @(negedge clk);
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      a  = 13'($urandom % Q);
      b0 = 6'($urandom);
      b1 = 6'($urandom);
      s  = 2'($urandom);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (expv.size() != 0) begin failures++; $display("FAIL %0d results missing", expv.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
