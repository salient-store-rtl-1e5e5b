// tb_mod_reduce: checks mod_reduce against x % q for the corner values and
// 20000 random 18-bit inputs, including the one-cycle latency.
module tb_mod_reduce;
  localparam int Q = 7681;
  logic clk = 0;
  logic [17:0] x;
  logic [12:0] r;
  int checks = 0, failures = 0;

  mod_reduce dut (.clk, .x, .r);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [17:0] v);
    x = v;
    @(posedge clk); #1;
    checks++;
    if (r !== 13'(v % Q)) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d r=%0d exp=%0d", v, r, v % Q);
    end
  endtask

  initial begin
    x = 0;
    @(posedge clk); #1;
    check(0); check(Q - 1); check(Q); check(2*Q); check(3*Q - 1); check(3*Q);
    check(18'h3ffff); check((Q-1)*31); check(8191); check(8192);
    for (int i = 0; i < 20000; i++) check(18'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
