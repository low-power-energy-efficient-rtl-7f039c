// tb_loop_buffer: write a pseudo-random pattern to every word of the
// loop buffer, read it back with the one-cycle read latency, and check that
// a disabled cycle neither writes nor changes the read register.
module tb_loop_buffer;
  localparam int DEPTH = 65536;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, we = 0;
  logic [15:0] addr = 0, wdata = 0, rdata;
  always #5 clk = !clk;
  loop_buffer #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [15:0] pat(int a);
    return 16'((a * 40503) ^ (a >> 3) ^ 16'h5a3c);
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 16'(a); wdata = pat(a);
    end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); en = 1; we = 0; addr = 16'(a);
      @(negedge clk); en = 0; we = 1; addr = 16'(a); wdata = 16'hdead;   // disabled: no effect
      checks++;
      if (rdata != pat(a)) begin failures++; if (failures < 10) $display("addr %0d: %h exp %h", a, rdata, pat(a)); end
    end
    @(negedge clk); en = 1; we = 0; addr = 16'd77;
    @(negedge clk); en = 0;
    checks++;
    if (rdata != pat(77)) begin failures++; $display("disabled write took effect"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
