// tb_relu_requant: checks rounding, saturation and ReLU of the layer output
// stage against the golden model, with and without ReLU.
module tb_relu_requant;
  import afd_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  mac_t acc;
  act_t y_relu, y_lin;
  relu_requant #(.RELU(1'b1)) dut_r (.acc(acc), .y(y_relu));
  relu_requant #(.RELU(1'b0)) dut_l (.acc(acc), .y(y_lin));

  task automatic check(longint v);
    longint e;
    acc = mac_t'(v);
    #1;
    e = satw(rnd(v, 4), 16);
    checks++;
    if (longint'(y_lin) != e) begin failures++; $display("lin %0d: got %0d exp %0d", v, y_lin, e); end
    checks++;
    if (longint'(y_relu) != ((e < 0) ? 0 : e)) begin failures++; $display("relu %0d: got %0d", v, y_relu); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // rounding ties away from zero, saturation at both ends
    check(0); check(8); check(7); check(-8); check(-7); check(24); check(-24);
    check(524272); check(524280); check(-524288); check(-524296); check(2000000000); check(-2000000000);
    for (int i = 0; i < 500; i++) check(longint'(int'($urandom)) >>> ($urandom_range(12)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
