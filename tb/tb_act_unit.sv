// tb_act_unit: sweeps the accumulator input over a wide range in both modes
// and compares with a reference ReLU (with 16-bit saturation) and the
// three-segment tanh curve (0.5 = 128, 1.5 = 384, 1.0 = 256 in Q.8).
module tb_act_unit;
  import permdnn_pkg::*;
  act_fn_e fn;
  logic signed [23:0] a;
  logic signed [15:0] y, e;
  int checks = 0, failures = 0;
  act_unit dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic signed [15:0] ref_y(input bit th, input logic signed [23:0] v);
    int m, t;
    if (!th) return (v < 0) ? 16'sd0 : (v > 32767) ? 16'sh7fff : v[15:0];
    m = (v < 0) ? -v : v;
    t = (m < 128) ? m : (m < 384) ? 64 + m / 2 : 256;
    return (v < 0) ? 16'(-t) : 16'(t);
  endfunction
  initial begin
    for (int th = 0; th < 2; th++)
      for (int i = -1000; i <= 1000; i++) begin
        fn = th ? ACT_TANH : ACT_RELU;
        a = (i % 4 == 0) ? 24'(i * 97) : 24'(i);
        #1; e = ref_y(th != 0, a);
        checks++;
        if (y !== e) begin failures++; if (failures < 10) $display("FAIL fn=%0d a=%0d y=%0d exp %0d", th, a, y, e); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
