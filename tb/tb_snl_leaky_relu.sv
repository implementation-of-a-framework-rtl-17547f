// tb_snl_leaky_relu: checks the Leaky ReLU activator against an integer
// reference, y = x for x >= 0 and floor(x * 77 / 256) below zero, over the
// edge values and 4000 random inputs. Combinational block: no clock, the
// watchdog counts time steps instead.
module tb_snl_leaky_relu;
  int checks = 0, failures = 0;
  logic signed [15:0] x, y;

  snl_leaky_relu #(.WIDTH(16), .ALPHA(77), .ALPHA_SHIFT(8)) dut (.x, .y);

  function automatic int ref_lrelu(int v);
    int p;
    if (v >= 0) return v;
    p = v * 77;
    // floor division by 256
    return (p - ((p % 256 + 256) % 256)) / 256;
  endfunction

  task automatic check(int v);
    x = 16'(v);
    #1;
    checks++;
    if (int'(y) != ref_lrelu(v)) begin
      failures++;
      $display("FAIL x=%0d y=%0d expected %0d", v, y, ref_lrelu(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(1); check(-1); check(32767); check(-32768); check(-256); check(-255);
    check(256); check(-1000);
    for (int i = 0; i < 4000; i++) check(int'($signed(16'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
