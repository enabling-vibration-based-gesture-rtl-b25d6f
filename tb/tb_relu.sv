// tb_relu: exhaustive test of relu for two zero points; every signed input
// value is applied and the output compared with max(x, zero point).
module tb_relu;
  localparam int DW = 6;
  logic signed [DW-1:0] din, dout_a, dout_b;
  int checks = 0, failures = 0;

  relu #(.DATA_W(DW), .ZERO(-3)) dut_a (.din, .dout(dout_a));
  relu #(.DATA_W(DW), .ZERO(5))  dut_b (.din, .dout(dout_b));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -(1 << (DW - 1)); v < (1 << (DW - 1)); v++) begin
      din = DW'(v);
      #1;
      checks += 2;
      if (int'(dout_a) != ((v < -3) ? -3 : v)) begin
        failures++;
        $display("ZERO=-3: relu(%0d) = %0d", v, dout_a);
      end
      if (int'(dout_b) != ((v < 5) ? 5 : v)) begin
        failures++;
        $display("ZERO=5: relu(%0d) = %0d", v, dout_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
