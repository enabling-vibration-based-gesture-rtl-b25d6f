// tb_conv1d_bn: self-checking test of conv1d_bn at a short window.
// Drives the layer's input port from a behavioural one-cycle-latency memory,
// runs two passes with different random windows (the second also checks
// that lowering enable rearms the layer), compares every output word with
// gesture_ref_pkg::conv_ref, and checks the pass length against
// LEN*C_OUT*(2*K*C_IN+2) + 2 clocks.
module tb_conv1d_bn;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 6, CI = 4, CO = 8, LEN = 12, K = 3, SEED = 5;
  localparam int ZI = -2, ZW = 1, ZO = 1, MULT = 60, SHIFT = 12;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, done;
  logic [ADDR_W-1:0] in_addr, out_addr = '0;
  logic signed [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  iarr_t x, y;
  int xmem [LEN * CI];

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    in_data <= (int'(in_addr) < LEN * CI) ? DW'(xmem[int'(in_addr)]) : '0;

  conv1d_bn #(.DATA_W(DW), .C_IN(CI), .C_OUT(CO), .LEN(LEN), .K(K), .SEED(SEED),
              .Z_IN(ZI), .Z_W(ZW), .Z_OUT(ZO), .MULT(MULT), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .enable, .done, .in_addr, .in_data, .out_addr, .out_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass();
    int cycles = 0;
    x = rand_window(LEN * CI, DW);
    foreach (x[i]) xmem[i] = x[i];
    y = conv_ref(x, CI, CO, LEN, K, SEED, ZI, ZW, ZO, MULT, SHIFT, DW);
    @(negedge clk) enable = 1'b1;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != LEN * CO * (2 * K * CI + 2) + 2) begin
      failures++;
      $display("cycle count %0d, expected %0d", cycles, LEN * CO * (2 * K * CI + 2) + 2);
    end
    for (int i = 0; i < LEN * CO; i++) begin
      out_addr = ADDR_W'(i);
      @(negedge clk);
      checks++;
      if (int'(out_data) != y[i]) begin
        failures++;
        $display("out[%0d] = %0d, expected %0d", i, out_data, y[i]);
      end
    end
    @(negedge clk) enable = 1'b0;
    @(negedge clk);
    checks++;
    if (done) begin failures++; $display("done not cleared"); end
  endtask

  initial begin
    n_pad = 0; n_sat = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_pass();
    run_pass();
    checks++;
    if (n_pad == 0 || n_sat == 0) begin
      failures++;
      $display("padding (%0d) or saturation (%0d) never exercised", n_pad, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
