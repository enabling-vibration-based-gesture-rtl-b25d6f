// tb_gesture_full: one complete inference of gesture_accel with every
// parameter at its default (3-block 1D-CNN, 6-bit, 4410 x 4 window).
// Writes a random window with per-channel offsets, runs the accelerator,
// compares the four logits with the reference network and the latency with
// the layer-by-layer cycle formula (about 1.0 M clocks, 10.0 ms at 100 MHz),
// and checks that done falls again after en is lowered.
module tb_gesture_full;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 6, NB = 3, C0 = 4, N = 4410, K = 3, HIDDEN = 4, NCLS = 4;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, done;
  logic in_wr_en = 1'b0;
  logic [ADDR_W-1:0] in_wr_addr = '0, out_addr = '0;
  logic signed [DW-1:0] in_wr_data = '0, out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gesture_accel dut (
    .clk, .rst_n, .en, .done, .in_wr_en, .in_wr_addr, .in_wr_data,
    .out_addr, .out_data);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iarr_t x, y;
    longint cycles, want;
    x = rand_window(N * C0, DW);
    for (int c = 0; c < C0; c++) begin
      automatic int off = int'($urandom % 32) - 16;
      for (int t = 0; t < N; t++) begin
        automatic int v = x[t * C0 + c] / 2 + off;
        x[t * C0 + c] = (v > 31) ? 31 : (v < -32) ? -32 : v;
      end
    end
    y = net_ref(x, DW, NB, 1'b0, C0, N, K, HIDDEN, NCLS, 0);
    want = net_cycles(NB, 1'b0, C0, N, K, HIDDEN, NCLS);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N * C0; i++) begin
      @(negedge clk);
      in_wr_en = 1'b1; in_wr_addr = ADDR_W'(i); in_wr_data = DW'(x[i]);
    end
    @(negedge clk) in_wr_en = 1'b0;
    en = 1'b1;
    cycles = 0;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != want) begin
      failures++;
      $display("latency %0d clocks, expected %0d", cycles, want);
    end
    $display("latency %0d clocks = %0.3f ms at 100 MHz", cycles, real'(cycles) / 1.0e5);
    for (int i = 0; i < NCLS; i++) begin
      out_addr = ADDR_W'(i);
      @(negedge clk);
      checks++;
      if (int'(out_data) != y[i]) begin
        failures++;
        $display("logit %0d = %0d, expected %0d", i, out_data, y[i]);
      end
    end
    $display("logits %p", y);
    en = 1'b0;
    repeat (2 * NB + 2) @(negedge clk);
    checks++;
    if (done) begin failures++; $display("done not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
