// tb_gesture_accel: end-to-end test of gesture_accel at short windows.
// Three configurations run side by side, two inferences each:
//   A  1D-CNN,    6-bit, 3 blocks, 70 steps (odd lengths after pooling)
//   B  1D-SepCNN, 8-bit, 3 blocks, 70 steps (ping-pong hand-overs)
//   C  1D-CNN,    6-bit, 5 blocks, 96 steps (channel widths 4,4,8,8,16)
//   D  1D-CNN,    4-bit, 1 block,  40 steps (no pooling layer at all)
//   E  1D-SepCNN, 4-bit, 2 blocks, 33 steps
// Each compares the logits with the reference network and the latency
// with the layer-by-layer cycle formula. The test also requires that every
// mechanism of the design happened at least once: convolution padding,
// requantization saturation, ReLU clamping, dropping an odd pooling step,
// ping-pong hand-over and rearming for a second inference.
module tb_gesture_accel;
  import gesture_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fin_a, fin_b, fin_c, fin_d, fin_e;
  int ck_a, ck_b, ck_c, ck_d, ck_e, fl_a, fl_b, fl_c, fl_d, fl_e;
  int ho_a, ho_b, ho_c, ho_d, ho_e;

  accel_harness #(.DATA_W(6), .NUM_BLOCKS(3), .SEPARABLE(1'b0), .N_IN(70)) h_a (
    .clk, .finished(fin_a), .checks(ck_a), .failures(fl_a), .handoffs(ho_a));
  accel_harness #(.DATA_W(8), .NUM_BLOCKS(3), .SEPARABLE(1'b1), .N_IN(70)) h_b (
    .clk, .finished(fin_b), .checks(ck_b), .failures(fl_b), .handoffs(ho_b));
  accel_harness #(.DATA_W(6), .NUM_BLOCKS(5), .SEPARABLE(1'b0), .N_IN(96)) h_c (
    .clk, .finished(fin_c), .checks(ck_c), .failures(fl_c), .handoffs(ho_c));
  accel_harness #(.DATA_W(4), .NUM_BLOCKS(1), .SEPARABLE(1'b0), .N_IN(40)) h_d (
    .clk, .finished(fin_d), .checks(ck_d), .failures(fl_d), .handoffs(ho_d));
  accel_harness #(.DATA_W(4), .NUM_BLOCKS(2), .SEPARABLE(1'b1), .N_IN(33)) h_e (
    .clk, .finished(fin_e), .checks(ck_e), .failures(fl_e), .handoffs(ho_e));

  int checks, failures;

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ck_a + ck_b + ck_c + ck_d + ck_e,
             fl_a + fl_b + fl_c + fl_d + fl_e + 1);
    $finish;
  end

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s happened %0d times", what, count);
    if (count == 0) begin failures++; $display("  never exercised"); end
  endtask

  initial begin
    n_pad = 0; n_sat = 0; n_relu_clamp = 0; n_pool_drop = 0;
    wait (fin_a && fin_b && fin_c && fin_d && fin_e);
    checks   = ck_a + ck_b + ck_c + ck_d + ck_e;
    failures = fl_a + fl_b + fl_c + fl_d + fl_e;
    need("convolution padding", n_pad);
    need("requantization saturation", n_sat);
    need("ReLU clamp", n_relu_clamp);
    need("odd pooling step dropped", n_pool_drop);
    need("ping-pong hand-over", ho_b);
    need("rearm / second inference", (fin_a && fin_b && fin_c && fin_d && fin_e) ? 5 : 0);
    checks++;
    if (ho_b != 2 * 70 || ho_e != 2 * 33) begin
      failures++;
      $display("hand-overs %0d and %0d, expected %0d and %0d", ho_b, ho_e, 2 * 70, 2 * 33);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
