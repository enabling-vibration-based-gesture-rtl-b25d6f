// tb_gesture_workloads: the six model configurations selected for the
// three data-splitting settings, each run through one full-length inference
// (4410 x 4 window) and checked against the reference network and the
// cycle formula. Configurations (blocks, bit width, model):
//   PS    1D-CNN    3 blocks  6 bit     PS    1D-SepCNN 3 blocks 8 bit
//   LOSO  1D-CNN    5 blocks  6 bit     LOSO  1D-SepCNN 3 blocks 6 bit
//   AOS   1D-CNN    4 blocks  8 bit     AOS   1D-SepCNN 5 blocks 8 bit
// The latency of each is printed in clocks and in ms at 100 MHz.
module tb_gesture_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 6;
  logic fin [NW];
  int ck [NW], fl [NW], ho [NW];

  accel_harness #(.DATA_W(6), .NUM_BLOCKS(3), .SEPARABLE(1'b0), .N_IN(4410), .INFERENCES(1))
    h_ps_cnn (.clk, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]), .handoffs(ho[0]));
  accel_harness #(.DATA_W(8), .NUM_BLOCKS(3), .SEPARABLE(1'b1), .N_IN(4410), .INFERENCES(1))
    h_ps_sep (.clk, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]), .handoffs(ho[1]));
  accel_harness #(.DATA_W(6), .NUM_BLOCKS(5), .SEPARABLE(1'b0), .N_IN(4410), .INFERENCES(1))
    h_loso_cnn (.clk, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]), .handoffs(ho[2]));
  accel_harness #(.DATA_W(6), .NUM_BLOCKS(3), .SEPARABLE(1'b1), .N_IN(4410), .INFERENCES(1))
    h_loso_sep (.clk, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]), .handoffs(ho[3]));
  accel_harness #(.DATA_W(8), .NUM_BLOCKS(4), .SEPARABLE(1'b0), .N_IN(4410), .INFERENCES(1))
    h_aos_cnn (.clk, .finished(fin[4]), .checks(ck[4]), .failures(fl[4]), .handoffs(ho[4]));
  accel_harness #(.DATA_W(8), .NUM_BLOCKS(5), .SEPARABLE(1'b1), .N_IN(4410), .INFERENCES(1))
    h_aos_sep (.clk, .finished(fin[5]), .checks(ck[5]), .failures(fl[5]), .handoffs(ho[5]));

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ck.sum(), fl.sum() + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    checks   = ck.sum();
    failures = fl.sum();
    // every separable configuration hands one slice over per time step of
    // its first block
    foreach (ho[i]) if (i % 2 == 1) begin
      checks++;
      if (ho[i] != 4410) begin
        failures++;
        $display("workload %0d: %0d hand-overs, expected 4410", i, ho[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
