// tb_sepconv1d_bn: self-checking test of sepconv1d_bn at a short window.
// Runs two passes from a behavioural input memory, compares every output
// with gesture_ref_pkg::sep_ref, checks the pass length against
// LEN*(C_IN*(2K+2) + C_OUT*(C_IN+2) + 2) + 2 clocks, and counts the
// depthwise -> pointwise hand-overs (one per time step).
module tb_sepconv1d_bn;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 8, CI = 4, CO = 8, LEN = 10, K = 3, SEED = 9;
  localparam int ZI = 1, ZWD = -1, ZMID = 2, ZWP = 0, ZO = -3;
  localparam int MULT_D = 80, SHIFT_D = 12, MULT = 40, SHIFT = 12;
  localparam int PASS = LEN * (CI * (2 * K + 2) + CO * (CI + 2) + 2) + 2;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, done, handoff;
  logic [ADDR_W-1:0] in_addr, out_addr = '0;
  logic signed [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0, handoffs = 0;
  iarr_t x, y;
  int xmem [LEN * CI];

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    in_data <= (int'(in_addr) < LEN * CI) ? DW'(xmem[int'(in_addr)]) : '0;
  always_ff @(posedge clk) if (handoff) handoffs <= handoffs + 1;

  sepconv1d_bn #(.DATA_W(DW), .C_IN(CI), .C_OUT(CO), .LEN(LEN), .K(K), .SEED(SEED),
                 .Z_IN(ZI), .Z_WD(ZWD), .Z_MID(ZMID), .Z_WP(ZWP), .Z_OUT(ZO),
                 .MULT_D(MULT_D), .SHIFT_D(SHIFT_D), .MULT(MULT), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .enable, .done, .in_addr, .in_data, .out_addr, .out_data, .handoff);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass();
    int cycles = 0;
    int h0;
    x = rand_window(LEN * CI, DW);
    foreach (x[i]) xmem[i] = x[i];
    y = sep_ref(x, CI, CO, LEN, K, SEED, ZI, ZWD, ZMID, ZWP, ZO, MULT_D, SHIFT_D,
                MULT, SHIFT, DW);
    h0 = handoffs;
    @(negedge clk) enable = 1'b1;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != PASS) begin
      failures++;
      $display("cycle count %0d, expected %0d", cycles, PASS);
    end
    checks++;
    if (handoffs - h0 != LEN) begin
      failures++;
      $display("%0d hand-overs, expected %0d", handoffs - h0, LEN);
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
  endtask

  initial begin
    n_pad = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_pass();
    run_pass();
    checks++;
    if (n_pad == 0) begin failures++; $display("padding never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
