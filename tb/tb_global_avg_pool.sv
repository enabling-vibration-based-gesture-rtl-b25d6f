// tb_global_avg_pool: self-checking test of global_avg_pool. Two passes from
// a behavioural input memory, outputs compared with gesture_ref_pkg::gap_ref,
// pass length checked against C*(2*LEN + 1) + 2 clocks.
module tb_global_avg_pool;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 6, C = 8, LEN = 37, ZI = -1, ZO = 2, SHIFT = 20;
  localparam int MULT = ((1 << 20) + LEN / 2) / LEN;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, done;
  logic [ADDR_W-1:0] in_addr, out_addr = '0;
  logic signed [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  iarr_t x, y;
  int xmem [LEN * C];

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    in_data <= (int'(in_addr) < LEN * C) ? DW'(xmem[int'(in_addr)]) : '0;

  global_avg_pool #(.DATA_W(DW), .C(C), .LEN(LEN), .Z_IN(ZI), .Z_OUT(ZO),
                    .MULT(MULT), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .enable, .done, .in_addr, .in_data, .out_addr, .out_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(bit biased);
    int cycles = 0;
    x = rand_window(LEN * C, DW);
    // second pass: channel c biased upward so averages differ per channel
    if (biased) foreach (x[i]) x[i] = (x[i] + 4 * (i % C) > 31) ? 31 : x[i] + 4 * (i % C);
    foreach (x[i]) xmem[i] = x[i];
    y = gap_ref(x, C, LEN, ZI, ZO, MULT, SHIFT, DW);
    @(negedge clk) enable = 1'b1;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != C * (2 * LEN + 1) + 2) begin
      failures++;
      $display("cycle count %0d, expected %0d", cycles, C * (2 * LEN + 1) + 2);
    end
    for (int i = 0; i < C; i++) begin
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
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_pass(1'b0);
    run_pass(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
