// tb_maxpool1d: self-checking test of maxpool1d with an odd input length
// (the trailing step must be dropped). Two passes from a behavioural input
// memory; every output compared with gesture_ref_pkg::pool_ref; pass length
// checked against 4*(LEN_IN/2)*C + 2 clocks.
module tb_maxpool1d;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 6, C = 4, LEN_IN = 15, LEN_OUT = LEN_IN / 2;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, done;
  logic [ADDR_W-1:0] in_addr, out_addr = '0;
  logic signed [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  iarr_t x, y;
  int xmem [LEN_IN * C];

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    in_data <= (int'(in_addr) < LEN_IN * C) ? DW'(xmem[int'(in_addr)]) : '0;

  maxpool1d #(.DATA_W(DW), .C(C), .LEN_IN(LEN_IN)) dut (
    .clk, .rst_n, .enable, .done, .in_addr, .in_data, .out_addr, .out_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass();
    int cycles = 0;
    x = rand_window(LEN_IN * C, DW);
    foreach (x[i]) xmem[i] = x[i];
    y = pool_ref(x, C, LEN_IN);
    @(negedge clk) enable = 1'b1;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != 4 * LEN_OUT * C + 2) begin
      failures++;
      $display("cycle count %0d, expected %0d", cycles, 4 * LEN_OUT * C + 2);
    end
    for (int i = 0; i < LEN_OUT * C; i++) begin
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
    run_pass();
    run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
