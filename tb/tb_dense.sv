// tb_dense: self-checking test of dense. Several input vectors from a
// behavioural input memory, outputs compared with gesture_ref_pkg::dense_ref,
// pass length checked against N_OUT*(2*N_IN + 2) + 2 clocks.
module tb_dense;
  import gesture_pkg::*;
  import gesture_ref_pkg::*;

  localparam int DW = 6, NI = 8, NO = 4, SEED = 33, ZI = 1, ZW = -1, ZO = 0;
  localparam int MULT = 90, SHIFT = 12;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, done;
  logic [ADDR_W-1:0] in_addr, out_addr = '0;
  logic signed [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  iarr_t x, y;
  int xmem [NI];

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    in_data <= (int'(in_addr) < NI) ? DW'(xmem[int'(in_addr)]) : '0;

  dense #(.DATA_W(DW), .N_IN(NI), .N_OUT(NO), .SEED(SEED), .Z_IN(ZI), .Z_W(ZW),
          .Z_OUT(ZO), .MULT(MULT), .SHIFT(SHIFT)) dut (
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
    x = rand_window(NI, DW);
    foreach (x[i]) xmem[i] = x[i];
    y = dense_ref(x, NI, NO, SEED, ZI, ZW, ZO, MULT, SHIFT, DW);
    @(negedge clk) enable = 1'b1;
    do begin @(negedge clk); cycles++; end while (!done);
    checks++;
    if (cycles != NO * (2 * NI + 2) + 2) begin
      failures++;
      $display("cycle count %0d, expected %0d", cycles, NO * (2 * NI + 2) + 2);
    end
    for (int i = 0; i < NO; i++) begin
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
    repeat (8) run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
