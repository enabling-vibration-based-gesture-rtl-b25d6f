// tb_sdp_ram: self-checking test of sdp_ram, the input/output buffer.
// Writes random words, reads them back with the one-cycle latency, checks
// that a read of the word being written returns the old value, and that a
// read beyond DEPTH returns zero.
module tb_sdp_ram;
  localparam int DW = 6, DEPTH = 40, AW = 15;
  logic clk = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [DW-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  int model [DEPTH];

  always #5 clk = ~clk;

  sdp_ram #(.DATA_W(DW), .DEPTH(DEPTH), .ADDR_W(AW)) dut (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(i);
      wr_data = DW'($urandom);
      model[i] = int'(wr_data);
    end
    @(negedge clk) wr_en = 1'b0;
    // read back in a scrambled order
    for (int j = 0; j < DEPTH; j++) begin
      automatic int a = (j * 7) % DEPTH;
      rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (int'(rd_data) != model[a]) begin
        failures++;
        $display("mem[%0d] = %0d, expected %0d", a, rd_data, model[a]);
      end
    end
    // read during write: old word comes out, new word is stored
    for (int j = 0; j < 8; j++) begin
      automatic int a = int'($urandom % DEPTH);
      automatic int old = model[a];
      wr_en = 1'b1; wr_addr = AW'(a); rd_addr = AW'(a);
      wr_data = DW'(old + 1);
      @(negedge clk);
      wr_en = 1'b0;
      checks++;
      if (int'(rd_data) != old) begin
        failures++;
        $display("read-during-write at %0d gave %0d, expected old %0d", a, rd_data, old);
      end
      model[a] = int'(DW'(old + 1));
      @(negedge clk);
      checks++;
      if (int'(rd_data) != model[a]) begin
        failures++;
        $display("after write mem[%0d] = %0d, expected %0d", a, rd_data, model[a]);
      end
    end
    // out of range reads return zero
    rd_addr = AW'(DEPTH + 3);
    @(negedge clk);
    checks++;
    if (rd_data != '0) begin failures++; $display("out of range read %0d", rd_data); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
