// accel_harness: drives one gesture_accel configuration through INFERENCES
// complete inferences: writes a random input window through the host port,
// raises en, waits for done, reads the logits and compares them with
// gesture_ref_pkg::net_ref; checks the latency against net_cycles; lowers
// en to rearm. Reports its checks and failures when finished is set.
// In the separable configuration it also counts the depthwise -> pointwise
// hand-overs of the first block (one per time step of that block).
module accel_harness
  import gesture_pkg::*;
  import gesture_ref_pkg::*;
#(
  parameter int unsigned DATA_W     = 6,
  parameter int unsigned NUM_BLOCKS = 3,
  parameter bit          SEPARABLE  = 1'b0,
  parameter int unsigned N_IN       = 70,
  parameter int          INFERENCES = 2
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   handoffs
);
  localparam int C0 = 4, K = 3, HIDDEN = 4, NCLS = 4;

  logic rst_n = 1'b0, en = 1'b0, done;
  logic in_wr_en = 1'b0;
  logic [ADDR_W-1:0] in_wr_addr = '0, out_addr = '0;
  logic signed [DATA_W-1:0] in_wr_data = '0, out_data;

  gesture_accel #(.DATA_W(DATA_W), .NUM_BLOCKS(NUM_BLOCKS), .SEPARABLE(SEPARABLE),
                  .N_IN(N_IN)) dut (
    .clk, .rst_n, .en, .done, .in_wr_en, .in_wr_addr, .in_wr_data,
    .out_addr, .out_data);

  initial handoffs = 0;
  if (SEPARABLE) begin : g_count
    always @(posedge clk) if (dut.g_block[0].g_sep.u_conv.handoff) handoffs++;
  end

  initial begin
    iarr_t x, y;
    longint cycles, want;
    finished = 1'b0; checks = 0; failures = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < INFERENCES; r++) begin
      x = rand_window(int'(N_IN) * C0, int'(DATA_W));
      // halve the noise and add a per-channel offset that differs between
      // inferences, so that the logits depend on the window
      for (int c = 0; c < C0; c++) begin
        automatic int off = int'($urandom % (1 << (DATA_W - 1))) - (1 << (DATA_W - 2));
        for (int t = 0; t < int'(N_IN); t++) begin
          automatic int v = x[t * C0 + c] / 2 + off;
          x[t * C0 + c] = (v > (1 << (DATA_W - 1)) - 1) ? (1 << (DATA_W - 1)) - 1 :
                          (v < -(1 << (DATA_W - 1))) ? -(1 << (DATA_W - 1)) : v;
        end
      end
      y = net_ref(x, int'(DATA_W), int'(NUM_BLOCKS), SEPARABLE, C0, int'(N_IN), K,
                  HIDDEN, NCLS, 0);
      want = net_cycles(int'(NUM_BLOCKS), SEPARABLE, C0, int'(N_IN), K, HIDDEN, NCLS);
      for (int i = 0; i < x.size(); i++) begin
        @(negedge clk);
        in_wr_en = 1'b1; in_wr_addr = ADDR_W'(i); in_wr_data = DATA_W'(x[i]);
      end
      @(negedge clk) in_wr_en = 1'b0;
      en = 1'b1;
      cycles = 0;
      do begin @(negedge clk); cycles++; end while (!done);
      checks++;
      if (cycles != want) begin
        failures++;
        $display("[%m] latency %0d clocks, expected %0d", cycles, want);
      end
      for (int i = 0; i < NCLS; i++) begin
        out_addr = ADDR_W'(i);
        @(negedge clk);
        checks++;
        if (int'(out_data) != y[i]) begin
          failures++;
          $display("[%m] logit %0d = %0d, expected %0d", i, out_data, y[i]);
        end
      end
      $display("[%m] inference %0d: %0d clocks, logits %p", r, cycles, y);
      // done falls one layer per clock after en drops: 2*NUM_BLOCKS+2 layers
      en = 1'b0;
      repeat (2 * NUM_BLOCKS + 2) @(negedge clk);
      checks++;
      if (done) begin failures++; $display("[%m] done not cleared"); end
    end
    finished = 1'b1;
  end
endmodule
