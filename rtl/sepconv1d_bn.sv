// sepconv1d_bn: depthwise-separable 1D convolution with folded batch
// normalization (the SepConv1DBN block), scheduled ping-pong style so that
// only one C_IN x 1 time slice sits between its two stages.
//
// DepthConv1D stage: for time step t and channel c,
//   m[c] = requant_D( sum_k (x[t+k-(K-1)/2][c] - Z_IN) * (wd[c][k] - Z_WD)
//                     + bd[c] )
// with "same" zero-point padding, one filter per channel.
// PointConv1DBN stage (kernel 1, BN folded): for output channel co,
//   y[t][co] = requant( sum_ci (m[ci] - Z_MID) * (wp[co][ci] - Z_WP) + bp[co] )
//
// Ping-pong scheduling: the depthwise stage fills the slice buffer m[] for
// one time step, sets slice_full and waits; the pointwise stage consumes the
// slice, writes C_OUT outputs for that step, clears slice_full and so hands
// control back. The stages alternate every time step, so the intermediate
// storage is C_IN words instead of C_IN x LEN.
//
// Handshake: starts when enable rises, raises done after the last output is
// written and holds it until enable falls; the next layer reads the output
// buffer through out_addr / out_data (one-cycle latency). Timing per time
// step: C_IN*(2K+2) clocks depthwise, C_OUT*(C_IN+2) pointwise, plus two for
// the hand-over, so LEN*(C_IN*(2K+2) + C_OUT*(C_IN+2) + 2) + 2 per pass.
//
// From the paper: the depthwise/pointwise split, the kernel 3 / kernel 1
// filters, folded BN, the C x 1 shared slice and the strict alternation.
// This design's choices: the padding, the timing, the requantization form
// and the generated weights.
module sepconv1d_bn
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W  = 6,
  parameter int unsigned C_IN    = 4,
  parameter int unsigned C_OUT   = 4,
  parameter int unsigned LEN     = 4410,
  parameter int unsigned K       = 3,
  parameter int unsigned SEED    = 1,
  parameter int          Z_IN    = 0,
  parameter int          Z_WD    = 0,
  parameter int          Z_MID   = 0,
  parameter int          Z_WP    = 0,
  parameter int          Z_OUT   = 0,
  parameter int unsigned MULT_D  = 228,
  parameter int unsigned SHIFT_D = 12,
  parameter int unsigned MULT    = 171,
  parameter int unsigned SHIFT   = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  output logic                     done,
  output logic [ADDR_W-1:0]        in_addr,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic [ADDR_W-1:0]        out_addr,
  output logic signed [DATA_W-1:0] out_data,
  // high for one clock at every depthwise -> pointwise hand-over
  output logic                     handoff
);
  localparam int unsigned HALF = (K - 1) / 2;

  // Weight and bias memories of both stages
  logic signed [DATA_W-1:0] wd_rom [C_IN * K];
  logic signed [BIAS_W-1:0] bd_rom [C_IN];
  logic signed [DATA_W-1:0] wp_rom [C_OUT * C_IN];
  logic signed [BIAS_W-1:0] bp_rom [C_OUT];
  initial begin
    for (int i = 0; i < int'(C_IN * K); i++)
      wd_rom[i] = DATA_W'(gen_param(SEED, i, DATA_W));
    for (int i = 0; i < int'(C_IN); i++)
      bd_rom[i] = BIAS_W'(gen_param(SEED + 1000, i, DATA_W + 2));
    for (int i = 0; i < int'(C_OUT * C_IN); i++)
      wp_rom[i] = DATA_W'(gen_param(SEED + 2000, i, DATA_W));
    for (int i = 0; i < int'(C_OUT); i++)
      bp_rom[i] = BIAS_W'(gen_param(SEED + 3000, i, DATA_W + 2));
  end

  // The shared C_IN x 1 slice and its ownership flag
  logic signed [DATA_W-1:0] slice [C_IN];
  logic                     slice_full;

  // ---------------- depthwise stage ----------------
  typedef enum logic [2:0] {D_IDLE, D_ADDR, D_MAC, D_BIAS, D_WRITE, D_WAIT,
                            D_END} d_state_e;
  d_state_e d_state;
  logic [ADDR_W-1:0]        t_d;
  logic [7:0]               c_d, k_d;
  logic signed [ACC_W-1:0]  acc_d;
  logic signed [DATA_W-1:0] wd_q;
  logic                     pad_q;
  int                       pos;

  always_comb begin
    pos     = int'(t_d) + int'(k_d) - int'(HALF);
    in_addr = (pos >= 0 && pos < int'(LEN))
              ? ADDR_W'(pos * int'(C_IN) + int'(c_d)) : '0;
  end

  // ---------------- pointwise stage ----------------
  typedef enum logic [1:0] {P_WAIT, P_MAC, P_BIAS, P_WRITE} p_state_e;
  p_state_e p_state;
  logic [ADDR_W-1:0]        t_p;
  logic [7:0]               co_p, ci_p;
  logic signed [ACC_W-1:0]  acc_p;
  logic                     last_slice;  // slice being consumed is the last
  logic                     wr_en;
  logic [ADDR_W-1:0]        wr_addr;
  logic signed [DATA_W-1:0] wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_state <= D_IDLE;
      p_state <= P_WAIT;
      done <= 1'b0; handoff <= 1'b0; slice_full <= 1'b0;
      t_d <= '0; c_d <= '0; k_d <= '0; acc_d <= '0; wd_q <= '0; pad_q <= 1'b0;
      t_p <= '0; co_p <= '0; ci_p <= '0; acc_p <= '0; last_slice <= 1'b0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
      for (int i = 0; i < int'(C_IN); i++) slice[i] <= '0;
    end else begin
      wr_en   <= 1'b0;
      handoff <= 1'b0;
      if (!enable) begin
        d_state <= D_IDLE;
        p_state <= P_WAIT;
        slice_full <= 1'b0;
        done <= 1'b0;
      end else begin
        // ---- depthwise FSM ----
        unique case (d_state)
          D_IDLE: begin
            t_d <= '0; c_d <= '0; k_d <= '0; acc_d <= '0;
            if (!done) d_state <= D_ADDR;
          end
          D_ADDR: begin
            wd_q  <= wd_rom[int'(c_d) * int'(K) + int'(k_d)];
            pad_q <= !(pos >= 0 && pos < int'(LEN));
            d_state <= D_MAC;
          end
          D_MAC: begin
            if (!pad_q)
              acc_d <= acc_d + ACC_W'((int'(in_data) - Z_IN) * (int'(wd_q) - Z_WD));
            if (k_d == 8'(K - 1)) begin
              k_d <= '0;
              d_state <= D_BIAS;
            end else begin
              k_d <= k_d + 8'd1;
              d_state <= D_ADDR;
            end
          end
          D_BIAS: begin
            acc_d   <= acc_d + ACC_W'(bd_rom[int'(c_d)]);
            d_state <= D_WRITE;
          end
          D_WRITE: begin
            slice[int'(c_d)] <= DATA_W'(requant(longint'(acc_d), MULT_D, SHIFT_D,
                                               Z_MID, DATA_W));
            acc_d <= '0;
            if (c_d == 8'(C_IN - 1)) begin
              c_d <= '0;
              // slice complete: yield to the pointwise stage
              slice_full <= 1'b1;
              handoff    <= 1'b1;
              t_p        <= t_d;
              last_slice <= (t_d == ADDR_W'(LEN - 1));
              d_state    <= D_WAIT;
            end else begin
              c_d <= c_d + 8'd1;
              d_state <= D_ADDR;
            end
          end
          D_WAIT: begin  // pointwise stage owns the slice
            if (!slice_full) begin
              if (last_slice) d_state <= D_END;
              else begin
                t_d <= t_d + 1'b1;
                d_state <= D_ADDR;
              end
            end
          end
          D_END: done <= 1'b1;
          default: d_state <= D_IDLE;
        endcase

        // ---- pointwise FSM ----
        unique case (p_state)
          P_WAIT: begin
            co_p <= '0; ci_p <= '0; acc_p <= '0;
            if (slice_full) p_state <= P_MAC;
          end
          P_MAC: begin
            acc_p <= acc_p + ACC_W'((int'(slice[int'(ci_p)]) - Z_MID) *
                     (int'(wp_rom[int'(co_p) * int'(C_IN) + int'(ci_p)]) - Z_WP));
            if (ci_p == 8'(C_IN - 1)) begin
              ci_p <= '0;
              p_state <= P_BIAS;
            end else ci_p <= ci_p + 8'd1;
          end
          P_BIAS: begin
            acc_p   <= acc_p + ACC_W'(bp_rom[int'(co_p)]);
            p_state <= P_WRITE;
          end
          P_WRITE: begin
            wr_en   <= 1'b1;
            wr_addr <= ADDR_W'(int'(t_p) * int'(C_OUT) + int'(co_p));
            wr_data <= DATA_W'(requant(longint'(acc_p), MULT, SHIFT, Z_OUT, DATA_W));
            acc_p   <= '0;
            if (co_p == 8'(C_OUT - 1)) begin
              co_p <= '0;
              slice_full <= 1'b0;  // release the slice to the depthwise stage
              p_state <= P_WAIT;
            end else begin
              co_p <= co_p + 8'd1;
              p_state <= P_MAC;
            end
          end
          default: p_state <= P_WAIT;
        endcase
      end
    end
  end

  // The depthwise stage never writes the slice while the pointwise stage
  // owns it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (slice_full |-> d_state != D_WRITE));

  sdp_ram #(.DATA_W(DATA_W), .DEPTH(LEN * C_OUT)) u_obuf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(out_addr), .rd_data(out_data)
  );

endmodule
