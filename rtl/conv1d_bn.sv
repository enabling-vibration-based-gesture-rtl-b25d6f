// conv1d_bn: one 1D convolution layer with batch normalization folded into
// its weights and bias (the Conv1DBN block of the accelerator).
//
// For every time step t and output channel co it computes
//   acc = sum_{k,ci} (x[t+k-(K-1)/2][ci] - Z_IN) * (w[co][k][ci] - Z_W)
//         + b[co]
// and writes requant(acc) to its own output buffer. Positions outside
// 0..LEN-1 read as the input zero point ("same" padding, so the output has
// LEN steps as the input does).
//
// Structure, as in the block diagram: a control FSM produces the input,
// weight and bias addresses; W and B are on-chip ROMs; a select line picks
// weight or bias into the ALU (multiply-accumulate, then bias add, then
// requantize); the result goes to the output buffer, which the next layer
// reads through out_addr / out_data (one-cycle latency).
//
// Handshake: the layer starts when enable rises, raises done after its last
// write, and holds done until enable falls, which also returns it to idle.
// Timing: each product takes two clocks (address, then data), so one layer
// pass takes LEN*C_OUT*(2*K*C_IN + 2) + 2 clocks.
//
// From the paper: kernel 3, stride 1, BN folded, integer-only arithmetic,
// per-layer W/B memories, FSM control, output buffer, enable/done chaining.
// This design's choices: "same" zero-point padding, the two-clock MAC, the
// requantization form (see gesture_pkg), weight order [co][k][ci], and the
// generated weight values.
module conv1d_bn
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned C_IN   = 4,
  parameter int unsigned C_OUT  = 4,
  parameter int unsigned LEN    = 4410,
  parameter int unsigned K      = 3,
  parameter int unsigned SEED   = 1,
  parameter int          Z_IN   = 0,
  parameter int          Z_W    = 0,
  parameter int          Z_OUT  = 0,
  parameter int unsigned MULT   = 86,
  parameter int unsigned SHIFT  = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  output logic                     done,
  // read port into the previous layer's buffer
  output logic [ADDR_W-1:0]        in_addr,
  input  logic signed [DATA_W-1:0] in_data,
  // read port of this layer's output buffer
  input  logic [ADDR_W-1:0]        out_addr,
  output logic signed [DATA_W-1:0] out_data
);
  localparam int unsigned NW = C_OUT * K * C_IN;
  localparam int unsigned HALF = (K - 1) / 2;

  // W and B memories
  logic signed [DATA_W-1:0] w_rom [NW];
  logic signed [BIAS_W-1:0] b_rom [C_OUT];
  initial begin
    for (int i = 0; i < int'(NW); i++)
      w_rom[i] = DATA_W'(gen_param(SEED, i, DATA_W));
    for (int i = 0; i < int'(C_OUT); i++)
      b_rom[i] = BIAS_W'(gen_param(SEED + 1000, i, DATA_W + 2));
  end

  layer_state_e state;
  logic [ADDR_W-1:0] t;
  logic [7:0]        co, ci, k;
  logic signed [ACC_W-1:0]  acc;
  logic signed [DATA_W-1:0] w_q;
  logic                     pad_q;
  logic                     wr_en;
  logic [ADDR_W-1:0]        wr_addr;
  logic signed [DATA_W-1:0] wr_data;

  // input position of the current tap; negative or >= LEN means padding
  int pos;
  always_comb begin
    pos     = int'(t) + int'(k) - int'(HALF);
    in_addr = (pos >= 0 && pos < int'(LEN))
              ? ADDR_W'(pos * int'(C_IN) + int'(ci)) : '0;
  end

  logic last_tap, last_co, last_t;
  assign last_tap = (ci == 8'(C_IN - 1)) && (k == 8'(K - 1));
  assign last_co  = (co == 8'(C_OUT - 1));
  assign last_t   = (t == ADDR_W'(LEN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      done  <= 1'b0;
      t <= '0; co <= '0; ci <= '0; k <= '0;
      acc <= '0; w_q <= '0; pad_q <= 1'b0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (!enable) begin
        state <= ST_IDLE;
        done  <= 1'b0;
      end else begin
        unique case (state)
          ST_IDLE: begin
            t <= '0; co <= '0; ci <= '0; k <= '0; acc <= '0;
            state <= ST_ADDR;
          end
          ST_ADDR: begin  // addresses out; ROM and buffer answer next clock
            w_q   <= w_rom[(int'(co) * int'(K) + int'(k)) * int'(C_IN) + int'(ci)];
            pad_q <= !(pos >= 0 && pos < int'(LEN));
            state <= ST_MAC;
          end
          ST_MAC: begin
            if (!pad_q)
              acc <= acc + ACC_W'((int'(in_data) - Z_IN) * (int'(w_q) - Z_W));
            if (last_tap) begin
              ci <= '0; k <= '0;
              state <= ST_BIAS;
            end else begin
              if (ci == 8'(C_IN - 1)) begin
                ci <= '0; k <= k + 8'd1;
              end else ci <= ci + 8'd1;
              state <= ST_ADDR;
            end
          end
          ST_BIAS: begin  // select line s picks B into the ALU
            acc   <= acc + ACC_W'(b_rom[int'(co)]);
            state <= ST_WRITE;
          end
          ST_WRITE: begin
            wr_en   <= 1'b1;
            wr_addr <= ADDR_W'(int'(t) * int'(C_OUT) + int'(co));
            wr_data <= DATA_W'(requant(longint'(acc), MULT, SHIFT, Z_OUT, DATA_W));
            acc     <= '0;
            if (last_co) begin
              co <= '0;
              if (last_t) state <= ST_DONE;
              else begin
                t <= t + 1'b1;
                state <= ST_ADDR;
              end
            end else begin
              co <= co + 8'd1;
              state <= ST_ADDR;
            end
          end
          ST_DONE: done <= 1'b1;
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  sdp_ram #(.DATA_W(DATA_W), .DEPTH(LEN * C_OUT)) u_obuf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(out_addr), .rd_data(out_data)
  );

endmodule
