// global_avg_pool: per-channel average over the whole time axis
// (GlobalAVGPool), producing a C-element feature vector.
//
// For each channel c it sums (x[t][c] - Z_IN) over t = 0..LEN-1 and writes
// requant(sum) with MULT / 2^SHIFT ~ 1/LEN times the ratio of input to
// output scale, so the division by LEN is folded into the integer rescale.
//
// Handshake: starts when enable rises, raises done after the last write and
// holds it until enable falls; the next layer reads the vector through
// out_addr / out_data (one-cycle latency). Timing: 2 clocks per input value
// plus one per channel, C*(2*LEN + 1) + 2 clocks per pass. The paper gives
// the layer's function; the sequential sum and the folded division are this
// design's choices.
module global_avg_pool
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned C      = 8,
  parameter int unsigned LEN    = 1102,
  parameter int          Z_IN   = 0,
  parameter int          Z_OUT  = 0,
  parameter int unsigned MULT   = 952,
  parameter int unsigned SHIFT  = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  output logic                     done,
  output logic [ADDR_W-1:0]        in_addr,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic [ADDR_W-1:0]        out_addr,
  output logic signed [DATA_W-1:0] out_data
);
  layer_state_e state;
  logic [ADDR_W-1:0]        t;
  logic [7:0]               c;
  logic signed [ACC_W-1:0]  acc;
  logic                     wr_en;
  logic [ADDR_W-1:0]        wr_addr;
  logic signed [DATA_W-1:0] wr_data;

  assign in_addr = ADDR_W'(int'(t) * int'(C) + int'(c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      done  <= 1'b0;
      t <= '0; c <= '0; acc <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (!enable) begin
        state <= ST_IDLE;
        done  <= 1'b0;
      end else begin
        unique case (state)
          ST_IDLE: begin
            t <= '0; c <= '0; acc <= '0;
            state <= ST_ADDR;
          end
          ST_ADDR: state <= ST_MAC;
          ST_MAC: begin
            acc <= acc + ACC_W'(int'(in_data) - Z_IN);
            if (t == ADDR_W'(LEN - 1)) begin
              t <= '0;
              state <= ST_WRITE;
            end else begin
              t <= t + 1'b1;
              state <= ST_ADDR;
            end
          end
          ST_WRITE: begin
            wr_en   <= 1'b1;
            wr_addr <= ADDR_W'(c);
            wr_data <= DATA_W'(requant(longint'(acc), MULT, SHIFT, Z_OUT, DATA_W));
            acc     <= '0;
            if (c == 8'(C - 1)) state <= ST_DONE;
            else begin
              c <= c + 8'd1;
              state <= ST_ADDR;
            end
          end
          ST_DONE: done <= 1'b1;
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  sdp_ram #(.DATA_W(DATA_W), .DEPTH(C)) u_obuf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(out_addr), .rd_data(out_data)
  );

endmodule
