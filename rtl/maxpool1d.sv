// maxpool1d: temporal max pooling, kernel 2, stride 2 (the MaxPool1D block).
//
// Output step t, channel c is max(x[2t][c], x[2t+1][c]); a trailing odd
// input step is dropped, so LEN_IN steps give LEN_IN/2 outputs. Pooling
// does not change the quantization, so no requantization is needed.
//
// Structure, as in the block diagram: a control FSM drives the input
// address; a multiplexer loads the first value of a window into a register
// ("init"), a comparator takes the max of the register and the next value,
// and the result is written to the output buffer, which the next layer reads
// through out_addr / out_data (one-cycle latency).
//
// Handshake: starts when enable rises, raises done after the last write and
// holds it until enable falls. Timing: 4 clocks per output value, so a pass
// takes 4*(LEN_IN/2)*C + 2 clocks. Kernel 2 is the paper's; stride 2, the
// dropped remainder and the timing are this design's choices.
module maxpool1d
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned C      = 4,
  parameter int unsigned LEN_IN = 4410
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
  localparam int unsigned LEN_OUT = LEN_IN / 2;

  layer_state_e state;
  logic [ADDR_W-1:0]        t;
  logic [7:0]               c;
  logic                     second;   // 0: first value of the window
  logic signed [DATA_W-1:0] ff;       // running maximum
  logic signed [DATA_W-1:0] mx;
  logic                     wr_en;
  logic [ADDR_W-1:0]        wr_addr;
  logic signed [DATA_W-1:0] wr_data;

  assign in_addr = ADDR_W'((2 * int'(t) + int'(second)) * int'(C) + int'(c));
  assign mx      = (in_data > ff) ? in_data : ff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      done  <= 1'b0;
      t <= '0; c <= '0; second <= 1'b0; ff <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (!enable) begin
        state <= ST_IDLE;
        done  <= 1'b0;
      end else begin
        unique case (state)
          ST_IDLE: begin
            t <= '0; c <= '0; second <= 1'b0;
            state <= ST_ADDR;
          end
          ST_ADDR: state <= ST_MAC;
          ST_MAC: begin
            if (!second) begin
              ff     <= in_data;  // init
              second <= 1'b1;
              state  <= ST_ADDR;
            end else begin
              wr_en   <= 1'b1;
              wr_addr <= ADDR_W'(int'(t) * int'(C) + int'(c));
              wr_data <= mx;
              second  <= 1'b0;
              if (c == 8'(C - 1)) begin
                c <= '0;
                if (t == ADDR_W'(LEN_OUT - 1)) state <= ST_DONE;
                else begin
                  t <= t + 1'b1;
                  state <= ST_ADDR;
                end
              end else begin
                c <= c + 8'd1;
                state <= ST_ADDR;
              end
            end
          end
          ST_DONE: done <= 1'b1;
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  sdp_ram #(.DATA_W(DATA_W), .DEPTH(LEN_OUT * C)) u_obuf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(out_addr), .rd_data(out_data)
  );

endmodule
