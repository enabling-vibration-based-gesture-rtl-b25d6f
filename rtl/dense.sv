// dense: fully connected layer (the Dense block), N_IN inputs to N_OUT
// outputs, with its own weight and bias memories and output buffer.
//
// For each output o it computes
//   acc = sum_i (x[i] - Z_IN) * (w[o][i] - Z_W) + b[o]
// and writes requant(acc) to the output buffer. The last layer of the
// network is a dense layer whose output buffer holds the four class logits
// (Up, Down, Left, Right) and is read from outside the accelerator.
//
// Handshake: starts when enable rises, raises done after the last write and
// holds it until enable falls. Timing: two clocks per product, two more per
// output: N_OUT*(2*N_IN + 2) + 2 clocks per pass. The paper gives the
// layer's function and its output buffer; the datapath (the same
// FSM/ROM/ALU arrangement as the convolution) and the generated weight
// values are this design's choices.
module dense
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned N_IN   = 8,
  parameter int unsigned N_OUT  = 4,
  parameter int unsigned SEED   = 7,
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
  output logic [ADDR_W-1:0]        in_addr,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic [ADDR_W-1:0]        out_addr,
  output logic signed [DATA_W-1:0] out_data
);
  localparam int unsigned NW = N_OUT * N_IN;

  logic signed [DATA_W-1:0] w_rom [NW];
  logic signed [BIAS_W-1:0] b_rom [N_OUT];
  initial begin
    for (int j = 0; j < int'(NW); j++)
      w_rom[j] = DATA_W'(gen_param(SEED, j, DATA_W));
    for (int j = 0; j < int'(N_OUT); j++)
      b_rom[j] = BIAS_W'(gen_param(SEED + 1000, j, DATA_W + 2));
  end

  layer_state_e state;
  logic [7:0]               i, o;
  logic signed [ACC_W-1:0]  acc;
  logic signed [DATA_W-1:0] w_q;
  logic                     wr_en;
  logic [ADDR_W-1:0]        wr_addr;
  logic signed [DATA_W-1:0] wr_data;

  assign in_addr = ADDR_W'(i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      done  <= 1'b0;
      i <= '0; o <= '0; acc <= '0; w_q <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (!enable) begin
        state <= ST_IDLE;
        done  <= 1'b0;
      end else begin
        unique case (state)
          ST_IDLE: begin
            i <= '0; o <= '0; acc <= '0;
            state <= ST_ADDR;
          end
          ST_ADDR: begin
            w_q   <= w_rom[int'(o) * int'(N_IN) + int'(i)];
            state <= ST_MAC;
          end
          ST_MAC: begin
            acc <= acc + ACC_W'((int'(in_data) - Z_IN) * (int'(w_q) - Z_W));
            if (i == 8'(N_IN - 1)) begin
              i <= '0;
              state <= ST_BIAS;
            end else begin
              i <= i + 8'd1;
              state <= ST_ADDR;
            end
          end
          ST_BIAS: begin
            acc   <= acc + ACC_W'(b_rom[int'(o)]);
            state <= ST_WRITE;
          end
          ST_WRITE: begin
            wr_en   <= 1'b1;
            wr_addr <= ADDR_W'(o);
            wr_data <= DATA_W'(requant(longint'(acc), MULT, SHIFT, Z_OUT, DATA_W));
            acc     <= '0;
            if (o == 8'(N_OUT - 1)) state <= ST_DONE;
            else begin
              o <= o + 8'd1;
              state <= ST_ADDR;
            end
          end
          ST_DONE: done <= 1'b1;
          default: state <= ST_IDLE;
        endcase
      end
    end
  end

  sdp_ram #(.DATA_W(DATA_W), .DEPTH(N_OUT)) u_obuf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr(out_addr), .rd_data(out_data)
  );

endmodule
