// gesture_accel: integer-only 1D-CNN accelerator that classifies one swipe
// gesture (Up, Down, Left, Right) from four table-mounted vibration sensors.
//
// Input: a window of N_IN = 4410 time steps x C_IN0 = 4 sensor channels
// (one second of 44.1 kHz audio kept at every tenth sample), already
// quantized to DATA_W-bit signed integers with zero point Z_INPUT, written by
// the host into the input buffer at address t*C_IN0 + c.
//
// Network (per block b = 0..NUM_BLOCKS-1, channels 4, 4, 8, 8, 16):
//   Conv1DBN (K=3, stride 1)  -- or SepConv1DBN when SEPARABLE = 1
//   ReLU                      -- on the read path, no storage
//   MaxPool1D (K=2)           -- every block but the last
// then GlobalAVGPool, Dense(HIDDEN) + ReLU, Dense(N_CLASSES). With the
// defaults (3 blocks, 6-bit) this is the 1D-CNN the paper selects for the
// per-subject split; SEPARABLE = 1 and DATA_W = 8 gives its 1D-SepCNN.
//
// Every layer owns its weight/bias memories, its control FSM and its output
// buffer; the next layer reads that buffer by address. There is no central
// controller: each layer's done is the next layer's enable. Operation:
// write the window, raise en, wait for done, read the four logits at
// out_addr 0..3 (one-cycle read latency), lower en to rearm. One inference
// with the defaults takes 987,856 clocks (9.88 ms at 100 MHz).
//
// Weights are not the trained ones (see gesture_pkg::gen_param); zero
// points and requantization multipliers come from gesture_pkg defaults.
module gesture_accel
  import gesture_pkg::*;
#(
  parameter int unsigned DATA_W     = 6,
  parameter int unsigned NUM_BLOCKS = 3,
  parameter bit          SEPARABLE  = 1'b0,
  parameter int unsigned C_IN0      = 4,
  parameter int unsigned N_IN       = 4410,
  parameter int unsigned K          = 3,
  parameter int unsigned HIDDEN     = 4,
  parameter int unsigned N_CLASSES  = 4,
  parameter int          Z_INPUT    = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  output logic                     done,
  // host write port of the input buffer
  input  logic                     in_wr_en,
  input  logic [ADDR_W-1:0]        in_wr_addr,
  input  logic signed [DATA_W-1:0] in_wr_data,
  // host read port of the last layer's output buffer (class logits)
  input  logic [ADDR_W-1:0]        out_addr,
  output logic signed [DATA_W-1:0] out_data
);
  localparam int unsigned NB    = NUM_BLOCKS;
  localparam int unsigned C_LAST = block_channels(NB - 1);
  localparam int unsigned L_LAST = block_length(NB - 1, N_IN);

  // read ports between layers
  logic [ADDR_W-1:0]        conv_in_addr  [NB];
  logic signed [DATA_W-1:0] conv_in_data  [NB];
  logic [ADDR_W-1:0]        conv_out_addr [NB];
  logic signed [DATA_W-1:0] conv_out_data [NB];
  logic signed [DATA_W-1:0] relu_data     [NB];
  logic [ADDR_W-1:0]        pool_out_addr [NB];
  logic signed [DATA_W-1:0] pool_out_data [NB];
  logic                     conv_done     [NB];
  logic                     pool_done     [NB];
  logic                     handoff       [NB];

  logic [ADDR_W-1:0]        in_rd_addr;
  logic signed [DATA_W-1:0] in_rd_data;

  // ---------------- input buffer ----------------
  sdp_ram #(.DATA_W(DATA_W), .DEPTH(N_IN * C_IN0)) u_input_buffer (
    .clk, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_addr(in_rd_addr), .rd_data(in_rd_data)
  );
  assign in_rd_addr      = conv_in_addr[0];
  assign conv_in_data[0] = in_rd_data;

  // ---------------- convolutional blocks ----------------
  for (genvar b = 0; b < int'(NB); b++) begin : g_block
    localparam int unsigned CI  = block_in_channels(b, C_IN0);
    localparam int unsigned CO  = block_channels(b);
    localparam int unsigned LEN = block_length(b, N_IN);
    localparam int          ZI  = (b == 0) ? Z_INPUT : act_zero(b - 1);
    localparam int          ZO  = act_zero(b);
    logic en_conv;

    if (b == 0) begin : g_first
      assign en_conv = en;
    end else begin : g_next
      assign en_conv = pool_done[b-1];
      assign pool_out_addr[b-1] = conv_in_addr[b];
      assign conv_in_data[b]    = pool_out_data[b-1];
    end

    if (SEPARABLE) begin : g_sep
      sepconv1d_bn #(
        .DATA_W(DATA_W), .C_IN(CI), .C_OUT(CO), .LEN(LEN), .K(K),
        .SEED(10 * (b + 1)), .Z_IN(ZI), .Z_WD(weight_zero(b)),
        .Z_MID(act_zero(b + 3)), .Z_WP(weight_zero(b + 1)), .Z_OUT(ZO),
        .MULT_D(conv_mult(K)), .SHIFT_D(conv_shift(DATA_W)), .MULT(conv_mult(CI)), .SHIFT(conv_shift(DATA_W))
      ) u_conv (
        .clk, .rst_n, .enable(en_conv), .done(conv_done[b]),
        .in_addr(conv_in_addr[b]), .in_data(conv_in_data[b]),
        .out_addr(conv_out_addr[b]), .out_data(conv_out_data[b]),
        .handoff(handoff[b])
      );
    end else begin : g_std
      conv1d_bn #(
        .DATA_W(DATA_W), .C_IN(CI), .C_OUT(CO), .LEN(LEN), .K(K),
        .SEED(10 * (b + 1)), .Z_IN(ZI), .Z_W(weight_zero(b)), .Z_OUT(ZO),
        .MULT(conv_mult(K * CI)), .SHIFT(conv_shift(DATA_W))
      ) u_conv (
        .clk, .rst_n, .enable(en_conv), .done(conv_done[b]),
        .in_addr(conv_in_addr[b]), .in_data(conv_in_data[b]),
        .out_addr(conv_out_addr[b]), .out_data(conv_out_data[b])
      );
      assign handoff[b] = 1'b0;
    end

    relu #(.DATA_W(DATA_W), .ZERO(ZO)) u_relu (
      .din(conv_out_data[b]), .dout(relu_data[b])
    );

    if (b < int'(NB) - 1) begin : g_pool
      maxpool1d #(.DATA_W(DATA_W), .C(CO), .LEN_IN(LEN)) u_pool (
        .clk, .rst_n, .enable(conv_done[b]), .done(pool_done[b]),
        .in_addr(conv_out_addr[b]), .in_data(relu_data[b]),
        .out_addr(pool_out_addr[b]), .out_data(pool_out_data[b])
      );
    end else begin : g_nopool
      // the last block feeds global average pooling directly
      assign pool_done[b]     = 1'b0;
      assign pool_out_data[b] = '0;
      assign pool_out_addr[b] = '0;
    end
  end

  // ---------------- classifier head ----------------
  logic                     gap_done, d1_done;
  logic [ADDR_W-1:0]        gap_out_addr, d1_out_addr;
  logic signed [DATA_W-1:0] gap_out_data, d1_out_data, d1_relu;

  global_avg_pool #(
    .DATA_W(DATA_W), .C(C_LAST), .LEN(L_LAST),
    .Z_IN(act_zero(NB - 1)), .Z_OUT(act_zero(NB)),
    .MULT(gap_mult(L_LAST)), .SHIFT(20)
  ) u_gap (
    .clk, .rst_n, .enable(conv_done[NB-1]), .done(gap_done),
    .in_addr(conv_out_addr[NB-1]), .in_data(relu_data[NB-1]),
    .out_addr(gap_out_addr), .out_data(gap_out_data)
  );

  dense #(
    .DATA_W(DATA_W), .N_IN(C_LAST), .N_OUT(HIDDEN), .SEED(100),
    .Z_IN(act_zero(NB)), .Z_W(weight_zero(NB + 1)), .Z_OUT(act_zero(NB + 1)),
    .MULT(conv_mult(C_LAST)), .SHIFT(conv_shift(DATA_W))
  ) u_dense1 (
    .clk, .rst_n, .enable(gap_done), .done(d1_done),
    .in_addr(gap_out_addr), .in_data(gap_out_data),
    .out_addr(d1_out_addr), .out_data(d1_out_data)
  );

  relu #(.DATA_W(DATA_W), .ZERO(act_zero(NB + 1))) u_relu_d1 (
    .din(d1_out_data), .dout(d1_relu)
  );

  dense #(
    .DATA_W(DATA_W), .N_IN(HIDDEN), .N_OUT(N_CLASSES), .SEED(200),
    .Z_IN(act_zero(NB + 1)), .Z_W(weight_zero(NB + 2)), .Z_OUT(act_zero(NB + 2)),
    .MULT(conv_mult(HIDDEN)), .SHIFT(conv_shift(DATA_W))
  ) u_dense2 (
    .clk, .rst_n, .enable(d1_done), .done(done),
    .in_addr(d1_out_addr), .in_data(d1_relu),
    .out_addr(out_addr), .out_data(out_data)
  );

endmodule
