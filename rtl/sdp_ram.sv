// sdp_ram: simple dual-port RAM used as the accelerator's input buffer and
// as the output buffer of every layer.
//
// One write port and one read port on the same clock. A read returns the
// word at rd_addr one clock later (registered output, as a block RAM does);
// reading and writing the same address in one cycle returns the old word.
// Feature maps are stored time-major: word t*C + c holds channel c of time
// step t. The paper names the buffers and their address/data ports; the
// storage order and the one-cycle read latency are this design's choices.
module sdp_ram #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned DEPTH  = 17640,
  parameter int unsigned ADDR_W = gesture_pkg::ADDR_W
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [ADDR_W-1:0]        wr_addr,
  input  logic signed [DATA_W-1:0] wr_data,
  input  logic [ADDR_W-1:0]        rd_addr,
  output logic signed [DATA_W-1:0] rd_data
);
  logic signed [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (wr_addr < ADDR_W'(DEPTH))) mem[int'(wr_addr)] <= wr_data;
    rd_data <= (rd_addr < ADDR_W'(DEPTH)) ? mem[int'(rd_addr)] : '0;
  end

  // Cleared at configuration, as an FPGA block RAM is.
  initial for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
endmodule
