// payload_buffer: byte memory holding the MAC frame to be backscattered.
//
// One write port for the sensor/host side and one synchronous read port
// for the framer (data appears the cycle after the address). DEPTH
// defaults to 209 bytes, the largest 802.11b PSDU that fits in one
// Bluetooth advertising payload (at 11 Mbit/s). The memory is not reset.
//
// The paper says only that the baseband takes "the payload as the input";
// the memory, its ports and its size rule are this design's choices.
module payload_buffer #(
  parameter int unsigned DEPTH = 209,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < AW'(DEPTH)) mem[wr_addr] <= wr_data;
    rd_data <= (rd_addr < AW'(DEPTH)) ? mem[rd_addr] : 8'h00;
  end
endmodule
