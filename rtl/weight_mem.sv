// weight_mem -- coupling-weight memory of one oscillator.
//
// Holds the DEPTH signed weights W_i0 .. W_i(DEPTH-1) of one row of the
// weight matrix. Because the serial arithmetic circuit uses the weights one at
// a time, they can live in an addressable memory instead of N parallel
// registers; the paper points out that this lets synthesis map them onto
// block RAM. The port style (one synchronous write port for the host, one
// synchronous read port with enable for the arithmetic circuit, one cycle of
// read latency, no reset of the contents) is this design's choice and is the
// form FPGA tools infer as simple dual-port block RAM.
module weight_mem #(
  parameter int unsigned DEPTH = onn_pkg::N_OSC_DEFAULT,
  parameter int unsigned WIDTH = onn_pkg::WEIGHT_BITS_DEFAULT,
  localparam int unsigned AW   = onn_pkg::idx_width(DEPTH)
) (
  input  logic                    clk,
  // write port (host)
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic signed [WIDTH-1:0] wdata,
  // read port (serial arithmetic circuit)
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output logic signed [WIDTH-1:0] rdata
);

  logic signed [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
