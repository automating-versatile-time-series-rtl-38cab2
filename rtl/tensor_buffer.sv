// tensor_buffer: one quantised activation tensor held between two layers.
//
// A simple dual-port memory: one synchronous write port and one read port
// whose data appear one clock after the address (the behaviour of an FPGA
// block RAM). Layers of the accelerator run one after another, so each
// buffer has exactly one writer and one reader active at a time. The
// contents are not reset. The paper only counts such buffers in its memory
// footprint; the one-cycle read and the port layout are this design's choice.
module tensor_buffer #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned DEPTH  = 384,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
