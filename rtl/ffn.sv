// ffn: position-wise feed-forward network of the encoder,
// y = relu(x W1 + b1) W2 + b2, with a hidden width HID = 4 * D.
//
// Two qlinear layers run one after the other: the first (with ReLU,
// realised as max(y, Zy)) writes the [N x HID] hidden tensor into a local
// tensor_buffer, the second reads it and writes the block's result.
// Latency: 2*N*D*HID cycles plus a few per step. The hidden width 4*D is
// the paper's; the ReLU and the schedule are this design's choices.
//
// Parameter port: cfg_sel SEL_FF1 / SEL_FF2 (tt_pkg) picks the layer.
// Handshake: start pulse while idle; done pulse with the last result write.
module ffn import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned N      = 24,
  parameter int unsigned D      = 16,
  parameter int unsigned HID    = 4 * D,
  localparam int unsigned XAW   = ((N*D) > 1) ? $clog2(N*D) : 1,
  localparam int unsigned HAW   = ((N*HID) > 1) ? $clog2(N*HID) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [XAW-1:0]    x_addr,
  input  logic [DATA_W-1:0] x_data,
  output logic              y_we,
  output logic [XAW-1:0]    y_addr,
  output logic [DATA_W-1:0] y_data,
  input  logic              cfg_we,
  input  logic [7:0]        cfg_sel,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);

  logic              h_we, d1, d2, b1, b2, kick2;
  logic [HAW-1:0]    h_wa, h_ra;
  logic [DATA_W-1:0] h_wd, h_rd;

  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*HID)) u_hbuf (
    .clk, .we(h_we), .waddr(h_wa), .wdata(h_wd), .raddr(h_ra), .rdata(h_rd));

  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(D), .OUT(HID), .RELU(1'b1)) u_ff1 (
    .clk, .rst_n, .start, .busy(b1), .done(d1),
    .x_addr, .x_data, .y_we(h_we), .y_addr(h_wa), .y_data(h_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_FF1), .cfg_addr, .cfg_data);

  // second layer starts the cycle after the first has written its last value
  always_ff @(posedge clk) begin
    if (!rst_n) kick2 <= 1'b0;
    else        kick2 <= d1;
  end

  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(HID), .OUT(D)) u_ff2 (
    .clk, .rst_n, .start(kick2), .busy(b2), .done(d2),
    .x_addr(h_ra), .x_data(h_rd), .y_we, .y_addr, .y_data,
    .cfg_we(cfg_we && cfg_sel == SEL_FF2), .cfg_addr, .cfg_data);

  assign busy = b1 || kick2 || b2;
  assign done = d2;

endmodule
