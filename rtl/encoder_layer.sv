// encoder_layer: the single post-norm Transformer encoder layer,
//   h = BN1(x + OHSA(x)),  y = BN2(h + FFN(h)).
//
// The five steps (attention, first residual add, first BatchNorm,
// feed-forward, second residual add, second BatchNorm) run one after
// another under a sequencer; the intermediate tensors are held in local
// tensor_buffers. The layer reads its input through x_addr/x_data twice:
// once in the attention block (three projections) and once as the residual
// operand of the first add. The wiring follows Fig. 2 of the paper; the
// sequential schedule is this design's choice.
//
// Parameter port: cfg_sel 0..6 reach the attention block, SEL_ADD1,
// SEL_BN1, SEL_FFN + {0,1}, SEL_ADD2, SEL_BN2 (tt_pkg) the rest.
// Handshake: start pulse while idle; done pulse with the last result write.
module encoder_layer import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned N      = 24,
  parameter int unsigned D      = 16,
  localparam int unsigned XAW   = ((N*D) > 1) ? $clog2(N*D) : 1
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

  typedef enum logic [2:0] {ST_IDLE, ST_ATT, ST_ADD1, ST_BN1, ST_FFN, ST_ADD2, ST_BN2} step_e;
  step_e step;
  logic  kick;
  logic [7:0] sub_done;
  logic [5:0] unused_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      step <= ST_IDLE; kick <= 1'b0; done <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      if (step == ST_IDLE) begin
        if (start) begin step <= ST_ATT; kick <= 1'b1; end
      end else if (sub_done[step]) begin
        if (step == ST_BN2) begin
          step <= ST_IDLE; done <= 1'b1;
        end else begin
          step <= step_e'(3'(step) + 3'd1); kick <= 1'b1;
        end
      end
    end
  end
  assign busy = (step != ST_IDLE);
  assign sub_done[0] = 1'b0;
  assign sub_done[7] = 1'b0;

  // buffers: attention output, first sum, first norm, FFN output, second sum
  logic              at_we, r1_we, h_we, f_we, r2_we;
  logic [XAW-1:0]    at_wa, r1_wa, h_wa, f_wa, r2_wa;
  logic [DATA_W-1:0] at_wd, r1_wd, h_wd, f_wd, r2_wd;
  logic [XAW-1:0]    at_ra, r1_ra, h_ra, f_ra, r2_ra;
  logic [DATA_W-1:0] at_rd, r1_rd, h_rd, f_rd, r2_rd;

  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_atbuf (.clk, .we(at_we), .waddr(at_wa), .wdata(at_wd), .raddr(at_ra), .rdata(at_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_r1buf (.clk, .we(r1_we), .waddr(r1_wa), .wdata(r1_wd), .raddr(r1_ra), .rdata(r1_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_hbuf  (.clk, .we(h_we),  .waddr(h_wa),  .wdata(h_wd),  .raddr(h_ra),  .rdata(h_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_fbuf  (.clk, .we(f_we),  .waddr(f_wa),  .wdata(f_wd),  .raddr(f_ra),  .rdata(f_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_r2buf (.clk, .we(r2_we), .waddr(r2_wa), .wdata(r2_wd), .raddr(r2_ra), .rdata(r2_rd));

  logic [XAW-1:0] x_att_a, x_add_a, h_ffn_a, h_add_a;

  ohsa #(.DATA_W(DATA_W), .N(N), .D(D)) u_att (
    .clk, .rst_n, .start(kick && step == ST_ATT), .busy(unused_busy[0]), .done(sub_done[ST_ATT]),
    .x_addr(x_att_a), .x_data, .y_we(at_we), .y_addr(at_wa), .y_data(at_wd),
    .cfg_we(cfg_we && cfg_sel < 8'd8), .cfg_sel, .cfg_addr, .cfg_data);

  // residual 1: attention output (a) + layer input (b)
  qadd #(.DATA_W(DATA_W), .LEN(N*D)) u_add1 (
    .clk, .rst_n, .start(kick && step == ST_ADD1), .busy(unused_busy[1]), .done(sub_done[ST_ADD1]),
    .a_addr(at_ra), .a_data(at_rd), .b_addr(x_add_a), .b_data(x_data),
    .y_we(r1_we), .y_addr(r1_wa), .y_data(r1_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_ADD1), .cfg_addr, .cfg_data);

  qbatchnorm #(.DATA_W(DATA_W), .ROWS(N), .D(D)) u_bn1 (
    .clk, .rst_n, .start(kick && step == ST_BN1), .busy(unused_busy[2]), .done(sub_done[ST_BN1]),
    .x_addr(r1_ra), .x_data(r1_rd), .y_we(h_we), .y_addr(h_wa), .y_data(h_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_BN1), .cfg_addr, .cfg_data);

  ffn #(.DATA_W(DATA_W), .N(N), .D(D)) u_ffn (
    .clk, .rst_n, .start(kick && step == ST_FFN), .busy(unused_busy[3]), .done(sub_done[ST_FFN]),
    .x_addr(h_ffn_a), .x_data(h_rd), .y_we(f_we), .y_addr(f_wa), .y_data(f_wd),
    .cfg_we(cfg_we && (cfg_sel == SEL_FFN || cfg_sel == SEL_FFN + 8'd1)),
    .cfg_sel(cfg_sel - SEL_FFN), .cfg_addr, .cfg_data);

  // residual 2: FFN output (a) + first norm output (b)
  qadd #(.DATA_W(DATA_W), .LEN(N*D)) u_add2 (
    .clk, .rst_n, .start(kick && step == ST_ADD2), .busy(unused_busy[4]), .done(sub_done[ST_ADD2]),
    .a_addr(f_ra), .a_data(f_rd), .b_addr(h_add_a), .b_data(h_rd),
    .y_we(r2_we), .y_addr(r2_wa), .y_data(r2_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_ADD2), .cfg_addr, .cfg_data);

  qbatchnorm #(.DATA_W(DATA_W), .ROWS(N), .D(D)) u_bn2 (
    .clk, .rst_n, .start(kick && step == ST_BN2), .busy(unused_busy[5]), .done(sub_done[ST_BN2]),
    .x_addr(r2_ra), .x_data(r2_rd), .y_we, .y_addr, .y_data,
    .cfg_we(cfg_we && cfg_sel == SEL_BN2), .cfg_addr, .cfg_data);

  // shared read ports: the step in progress owns them
  assign x_addr = (step == ST_ADD1) ? x_add_a : x_att_a;
  assign h_ra   = (step == ST_ADD2) ? h_add_a : h_ffn_a;

endmodule
