// tiny_transformer: integer-only encoder-only Transformer accelerator for
// time-series windows (forecasting, classification, anomaly residuals).
//
// Data path (Fig. 2 of the paper): an [N_STEPS x N_FEAT] window X is
// projected to D_MODEL features by a linear layer, a positional-encoding
// table is added, one post-norm encoder layer (one-head self-attention,
// residual add, BatchNorm, 4x feed-forward, residual add, BatchNorm) is
// applied, the result is averaged over time and a last linear layer gives
// the N_OUT outputs Y. Every tensor is a b-bit (DATA_W) asymmetric integer
// code; every layer ends in a multiply-and-shift requantisation.
// The layers run one at a time, each as a single multiply-accumulate loop,
// with a tensor_buffer between consecutive layers; a sequencer here starts
// each stage when the previous one reports done.
//
// Host interface (a plain parallel port, this design's choice; in the paper
// a microcontroller feeds the FPGA):
//   cfg_we/cfg_sel/cfg_addr/cfg_data  load weights, biases, tables and
//        quantisation constants once after reset (targets in tt_pkg SEL_*),
//   x_we/x_addr/x_data  write the quantised window, index t*N_FEAT + f,
//   start  pulse to run one inference; busy stays high until done pulses,
//   y_addr -> y_data  read result k one cycle after setting the address.
// Inference latency with the defaults (PeMS forecasting configuration):
// about 97,000 cycles; see the README for the formula.
module tiny_transformer import tt_pkg::*; #(
  parameter int unsigned DATA_W  = 6,
  parameter int unsigned N_STEPS = 24,
  parameter int unsigned N_FEAT  = 1,
  parameter int unsigned D_MODEL = 16,
  parameter int unsigned N_OUT   = 1,
  localparam int unsigned XAW    = ((N_STEPS*N_FEAT)  > 1) ? $clog2(N_STEPS*N_FEAT)  : 1,
  localparam int unsigned EAW    = ((N_STEPS*D_MODEL) > 1) ? $clog2(N_STEPS*D_MODEL) : 1,
  localparam int unsigned GAW    = (D_MODEL > 1) ? $clog2(D_MODEL) : 1,
  localparam int unsigned KW     = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              x_we,
  input  logic [XAW-1:0]    x_addr,
  input  logic [DATA_W-1:0] x_data,
  input  logic              cfg_we,
  input  logic [7:0]        cfg_sel,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [KW-1:0]     y_addr,
  output logic [DATA_W-1:0] y_data
);

  typedef enum logic [2:0] {ST_IDLE, ST_IN, ST_PE, ST_ENC, ST_GAP, ST_OUT} step_e;
  step_e step;
  logic  kick;
  logic [7:0] sub_done;
  logic [4:0] unused_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      step <= ST_IDLE; kick <= 1'b0; done <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      if (step == ST_IDLE) begin
        if (start) begin step <= ST_IN; kick <= 1'b1; end
      end else if (sub_done[step]) begin
        if (step == ST_OUT) begin
          step <= ST_IDLE; done <= 1'b1;
        end else begin
          step <= step_e'(3'(step) + 3'd1); kick <= 1'b1;
        end
      end
    end
  end
  assign busy = (step != ST_IDLE);
  assign sub_done[0] = 1'b0;
  assign sub_done[7:6] = 2'b0;

  // ---- buffers -------------------------------------------------------------
  logic [XAW-1:0]    xb_ra;
  logic [DATA_W-1:0] xb_rd;
  logic              p_we, pe_we, e_we, o_we, g_we, yb_we;
  logic [EAW-1:0]    p_wa, e_wa, o_wa, p_ra, pe_ra, e_ra, o_ra;
  logic [DATA_W-1:0] p_wd, e_wd, o_wd, p_rd, pe_rd, e_rd, o_rd;
  logic [GAW-1:0]    g_wa, g_ra;
  logic [DATA_W-1:0] g_wd, g_rd;
  logic [KW-1:0]     yb_wa;
  logic [DATA_W-1:0] yb_wd;

  // input window, written by the host
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_STEPS*N_FEAT)) u_xbuf (
    .clk, .we(x_we), .waddr(x_addr), .wdata(x_data), .raddr(xb_ra), .rdata(xb_rd));
  // projected input
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_STEPS*D_MODEL)) u_pbuf (
    .clk, .we(p_we), .waddr(p_wa), .wdata(p_wd), .raddr(p_ra), .rdata(p_rd));
  // positional-encoding table, loaded through the parameter port
  assign pe_we = cfg_we && cfg_sel == SEL_PE_TAB;
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_STEPS*D_MODEL)) u_pebuf (
    .clk, .we(pe_we), .waddr(EAW'(cfg_addr)), .wdata(cfg_data[DATA_W-1:0]), .raddr(pe_ra), .rdata(pe_rd));
  // encoder input
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_STEPS*D_MODEL)) u_ebuf (
    .clk, .we(e_we), .waddr(e_wa), .wdata(e_wd), .raddr(e_ra), .rdata(e_rd));
  // encoder output
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_STEPS*D_MODEL)) u_obuf (
    .clk, .we(o_we), .waddr(o_wa), .wdata(o_wd), .raddr(o_ra), .rdata(o_rd));
  // pooled features
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(D_MODEL)) u_gbuf (
    .clk, .we(g_we), .waddr(g_wa), .wdata(g_wd), .raddr(g_ra), .rdata(g_rd));
  // results, read by the host
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N_OUT)) u_ybuf (
    .clk, .we(yb_we), .waddr(yb_wa), .wdata(yb_wd), .raddr(y_addr), .rdata(y_data));

  // ---- input projection ------------------------------------------------------
  qlinear #(.DATA_W(DATA_W), .ROWS(N_STEPS), .IN(N_FEAT), .OUT(D_MODEL)) u_in_lin (
    .clk, .rst_n, .start(kick && step == ST_IN), .busy(unused_busy[0]), .done(sub_done[ST_IN]),
    .x_addr(xb_ra), .x_data(xb_rd), .y_we(p_we), .y_addr(p_wa), .y_data(p_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_IN_LIN), .cfg_addr, .cfg_data);

  logic [EAW-1:0] pe_add_b;
  qadd #(.DATA_W(DATA_W), .LEN(N_STEPS*D_MODEL)) u_pe_add (
    .clk, .rst_n, .start(kick && step == ST_PE), .busy(unused_busy[1]), .done(sub_done[ST_PE]),
    .a_addr(p_ra), .a_data(p_rd), .b_addr(pe_add_b), .b_data(pe_rd),
    .y_we(e_we), .y_addr(e_wa), .y_data(e_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_PE_ADD), .cfg_addr, .cfg_data);
  assign pe_ra = pe_add_b;

  // ---- encoder -------------------------------------------------------------
  encoder_layer #(.DATA_W(DATA_W), .N(N_STEPS), .D(D_MODEL)) u_enc (
    .clk, .rst_n, .start(kick && step == ST_ENC), .busy(unused_busy[2]), .done(sub_done[ST_ENC]),
    .x_addr(e_ra), .x_data(e_rd), .y_we(o_we), .y_addr(o_wa), .y_data(o_wd),
    .cfg_we(cfg_we && cfg_sel >= SEL_ENC && cfg_sel < SEL_GAP),
    .cfg_sel(cfg_sel - SEL_ENC), .cfg_addr, .cfg_data);

  // ---- output projection -------------------------------------------------
  qgap #(.DATA_W(DATA_W), .ROWS(N_STEPS), .D(D_MODEL)) u_gap (
    .clk, .rst_n, .start(kick && step == ST_GAP), .busy(unused_busy[3]), .done(sub_done[ST_GAP]),
    .x_addr(o_ra), .x_data(o_rd), .y_we(g_we), .y_addr(g_wa), .y_data(g_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_GAP), .cfg_addr, .cfg_data);

  qlinear #(.DATA_W(DATA_W), .ROWS(1), .IN(D_MODEL), .OUT(N_OUT)) u_out_lin (
    .clk, .rst_n, .start(kick && step == ST_OUT), .busy(unused_busy[4]), .done(sub_done[ST_OUT]),
    .x_addr(g_ra), .x_data(g_rd), .y_we(yb_we), .y_addr(yb_wa), .y_data(yb_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_OUT_LIN), .cfg_addr, .cfg_data);

  // the host must not start a new window before the last one is done
  property p_no_start_while_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  a_no_start_while_busy: assert property (p_no_start_while_busy);

endmodule
