// ohsa: one-head self-attention over an [N x D] tensor,
// y = ((softmax(Q K^T / sqrt(D))) V) Wo + bo with Q = x Wq + bq, K = x Wk + bk,
// V = x Wv + bv, all in b-bit integers.
//
// Seven sub-operations run one after another under a small sequencer:
// the Q, K and V projections (qlinear, each reading the input buffer), the
// scores Q K^T (qmatmul, B transposed, 1/sqrt(D) folded into its output
// multiplier), the row softmax (qsoftmax), the context A V (qmatmul) and the
// output projection (qlinear), which writes the block's result. Q, K, V,
// scores, probabilities and context live in local tensor_buffers.
// Latency: 4*N*D*D + 2*N*N*D + N*(3*N + RECIP_FRAC + 5) cycles plus a few
// cycles per step. The paper gives the block and, through its parameter
// counts, the output projection; the schedule is this design's choice.
//
// Parameter port: cfg_sel chooses the sub-block (tt_pkg SEL_Q_LIN ..
// SEL_O_LIN), cfg_addr/cfg_data are that sub-block's words.
// Handshake: start pulse while idle; done pulse with the last result write.
module ohsa import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned N      = 24,
  parameter int unsigned D      = 16,
  localparam int unsigned XAW   = ((N*D) > 1) ? $clog2(N*D) : 1,
  localparam int unsigned SAW   = ((N*N) > 1) ? $clog2(N*N) : 1
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

  typedef enum logic [2:0] {ST_IDLE, ST_Q, ST_K, ST_V, ST_SC, ST_SM, ST_AV, ST_O} step_e;
  step_e step;
  logic  kick;
  logic [7:0] sub_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      step <= ST_IDLE; kick <= 1'b0; done <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      if (step == ST_IDLE) begin
        if (start) begin step <= ST_Q; kick <= 1'b1; end
      end else if (sub_done[step]) begin
        if (step == ST_O) begin
          step <= ST_IDLE; done <= 1'b1;
        end else begin
          step <= step_e'(3'(step) + 3'd1); kick <= 1'b1;
        end
      end
    end
  end
  assign busy = (step != ST_IDLE);
  assign sub_done[0] = 1'b0;

  // ---- buffers ------------------------------------------------------------
  logic              q_we, k_we, v_we, s_we, a_we, c_we;
  logic [XAW-1:0]    q_wa, k_wa, v_wa, c_wa;
  logic [SAW-1:0]    s_wa, a_wa;
  logic [DATA_W-1:0] q_wd, k_wd, v_wd, s_wd, a_wd, c_wd;
  logic [XAW-1:0]    q_ra, k_ra, v_ra, c_ra;
  logic [SAW-1:0]    s_ra, a_ra;
  logic [DATA_W-1:0] q_rd, k_rd, v_rd, s_rd, a_rd, c_rd;

  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_qbuf (.clk, .we(q_we), .waddr(q_wa), .wdata(q_wd), .raddr(q_ra), .rdata(q_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_kbuf (.clk, .we(k_we), .waddr(k_wa), .wdata(k_wd), .raddr(k_ra), .rdata(k_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_vbuf (.clk, .we(v_we), .waddr(v_wa), .wdata(v_wd), .raddr(v_ra), .rdata(v_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*N)) u_sbuf (.clk, .we(s_we), .waddr(s_wa), .wdata(s_wd), .raddr(s_ra), .rdata(s_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*N)) u_abuf (.clk, .we(a_we), .waddr(a_wa), .wdata(a_wd), .raddr(a_ra), .rdata(a_rd));
  tensor_buffer #(.DATA_W(DATA_W), .DEPTH(N*D)) u_cbuf (.clk, .we(c_we), .waddr(c_wa), .wdata(c_wd), .raddr(c_ra), .rdata(c_rd));

  // ---- projections ----------------------------------------------------------
  logic [XAW-1:0] xq_a, xk_a, xv_a;
  logic [6:0]     unused_busy;

  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(D), .OUT(D)) u_q (
    .clk, .rst_n, .start(kick && step == ST_Q), .busy(unused_busy[0]), .done(sub_done[ST_Q]),
    .x_addr(xq_a), .x_data, .y_we(q_we), .y_addr(q_wa), .y_data(q_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_Q_LIN), .cfg_addr, .cfg_data);
  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(D), .OUT(D)) u_k (
    .clk, .rst_n, .start(kick && step == ST_K), .busy(unused_busy[1]), .done(sub_done[ST_K]),
    .x_addr(xk_a), .x_data, .y_we(k_we), .y_addr(k_wa), .y_data(k_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_K_LIN), .cfg_addr, .cfg_data);
  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(D), .OUT(D)) u_v (
    .clk, .rst_n, .start(kick && step == ST_V), .busy(unused_busy[2]), .done(sub_done[ST_V]),
    .x_addr(xv_a), .x_data, .y_we(v_we), .y_addr(v_wa), .y_data(v_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_V_LIN), .cfg_addr, .cfg_data);

  always_comb begin
    unique case (step)
      ST_K:    x_addr = xk_a;
      ST_V:    x_addr = xv_a;
      default: x_addr = xq_a;
    endcase
  end

  // ---- scores, softmax, context -------------------------------------------
  qmatmul #(.DATA_W(DATA_W), .ROWS(N), .INNER(D), .COLS(N), .B_T(1'b1)) u_score (
    .clk, .rst_n, .start(kick && step == ST_SC), .busy(unused_busy[3]), .done(sub_done[ST_SC]),
    .a_addr(q_ra), .a_data(q_rd), .b_addr(k_ra), .b_data(k_rd),
    .y_we(s_we), .y_addr(s_wa), .y_data(s_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_SCORE), .cfg_addr, .cfg_data);

  qsoftmax #(.DATA_W(DATA_W), .ROWS(N), .COLS(N)) u_softmax (
    .clk, .rst_n, .start(kick && step == ST_SM), .busy(unused_busy[4]), .done(sub_done[ST_SM]),
    .x_addr(s_ra), .x_data(s_rd), .y_we(a_we), .y_addr(a_wa), .y_data(a_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_SOFTMAX), .cfg_addr, .cfg_data);

  qmatmul #(.DATA_W(DATA_W), .ROWS(N), .INNER(N), .COLS(D), .B_T(1'b0)) u_av (
    .clk, .rst_n, .start(kick && step == ST_AV), .busy(unused_busy[5]), .done(sub_done[ST_AV]),
    .a_addr(a_ra), .a_data(a_rd), .b_addr(v_ra), .b_data(v_rd),
    .y_we(c_we), .y_addr(c_wa), .y_data(c_wd),
    .cfg_we(cfg_we && cfg_sel == SEL_AV), .cfg_addr, .cfg_data);

  qlinear #(.DATA_W(DATA_W), .ROWS(N), .IN(D), .OUT(D)) u_o (
    .clk, .rst_n, .start(kick && step == ST_O), .busy(unused_busy[6]), .done(sub_done[ST_O]),
    .x_addr(c_ra), .x_data(c_rd), .y_we, .y_addr, .y_data,
    .cfg_we(cfg_we && cfg_sel == SEL_O_LIN), .cfg_addr, .cfg_data);

endmodule
