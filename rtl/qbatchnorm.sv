// qbatchnorm: integer-only BatchNorm over the d_model features of a
// [ROWS x D] tensor, y[r][c] = requant((x[r][c]-Zx) * g[c] + beta[c]).
//
// Inference-time BatchNorm is an affine map per feature. The running
// statistics and the learned weight and bias are folded offline into a
// signed DATA_W-bit gain g[c] and an accumulator-scale bias beta[c], both
// symmetric (zero point 0) as the paper prescribes for BatchNorm statistics;
// the common scale goes into the output multiply-and-shift. One element per
// cycle in row-major order: ROWS*D cycles plus a 2-cycle tail.
//
// Parameter port words: [0,D) gains, [D,2D) biases, then Zx, -, M, N, Zy at
// 2D + tt_pkg::qp_e. Handshake: start pulse while idle; done pulse with the
// last result write.
module qbatchnorm import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned ROWS   = 24,
  parameter int unsigned D      = 16,
  localparam int unsigned AW    = ((ROWS*D) > 1) ? $clog2(ROWS*D) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [AW-1:0]     x_addr,
  input  logic [DATA_W-1:0] x_data,
  output logic              y_we,
  output logic [AW-1:0]     y_addr,
  output logic [DATA_W-1:0] y_data,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);

  localparam int unsigned QB = 2 * D;

  logic signed [DATA_W-1:0] g_mem [D];
  logic signed [ACC_W-1:0]  b_mem [D];
  logic signed [ZP_W-1:0]   zx;
  rq_t                      rq;

  always_ff @(posedge clk) begin
    if (cfg_we && 32'(cfg_addr) < D)
      g_mem[cfg_addr] <= cfg_data[DATA_W-1:0];
    if (cfg_we && 32'(cfg_addr) >= D && 32'(cfg_addr) < QB)
      b_mem[32'(cfg_addr) - D] <= cfg_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zx <= '0; rq <= '0;
    end else if (cfg_we && 32'(cfg_addr) >= QB && 32'(cfg_addr) < QB + 5) begin
      case (qp_e'(32'(cfg_addr) - QB))
        QP_ZX:    zx       <= cfg_data[ZP_W-1:0];
        QP_MULT:  rq.mult  <= cfg_data[MULT_W-1:0];
        QP_SHIFT: rq.shift <= cfg_data[SHIFT_W-1:0];
        QP_ZY:    rq.zero  <= cfg_data[ZP_W-1:0];
        default: ;
      endcase
    end
  end

  logic          run, s_valid, s_end;
  logic [31:0]   idx, ch, s_ch;
  logic [AW-1:0] s_addr;
  assign x_addr = AW'(idx);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; idx <= '0; ch <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; idx <= '0; ch <= '0;
    end else if (run) begin
      if (idx == ROWS * D - 1) run <= 1'b0;
      else                     idx <= idx + 1;
      ch <= (ch == D - 1) ? '0 : ch + 1;
    end
  end

  always_ff @(posedge clk) begin
    s_addr <= AW'(idx);
    s_ch   <= ch;
    s_end  <= (idx == ROWS * D - 1);
  end

  logic signed [ACC_W-1:0] acc, yq;
  always_comb begin
    acc = (ACC_W'($signed(x_data)) - ACC_W'(zx)) * ACC_W'(g_mem[s_ch]) + b_mem[s_ch];
    yq  = requant(acc, rq, DATA_W);
  end

  always_ff @(posedge clk) begin
    y_addr <= s_addr;
    y_data <= yq[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 1'b0; y_we <= 1'b0; done <= 1'b0; busy <= 1'b0;
    end else begin
      s_valid <= run;
      y_we    <= s_valid;
      done    <= s_valid && s_end;
      if (start && !busy)        busy <= 1'b1;
      else if (s_valid && s_end) busy <= 1'b0;
    end
  end

endmodule
