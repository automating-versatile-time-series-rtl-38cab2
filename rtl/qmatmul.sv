// qmatmul: integer-only product of two activation tensors, used inside the
// self-attention block for the scores Q*K^T and for the context A*V.
//
// y[r][c] = requant(sum_k (a[r][k]-Za) * (b'[k][c]-Zb)), where b' is the B
// buffer read as [COLS][INNER] and transposed (B_T=1, for K^T) or read as
// [INNER][COLS] directly (B_T=0, for V). The attention scale 1/sqrt(d_model)
// is folded into the output multiplier. As in qlinear, one multiply-
// accumulate per cycle: ROWS*COLS*INNER cycles plus a 3-cycle tail; both
// operand buffers answer one cycle after their address. The schedule and
// the folding of the scale are this design's choices; the paper names the
// attention block and its integer-only arithmetic.
//
// Parameter port words: Za, Zb, M, N, Zy at addresses tt_pkg::qp_e 0..4.
// Handshake: start pulse while idle; done pulse with the last result write.
module qmatmul import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned ROWS   = 24,
  parameter int unsigned INNER  = 16,
  parameter int unsigned COLS   = 24,
  parameter bit          B_T    = 1'b1,
  localparam int unsigned AAW   = ((ROWS*INNER) > 1) ? $clog2(ROWS*INNER) : 1,
  localparam int unsigned BAW   = ((COLS*INNER) > 1) ? $clog2(COLS*INNER) : 1,
  localparam int unsigned YAW   = ((ROWS*COLS)  > 1) ? $clog2(ROWS*COLS)  : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [AAW-1:0]    a_addr,
  input  logic [DATA_W-1:0] a_data,
  output logic [BAW-1:0]    b_addr,
  input  logic [DATA_W-1:0] b_data,
  output logic              y_we,
  output logic [YAW-1:0]    y_addr,
  output logic [DATA_W-1:0] y_data,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);

  logic signed [ZP_W-1:0] za, zb;
  rq_t                    rq;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      za <= '0; zb <= '0; rq <= '0;
    end else if (cfg_we && cfg_addr < 16'd5) begin
      case (qp_e'(cfg_addr[2:0]))
        QP_ZX:    za       <= cfg_data[ZP_W-1:0];
        QP_ZW:    zb       <= cfg_data[ZP_W-1:0];
        QP_MULT:  rq.mult  <= cfg_data[MULT_W-1:0];
        QP_SHIFT: rq.shift <= cfg_data[SHIFT_W-1:0];
        QP_ZY:    rq.zero  <= cfg_data[ZP_W-1:0];
        default: ;
      endcase
    end
  end

  // issue stage: loops r (rows), c (columns), k (inner, fastest)
  logic        run;
  logic [31:0] r, c, k;
  logic        last_k, last_c, last_r;
  assign last_k = (k == INNER - 1);
  assign last_c = (c == COLS - 1);
  assign last_r = (r == ROWS - 1);
  assign a_addr = AAW'(r * INNER + k);
  assign b_addr = B_T ? BAW'(c * INNER + k) : BAW'(k * COLS + c);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; r <= '0; c <= '0; k <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; r <= '0; c <= '0; k <= '0;
    end else if (run) begin
      if (!last_k) k <= k + 1;
      else begin
        k <= '0;
        if (!last_c) c <= c + 1;
        else begin
          c <= '0;
          if (!last_r) r <= r + 1;
          else run <= 1'b0;
        end
      end
    end
  end

  // MAC stage
  logic                    s_valid, s_first, s_lastk, s_end;
  logic [YAW-1:0]          s_yaddr;
  logic signed [ACC_W-1:0] acc, sum, prod;

  always_ff @(posedge clk) begin
    s_first <= (k == 0);
    s_lastk <= last_k;
    s_yaddr <= YAW'(r * COLS + c);
    s_end   <= last_k && last_c && last_r;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s_valid <= 1'b0;
    else        s_valid <= run;
  end

  always_comb begin
    prod = (ACC_W'($signed(a_data)) - ACC_W'(za)) * (ACC_W'($signed(b_data)) - ACC_W'(zb));
    sum  = (s_first ? '0 : acc) + prod;
  end

  always_ff @(posedge clk) begin
    if (s_valid) acc <= sum;
    y_addr <= s_yaddr;
    y_data <= DATA_W'(requant(sum, rq, DATA_W));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_we <= 1'b0; done <= 1'b0; busy <= 1'b0;
    end else begin
      y_we <= s_valid && s_lastk;
      done <= s_valid && s_end;
      if (start && !busy)        busy <= 1'b1;
      else if (s_valid && s_end) busy <= 1'b0;
    end
  end

endmodule
