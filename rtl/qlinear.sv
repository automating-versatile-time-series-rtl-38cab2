// qlinear: integer-only fully connected layer applied to every row of a
// tensor, y[r][o] = requant(bias[o] + sum_i (x[r][i]-Zx) * (w[o][i]-Zw)),
// with an optional ReLU, max(y, Zy), for the first feed-forward layer.
//
// The layer is one multiply-accumulate unit stepped over rows r, outputs o
// and inputs i (inner loop), i.e. ROWS*OUT*IN cycles plus a 3-cycle
// pipeline tail. Cycle 0 issues the input-buffer and weight addresses, cycle
// 1 multiplies and accumulates; after the last input of an output the
// accumulator is requantised by multiply-and-shift and written to the result
// buffer on the next edge. The paper specifies the function (an integer-only
// matrix multiplier with shift-based scaling, asymmetric weights, symmetric
// bias); the sequential one-MAC schedule, the ReLU and the run-time parameter
// port are this design's choices.
//
// Parameter port (cfg_*), word addresses: [0, OUT*IN) weights w[o][i] at
// o*IN+i (low DATA_W bits), [OUT*IN, OUT*IN+OUT) biases (32-bit, accumulator
// scale), then Zx, Zw, M, N, Zy at OUT*IN+OUT + tt_pkg::qp_e.
// Handshake: pulse start while idle; busy is high until the one-cycle done,
// which comes with the last result write.
module qlinear import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned ROWS   = 24,
  parameter int unsigned IN     = 1,
  parameter int unsigned OUT    = 16,
  parameter bit          RELU   = 1'b0,
  localparam int unsigned XAW   = ((ROWS*IN)  > 1) ? $clog2(ROWS*IN)  : 1,
  localparam int unsigned YAW   = ((ROWS*OUT) > 1) ? $clog2(ROWS*OUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [XAW-1:0]    x_addr,
  input  logic [DATA_W-1:0] x_data,
  output logic              y_we,
  output logic [YAW-1:0]    y_addr,
  output logic [DATA_W-1:0] y_data,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);

  localparam int unsigned NW = OUT * IN;
  localparam int unsigned QB = NW + OUT;          // first quantisation word

  // ---------------- parameters -------------------------------------------
  logic signed [DATA_W-1:0] w_mem [NW];
  logic signed [ACC_W-1:0]  b_mem [OUT];
  logic signed [ZP_W-1:0]   zx, zw;
  rq_t                      rq;

  always_ff @(posedge clk) begin
    if (cfg_we && 32'(cfg_addr) < NW)
      w_mem[cfg_addr] <= cfg_data[DATA_W-1:0];
    if (cfg_we && 32'(cfg_addr) >= NW && 32'(cfg_addr) < QB)
      b_mem[32'(cfg_addr) - NW] <= cfg_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zx <= '0; zw <= '0; rq <= '0;
    end else if (cfg_we && 32'(cfg_addr) >= QB && 32'(cfg_addr) < QB + 5) begin
      case (qp_e'(32'(cfg_addr) - QB))
        QP_ZX:    zx       <= cfg_data[ZP_W-1:0];
        QP_ZW:    zw       <= cfg_data[ZP_W-1:0];
        QP_MULT:  rq.mult  <= cfg_data[MULT_W-1:0];
        QP_SHIFT: rq.shift <= cfg_data[SHIFT_W-1:0];
        QP_ZY:    rq.zero  <= cfg_data[ZP_W-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- issue stage: loop counters -----------------------------
  logic        run;
  logic [31:0] r, o, i;
  logic        last_i, last_o, last_r;
  assign last_i = (i == IN - 1);
  assign last_o = (o == OUT - 1);
  assign last_r = (r == ROWS - 1);
  assign x_addr = XAW'(r * IN + i);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; r <= '0; o <= '0; i <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; r <= '0; o <= '0; i <= '0;
    end else if (run) begin
      if (!last_i) i <= i + 1;
      else begin
        i <= '0;
        if (!last_o) o <= o + 1;
        else begin
          o <= '0;
          if (!last_r) r <= r + 1;
          else run <= 1'b0;
        end
      end
    end
  end

  // ---------------- MAC stage ------------------------------------------
  logic signed [DATA_W-1:0] w_q;
  logic                     s_valid, s_first, s_lasti, s_end;
  logic [31:0]              s_o;
  logic [YAW-1:0]           s_yaddr;
  logic signed [ACC_W-1:0]  acc, sum, prod, yq;

  always_ff @(posedge clk) begin
    w_q     <= w_mem[o * IN + i];
    s_first <= (i == 0);
    s_lasti <= last_i;
    s_o     <= o;
    s_yaddr <= YAW'(r * OUT + o);
    s_end   <= last_i && last_o && last_r;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s_valid <= 1'b0;
    else        s_valid <= run;
  end

  always_comb begin
    prod = (ACC_W'($signed(x_data)) - ACC_W'(zx)) * (ACC_W'(w_q) - ACC_W'(zw));
    sum  = (s_first ? b_mem[s_o] : acc) + prod;
    yq   = requant(sum, rq, DATA_W);
    if (RELU && yq < ACC_W'(rq.zero)) yq = ACC_W'(rq.zero);
  end

  always_ff @(posedge clk) begin
    if (s_valid) acc <= sum;
    y_addr <= s_yaddr;
    y_data <= yq[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_we <= 1'b0; done <= 1'b0; busy <= 1'b0;
    end else begin
      y_we <= s_valid && s_lasti;
      done <= s_valid && s_end;
      if (start && !busy)          busy <= 1'b1;
      else if (s_valid && s_end)   busy <= 1'b0;
    end
  end

  // results stay inside the output tensor, and a start is never lost
  a_y_in_range: assert property (@(posedge clk) disable iff (!rst_n) y_we |-> 32'(y_addr) < ROWS * OUT);
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);

endmodule
