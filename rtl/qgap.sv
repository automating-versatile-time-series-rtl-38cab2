// qgap: global average pooling over time, [ROWS x D] -> [1 x D],
// y[c] = requant(sum_r (x[r][c] - Zx)).
//
// The division by the number of time steps is folded into the output
// multiply-and-shift, so the block is an accumulator stepped over the rows
// of one feature (inner loop) and then over the features: ROWS*D cycles plus
// a 3-cycle tail. The paper gives the function (Fig. 2); the schedule and
// the folding are this design's choices.
//
// Parameter port words: Zx, -, M, N, Zy at tt_pkg::qp_e 0..4.
// Handshake: start pulse while idle; done pulse with the last result write.
module qgap import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned ROWS   = 24,
  parameter int unsigned D      = 16,
  localparam int unsigned XAW   = ((ROWS*D) > 1) ? $clog2(ROWS*D) : 1,
  localparam int unsigned YAW   = (D > 1) ? $clog2(D) : 1
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

  logic signed [ZP_W-1:0] zx;
  rq_t                    rq;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zx <= '0; rq <= '0;
    end else if (cfg_we && cfg_addr < 16'd5) begin
      case (qp_e'(cfg_addr[2:0]))
        QP_ZX:    zx       <= cfg_data[ZP_W-1:0];
        QP_MULT:  rq.mult  <= cfg_data[MULT_W-1:0];
        QP_SHIFT: rq.shift <= cfg_data[SHIFT_W-1:0];
        QP_ZY:    rq.zero  <= cfg_data[ZP_W-1:0];
        default: ;
      endcase
    end
  end

  logic        run;
  logic [31:0] r, c;
  assign x_addr = XAW'(r * D + c);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; r <= '0; c <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; r <= '0; c <= '0;
    end else if (run) begin
      if (r != ROWS - 1) r <= r + 1;
      else begin
        r <= '0;
        if (c != D - 1) c <= c + 1;
        else            run <= 1'b0;
      end
    end
  end

  logic                    s_valid, s_first, s_last, s_end;
  logic [YAW-1:0]          s_c;
  logic signed [ACC_W-1:0] acc, sum;

  always_ff @(posedge clk) begin
    s_first <= (r == 0);
    s_last  <= (r == ROWS - 1);
    s_c     <= YAW'(c);
    s_end   <= (r == ROWS - 1) && (c == D - 1);
  end

  assign sum = (s_first ? '0 : acc) + (ACC_W'($signed(x_data)) - ACC_W'(zx));

  always_ff @(posedge clk) begin
    if (s_valid) acc <= sum;
    y_addr <= s_c;
    y_data <= DATA_W'(requant(sum, rq, DATA_W));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 1'b0; y_we <= 1'b0; done <= 1'b0; busy <= 1'b0;
    end else begin
      s_valid <= run;
      y_we    <= s_valid && s_last;
      done    <= s_valid && s_end;
      if (start && !busy)        busy <= 1'b1;
      else if (s_valid && s_end) busy <= 1'b0;
    end
  end

endmodule
