// qadd: element-wise sum of two quantised tensors with independent scales,
// used for the positional-encoding add and the two residual connections.
//
// y = clamp(((a-Za)*Ma >>> Na) + ((b-Zb)*Mb >>> Nb) + Zy): each operand is
// brought to the output scale by its own multiply-and-shift (round half up)
// before the sum. Both operand buffers are read at the same address, one
// element per cycle, so the whole tensor takes LEN cycles plus a 2-cycle
// tail. The paper shows the adds (Fig. 2) and requires integer-only
// arithmetic; the per-operand rescaling is this design's choice.
//
// Parameter port words: 0 Za, 1 Zb, 2 Ma, 3 Na, 4 Zy, 5 Mb, 6 Nb
// (tt_pkg::qp_e). Handshake: start pulse while idle; done pulse with the
// last result write.
module qadd import tt_pkg::*; #(
  parameter int unsigned DATA_W = 6,
  parameter int unsigned LEN    = 384,
  localparam int unsigned AW    = (LEN > 1) ? $clog2(LEN) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [AW-1:0]     a_addr,
  input  logic [DATA_W-1:0] a_data,
  output logic [AW-1:0]     b_addr,
  input  logic [DATA_W-1:0] b_data,
  output logic              y_we,
  output logic [AW-1:0]     y_addr,
  output logic [DATA_W-1:0] y_data,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);

  logic signed [ZP_W-1:0]    za, zb, zy;
  logic signed [MULT_W-1:0]  ma, mb;
  logic [SHIFT_W-1:0]        na, nb;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      za <= '0; zb <= '0; zy <= '0; ma <= '0; mb <= '0; na <= '0; nb <= '0;
    end else if (cfg_we && cfg_addr < 16'd7) begin
      case (qp_e'(cfg_addr[2:0]))
        QP_ZX:     za <= cfg_data[ZP_W-1:0];
        QP_ZW:     zb <= cfg_data[ZP_W-1:0];
        QP_MULT:   ma <= cfg_data[MULT_W-1:0];
        QP_SHIFT:  na <= cfg_data[SHIFT_W-1:0];
        QP_ZY:     zy <= cfg_data[ZP_W-1:0];
        QP_MULTB:  mb <= cfg_data[MULT_W-1:0];
        QP_SHIFTB: nb <= cfg_data[SHIFT_W-1:0];
        default: ;
      endcase
    end
  end

  logic        run, s_valid, s_end;
  logic [31:0] idx;
  logic [AW-1:0] s_addr;
  assign a_addr = AW'(idx);
  assign b_addr = AW'(idx);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; idx <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; idx <= '0;
    end else if (run) begin
      if (idx == LEN - 1) run <= 1'b0;
      else                idx <= idx + 1;
    end
  end

  always_ff @(posedge clk) begin
    s_addr <= AW'(idx);
    s_end  <= (idx == LEN - 1);
  end

  logic signed [ACC_W-1:0] ya, yb, ysum;
  always_comb begin
    ya   = scale_shift(ACC_W'($signed(a_data)) - ACC_W'(za), ma, na);
    yb   = scale_shift(ACC_W'($signed(b_data)) - ACC_W'(zb), mb, nb);
    ysum = sat(ya + yb + ACC_W'(zy), DATA_W);
  end

  always_ff @(posedge clk) begin
    y_addr <= s_addr;
    y_data <= ysum[DATA_W-1:0];
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
