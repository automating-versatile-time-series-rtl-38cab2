// qsoftmax: row-wise integer-only softmax of the attention scores.
//
// For each row of a [ROWS x COLS] score tensor the block makes three passes
// over the row and one division:
//   1. max:   m = max_j s_j
//   2. sum:   e_j = LUT[m - s_j], sum = sum_j e_j
//   3. recip: q = floor(2^RECIP_FRAC / sum) by a shift-subtract divider
//             (RECIP_FRAC+1 cycles)
//   4. out:   p_j = round(e_j * (2^b - 1) * q / 2^RECIP_FRAC), clamped to
//             2^b - 1, written as p_j - 2^(b-1)
// LUT[d] holds round((2^EXP_W - 1) * exp(-d * S_s)) for the score scale S_s;
// it has 2^DATA_W entries, because m - s_j of two b-bit codes is 0..2^b-1,
// and it is loaded at run time. The output is a probability quantised
// on [0,1] with scale 1/(2^b-1) and zero point -2^(b-1), which is what the
// paper's quantiser (Eq. 1-2) gives for the range alpha=0, beta=1.
// A row takes 3*(COLS+1) + RECIP_FRAC + 2 cycles. The paper does not say how
// softmax is done in integers; this whole scheme is this design's choice.
//
// Parameter port words: [0, 2^DATA_W) exponential table. Handshake: start
// pulse while idle; done pulse with the last result write.
module qsoftmax import tt_pkg::*; #(
  parameter int unsigned DATA_W     = 6,
  parameter int unsigned ROWS       = 24,
  parameter int unsigned COLS       = 24,
  parameter int unsigned EXP_W      = 16,
  parameter int unsigned RECIP_FRAC = 30,
  localparam int unsigned AW        = ((ROWS*COLS) > 1) ? $clog2(ROWS*COLS) : 1
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

  localparam int unsigned LUT_N = 1 << DATA_W;
  localparam int unsigned SUM_W = 40;
  localparam int unsigned PROD_W = 64;

  logic [EXP_W-1:0] lut [LUT_N];
  always_ff @(posedge clk)
    if (cfg_we && 32'(cfg_addr) < LUT_N) lut[cfg_addr[DATA_W-1:0]] <= cfg_data[EXP_W-1:0];

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_SUM, S_DIV, S_OUT} st_e;
  st_e st;

  logic [31:0] row, j, s_j;
  logic        issuing, s_valid, s_lastj;
  logic signed [DATA_W-1:0] mx;
  logic [SUM_W-1:0]         sum, rem, rem_sh;
  logic [RECIP_FRAC:0]      q;
  logic [31:0]              dcnt;

  assign x_addr = AW'(row * COLS + j);
  assign busy   = (st != S_IDLE);

  // element returned by the score buffer this cycle
  logic signed [DATA_W-1:0] xs;
  logic [DATA_W-1:0]        diff;
  logic [EXP_W-1:0]         e;
  logic [PROD_W-1:0]        prod;
  logic [PROD_W-1:0]        p;
  assign xs     = $signed(x_data);
  assign diff   = DATA_W'(mx - xs);
  assign e      = lut[diff];
  assign prod   = PROD_W'(e) * PROD_W'((1 << DATA_W) - 1) * PROD_W'(q);
  assign rem_sh = {rem[SUM_W-2:0], (dcnt == RECIP_FRAC)};

  always_comb begin
    p = (prod + (PROD_W'(1) << (RECIP_FRAC - 1))) >> RECIP_FRAC;
    if (p > PROD_W'((1 << DATA_W) - 1)) p = PROD_W'((1 << DATA_W) - 1);
  end

  always_ff @(posedge clk) begin
    s_j     <= j;
    s_lastj <= (j == COLS - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; issuing <= 1'b0; s_valid <= 1'b0;
      row <= '0; j <= '0; y_we <= 1'b0; done <= 1'b0;
    end else begin
      s_valid <= issuing;
      y_we    <= 1'b0;
      done    <= 1'b0;
      if (issuing) begin
        if (j == COLS - 1) issuing <= 1'b0;
        else               j <= j + 1;
      end
      case (st)
        S_IDLE: if (start) begin
          st <= S_MAX; row <= '0; j <= '0; issuing <= 1'b1;
        end
        S_MAX: if (s_valid) begin
          mx <= (s_j == 0 || xs > mx) ? xs : mx;
          if (s_lastj) begin
            st <= S_SUM; j <= '0; issuing <= 1'b1;
          end
        end
        S_SUM: if (s_valid) begin
          sum <= ((s_j == 0) ? '0 : sum) + SUM_W'(e);
          if (s_lastj) begin
            st <= S_DIV; rem <= '0; dcnt <= RECIP_FRAC;
          end
        end
        S_DIV: begin
          if (rem_sh >= sum) begin
            rem <= rem_sh - sum; q <= {q[RECIP_FRAC-1:0], 1'b1};
          end else begin
            rem <= rem_sh;       q <= {q[RECIP_FRAC-1:0], 1'b0};
          end
          if (dcnt == 0) begin
            st <= S_OUT; j <= '0; issuing <= 1'b1;
          end else dcnt <= dcnt - 1;
        end
        S_OUT: if (s_valid) begin
          y_we   <= 1'b1;
          y_addr <= AW'(row * COLS + s_j);
          y_data <= DATA_W'(p) - DATA_W'(1 << (DATA_W - 1));
          if (s_lastj) begin
            if (row == ROWS - 1) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              st <= S_MAX; row <= row + 1; j <= '0; issuing <= 1'b1;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
