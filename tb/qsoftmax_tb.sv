// qsoftmax_tb: self-checking test of the integer softmax. The exponential
// table is computed for a score scale of 1/4, loaded through the parameter
// port, and random score rows (plus one row of equal scores and one with a
// single dominant score) are normalised. Every output is compared with
// tt_ref_pkg::softmax, the probabilities of each row must add up to about
// one, and the latency must be ROWS*(3*COLS + RECIP_FRAC + 4) cycles.
module qsoftmax_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, ROWS = 4, COLS = 7, FRAC = 30;
  localparam int AW = $clog2(ROWS*COLS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, y_we, cfg_we;
  logic [AW-1:0]   x_addr, y_addr;
  logic [BITS-1:0] x_data, y_data;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  int xmem [ROWS*COLS], ymem [ROWS*COLS];
  int nwr;

  qsoftmax #(.DATA_W(BITS), .ROWS(ROWS), .COLS(COLS), .RECIP_FRAC(FRAC)) dut (
    .clk, .rst_n, .start, .busy, .done, .x_addr, .x_data,
    .y_we, .y_addr, .y_data, .cfg_we, .cfg_addr, .cfg_data);

  always_ff @(posedge clk) begin
    x_data <= BITS'(xmem[x_addr]);
    if (y_we) begin ymem[y_addr] <= $signed(y_data); nwr <= nwr + 1; end
  end

  task automatic drive(cfg_q_t q);
    foreach (q[i]) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(q[i].addr); cfg_data = q[i].data;
    end
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arr_t x, y, lut;
    cfg_q_t q;
    int cycles, rowsum, expect_cycles;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; nwr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lut = exp_lut(BITS, 0.25);
    cfg_table(q, 0, lut); drive(q);
    expect_cycles = ROWS * (3*COLS + FRAC + 4);
    for (int trial = 0; trial < 3; trial++) begin
      x = rnd_codes(ROWS*COLS, BITS);
      if (trial == 1) begin
        for (int j = 0; j < COLS; j++) x[j] = 5;              // flat row
        for (int j = 0; j < COLS; j++) x[COLS + j] = -32;     // one dominant score
        x[COLS + 3] = 31;
      end
      foreach (x[i]) xmem[i] = x[i];
      nwr = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!done) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== expect_cycles) begin failures++; $display("latency %0d expected %0d", cycles, expect_cycles); end
      @(posedge clk); #1;
      y = softmax(x, ROWS, COLS, lut, BITS, FRAC);
      checks++;
      if (nwr !== ROWS*COLS) begin failures++; $display("wrote %0d", nwr); end
      foreach (y[i]) begin
        checks++;
        if (ymem[i] !== y[i]) begin
          failures++;
          if (failures < 10) $display("y[%0d]=%0d expected %0d", i, ymem[i], y[i]);
        end
      end
      // probabilities (code + 32, in 63rds) must sum to 63 within rounding
      for (int r = 0; r < ROWS; r++) begin
        rowsum = 0;
        for (int j = 0; j < COLS; j++) rowsum += ymem[r*COLS + j] + 32;
        checks++;
        if (rowsum < 63 - COLS || rowsum > 63 + COLS) begin
          failures++; $display("row %0d sums to %0d/63", r, rowsum);
        end
      end
      if (trial == 1) begin
        checks++;
        if (ymem[COLS + 3] !== 31) begin failures++; $display("dominant score gives %0d", ymem[COLS+3]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
