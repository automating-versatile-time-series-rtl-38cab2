// qmatmul_tb: self-checking test of the activation-by-activation product.
// Two instances run at once on the same random A buffer: one reads B as
// [COLS x INNER] and transposes it (the Q K^T case), the other reads B as
// [INNER x COLS] (the A V case). Results are compared with
// tt_ref_pkg::matmul and the start-to-done latency must be
// ROWS*COLS*INNER + 1 cycles. Three random trials.
module qmatmul_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, ROWS = 5, INNER = 6, COLS = 4;
  localparam int AAW = $clog2(ROWS*INNER), BAW = $clog2(COLS*INNER), YAW = $clog2(ROWS*COLS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start;
  logic [1:0]        busy, done, y_we, cfg_we;
  logic [AAW-1:0]    a_addr [2];
  logic [BAW-1:0]    b_addr [2];
  logic [BITS-1:0]   a_data [2], b_data [2];
  logic [YAW-1:0]    y_addr [2];
  logic [BITS-1:0]   y_data [2];
  logic [15:0]       cfg_addr;
  logic [31:0]       cfg_data;
  int                amem [ROWS*INNER], bmem [COLS*INNER];
  int                ymem [2][ROWS*COLS];
  int                nwr [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    qmatmul #(.DATA_W(BITS), .ROWS(ROWS), .INNER(INNER), .COLS(COLS), .B_T(g == 0)) dut (
      .clk, .rst_n, .start, .busy(busy[g]), .done(done[g]),
      .a_addr(a_addr[g]), .a_data(a_data[g]), .b_addr(b_addr[g]), .b_data(b_data[g]),
      .y_we(y_we[g]), .y_addr(y_addr[g]), .y_data(y_data[g]),
      .cfg_we(cfg_we[g]), .cfg_addr, .cfg_data);
    always_ff @(posedge clk) begin
      a_data[g] <= BITS'(amem[a_addr[g]]);
      b_data[g] <= BITS'(bmem[b_addr[g]]);
      if (y_we[g]) begin
        ymem[g][y_addr[g]] <= $signed(y_data[g]);
        nwr[g] <= nwr[g] + 1;
      end
    end
  end

  task automatic drive(int which, cfg_q_t q);
    foreach (q[i]) begin
      @(negedge clk);
      cfg_we = 2'b0; cfg_we[which] = 1'b1; cfg_addr = 16'(q[i].addr); cfg_data = q[i].data;
    end
    @(negedge clk);
    cfg_we = 2'b0;
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_p p [2];
    arr_t a, b, y;
    cfg_q_t q;
    int cycles;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; nwr = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      a = rnd_codes(ROWS*INNER, BITS);
      b = rnd_codes(COLS*INNER, BITS);
      foreach (a[i]) amem[i] = a[i];
      foreach (b[i]) bmem[i] = b[i];
      for (int g = 0; g < 2; g++) begin
        p[g] = new(BITS, INNER, 0, 0);
        q.delete();
        cfg_small(q, 0, p[g]);
        drive(g, q);
      end
      nwr = '{0, 0};
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!(done[0] && done[1])) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== ROWS*COLS*INNER + 1) begin
        failures++; $display("latency %0d expected %0d", cycles, ROWS*COLS*INNER + 1);
      end
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        y = matmul(a, b, ROWS, INNER, COLS, g == 0, p[g].zx, p[g].zw, p[g].m, p[g].n, p[g].zy, BITS);
        checks++;
        if (nwr[g] !== ROWS*COLS) begin failures++; $display("dut%0d wrote %0d values", g, nwr[g]); end
        foreach (y[i]) begin
          checks++;
          if (ymem[g][i] !== y[i]) begin
            failures++;
            if (failures < 10) $display("dut%0d y[%0d]=%0d expected %0d", g, i, ymem[g][i], y[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
