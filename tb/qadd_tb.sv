// qadd_tb: self-checking test of the element-wise quantised add. Two random
// operand tensors with their own zero points and rescaling constants are
// summed; every written element is compared with tt_ref_pkg::add, the
// number of writes must be LEN and the latency LEN + 1 cycles. Four trials,
// the last with large multipliers so that the output saturates.
module qadd_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, LEN = 37;
  localparam int AW = $clog2(LEN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, y_we, cfg_we;
  logic [AW-1:0]   a_addr, b_addr, y_addr;
  logic [BITS-1:0] a_data, b_data, y_data;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  int amem [LEN], bmem [LEN], ymem [LEN];
  int nwr, nsat;

  qadd #(.DATA_W(BITS), .LEN(LEN)) dut (
    .clk, .rst_n, .start, .busy, .done, .a_addr, .a_data, .b_addr, .b_data,
    .y_we, .y_addr, .y_data, .cfg_we, .cfg_addr, .cfg_data);

  always_ff @(posedge clk) begin
    a_data <= BITS'(amem[a_addr]);
    b_data <= BITS'(bmem[b_addr]);
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
    layer_p p;
    arr_t a, b, y;
    cfg_q_t q;
    int cycles;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; nwr = 0; nsat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      a = rnd_codes(LEN, BITS); b = rnd_codes(LEN, BITS);
      foreach (a[i]) begin amem[i] = a[i]; bmem[i] = b[i]; end
      p = new(BITS, 1, 0, 0);
      p.n = 14 + trial % 2; p.nb = 15 - trial % 2;
      if (trial == 3) begin p.n = 13; p.nb = 12; end
      q.delete(); cfg_small(q, 0, p); drive(q);
      nwr = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!done) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== LEN + 1) begin failures++; $display("latency %0d", cycles); end
      @(posedge clk); #1;
      y = add(a, b, p.zx, p.zw, p.m, p.n, p.mb, p.nb, p.zy, BITS);
      checks++;
      if (nwr !== LEN) begin failures++; $display("wrote %0d", nwr); end
      foreach (y[i]) begin
        checks++;
        if (y[i] == 31 || y[i] == -32) nsat++;
        if (ymem[i] !== y[i]) begin
          failures++;
          if (failures < 10) $display("y[%0d]=%0d expected %0d", i, ymem[i], y[i]);
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
