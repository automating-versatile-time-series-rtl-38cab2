// qgap_tb: self-checking test of global average pooling. A random [ROWS x D]
// tensor is pooled over its rows with random constants and each of the D
// outputs is compared with tt_ref_pkg::gap; the
// latency must be ROWS*D + 1 cycles. Three trials.
module qgap_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, ROWS = 5, D = 8;
  localparam int AW = $clog2(ROWS*D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, y_we, cfg_we;
  logic [AW-1:0]   x_addr;
  logic [$clog2(D)-1:0] y_addr;
  logic [BITS-1:0] x_data, y_data;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  int xmem [ROWS*D], ymem [D];
  int nwr;

  qgap #(.DATA_W(BITS), .ROWS(ROWS), .D(D)) dut (
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
    layer_p p;
    arr_t x, y;
    cfg_q_t q;
    int cycles;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; nwr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      x = rnd_codes(ROWS*D, BITS);
      foreach (x[i]) xmem[i] = x[i];
      p = new(BITS, ROWS, 0, 0);
      p.n = 14 + (clog2i(ROWS) + 1) / 2;
      q.delete(); cfg_small(q, 0, p); drive(q);
      nwr = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!done) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== ROWS*D + 1) begin failures++; $display("latency %0d", cycles); end
      @(posedge clk); #1;
      y = gap(x, ROWS, D, p.zx, p.m, p.n, p.zy, BITS);
      checks++;
      if (nwr !== D) begin failures++; $display("wrote %0d", nwr); end
      foreach (y[i]) begin
        checks++;
        if (ymem[i] !== y[i]) begin
          failures++;
          if (failures < 10) $display("y[%0d]=%0d expected %0d", i, ymem[i], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
