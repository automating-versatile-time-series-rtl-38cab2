// qlinear_tb: self-checking test of the quantised linear layer.
// Two instances (without and with ReLU) share one input buffer model; each
// gets random weights, biases and quantisation constants through its
// parameter port, runs over a random [ROWS x IN] tensor and its writes are
// compared word for word with tt_ref_pkg::linear. The latency from start to
// done must be ROWS*OUT*IN + 1 cycles. Three random trials.
module qlinear_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, ROWS = 5, IN = 7, OUT = 6;
  localparam int XAW = $clog2(ROWS*IN), YAW = $clog2(ROWS*OUT);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              start;
  logic [1:0]        busy, done, y_we;
  logic [XAW-1:0]    x_addr [2];
  logic [BITS-1:0]   x_data [2];
  logic [YAW-1:0]    y_addr [2];
  logic [BITS-1:0]   y_data [2];
  logic [1:0]        cfg_we;
  logic [15:0]       cfg_addr;
  logic [31:0]       cfg_data;
  int                xmem [ROWS*IN];
  int                ymem [2][ROWS*OUT];
  int                nwr [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    qlinear #(.DATA_W(BITS), .ROWS(ROWS), .IN(IN), .OUT(OUT), .RELU(g == 1)) dut (
      .clk, .rst_n, .start, .busy(busy[g]), .done(done[g]),
      .x_addr(x_addr[g]), .x_data(x_data[g]), .y_we(y_we[g]), .y_addr(y_addr[g]), .y_data(y_data[g]),
      .cfg_we(cfg_we[g]), .cfg_addr, .cfg_data);
    always_ff @(posedge clk) begin
      x_data[g] <= BITS'(xmem[x_addr[g]]);
      if (y_we[g]) begin
        ymem[g][y_addr[g]] <= $signed(y_data[g]);
        nwr[g] <= nwr[g] + 1;
      end
    end
  end

  task automatic cfg_write(int which, int addr, int data);
    @(negedge clk);
    cfg_we = 2'b0; cfg_we[which] = 1'b1; cfg_addr = 16'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 2'b0;
  endtask

  task automatic load(int which, layer_p p);
    foreach (p.w[i]) cfg_write(which, i, p.w[i]);
    foreach (p.b[i]) cfg_write(which, OUT*IN + i, p.b[i]);
    cfg_write(which, OUT*IN + OUT + 0, p.zx);
    cfg_write(which, OUT*IN + OUT + 1, p.zw);
    cfg_write(which, OUT*IN + OUT + 2, p.m);
    cfg_write(which, OUT*IN + OUT + 3, p.n);
    cfg_write(which, OUT*IN + OUT + 4, p.zy);
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_p p [2];
    arr_t x, y;
    int cycles;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; nwr = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      x = rnd_codes(ROWS*IN, BITS);
      foreach (x[i]) xmem[i] = x[i];
      for (int g = 0; g < 2; g++) begin
        p[g] = new(BITS, IN, OUT*IN, OUT);
        p[g].zy = (trial == 2) ? 0 : p[g].zy;
        load(g, p[g]);
      end
      nwr = '{0, 0};
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!(done[0] && done[1])) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== ROWS*OUT*IN + 1) begin
        failures++; $display("latency %0d expected %0d", cycles, ROWS*OUT*IN + 1);
      end
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        y = linear(x, ROWS, IN, OUT, p[g].w, p[g].b, p[g].zx, p[g].zw, p[g].m, p[g].n, p[g].zy, g == 1, BITS);
        checks++;
        if (nwr[g] !== ROWS*OUT) begin failures++; $display("dut%0d wrote %0d values", g, nwr[g]); end
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
