// encoder_layer_tb: self-checking test of the whole encoder layer (attention,
// add, BatchNorm, FFN, add, BatchNorm). Random constants for all sub-layers are
// loaded through the parameter port (cfg_sel per sub-layer), a random
// [N x D] input is encoded, and every output is compared with the
// reference chain in tt_ref_pkg::enc_p. Checks the latency against
// tt_ref_pkg::lat_encoder. Two trials with fresh parameters.
module encoder_layer_tb;
  import tt_ref_pkg::*;
  localparam int BITS = 6, N = 6, D = 4;
  localparam int AW = $clog2(N*D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, y_we, cfg_we;
  logic [AW-1:0]   x_addr, y_addr;
  logic [BITS-1:0] x_data, y_data;
  logic [7:0]      cfg_sel;
  logic [15:0]     cfg_addr;
  logic [31:0]     cfg_data;
  int xmem [N*D], ymem [N*D];
  int nwr;

  encoder_layer #(.DATA_W(BITS), .N(N), .D(D)) dut (
    .clk, .rst_n, .start, .busy, .done, .x_addr, .x_data,
    .y_we, .y_addr, .y_data, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data);

  always_ff @(posedge clk) begin
    x_data <= BITS'(xmem[x_addr]);
    if (y_we) begin ymem[y_addr] <= $signed(y_data); nwr <= nwr + 1; end
  end

  task automatic drive(cfg_q_t q);
    foreach (q[i]) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = 8'(q[i].sel); cfg_addr = 16'(q[i].addr); cfg_data = q[i].data;
    end
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enc_p p;
    arr_t x, y;
    cfg_q_t q;
    int cycles;
    start = 0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; nwr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      x = rnd_codes(N*D, BITS);
      foreach (x[i]) xmem[i] = x[i];
      p = new(BITS, N, D);
      q.delete(); p.cfg(q, 0, D); drive(q);
      nwr = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (!done) begin @(posedge clk); #1 cycles++; end
      checks++;
      if (cycles !== lat_encoder(N, D)) begin failures++; $display("latency %0d expected %0d", cycles, lat_encoder(N, D)); end
      @(posedge clk); #1;
      y = p.run(x, N, D, BITS);
      checks++;
      if (nwr !== N*D) begin failures++; $display("wrote %0d", nwr); end
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
