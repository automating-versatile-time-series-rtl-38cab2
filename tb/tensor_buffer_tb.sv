// tensor_buffer_tb: self-checking test of the activation buffer. Random
// words are written to every address, then read back while new writes go
// to other addresses; read data must appear exactly one cycle after the
// address and match a shadow array. Also checks read-during-write to the
// same address returns the old word.
module tensor_buffer_tb;
  localparam int W = 6, DEPTH = 45;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0]  wdata, rdata;
  logic [W-1:0]  shadow [DEPTH];

  tensor_buffer #(.DATA_W(W), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_d;
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = W'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int rep = 0; rep < 4 * DEPTH; rep++) begin
      int ra, wa;
      ra = $urandom_range(DEPTH - 1);
      wa = $urandom_range(DEPTH - 1);
      @(negedge clk);
      raddr = AW'(ra);
      expect_d = shadow[ra];           // old word even if written this cycle
      we = 1; waddr = AW'(wa); wdata = W'($urandom);
      @(posedge clk);
      shadow[wa] = wdata;
      #1;
      checks++;
      if (rdata !== expect_d) begin
        failures++;
        if (failures < 10) $display("read %0d got %0d expected %0d", ra, rdata, expect_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
