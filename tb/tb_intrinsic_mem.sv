// Self-checking test of intrinsic_mem: the whole memory is loaded with
// random words, then read back in random order and compared, with the
// one-cycle read latency.
module tb_intrinsic_mem;
  int checks = 0, failures = 0;
  localparam int DEPTH = 96, W = 36;
  logic clk = 0;
  logic we;
  logic [6:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];

  intrinsic_mem #(.DEPTH(DEPTH), .WIDTH(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 7'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      raddr = 7'($urandom_range(DEPTH - 1));
      if (n % 7 == 3) begin   // overwrite while reading another word
        we = 1; waddr = 7'($urandom_range(DEPTH - 1)); wdata = {$urandom, $urandom};
        if (waddr == raddr) waddr = 7'((int'(waddr) + 1) % DEPTH);
      end else we = 0;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != model[raddr]) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h exp %h", raddr, rdata, model[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
