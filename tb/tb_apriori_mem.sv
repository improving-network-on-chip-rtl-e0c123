// Self-checking test of apriori_mem: random writes to the network bank
// and reads of the SISO bank over several half-iteration swaps, with a
// clear in between, against a two-bank model with per-entry valid flags.
// Read data is checked one cycle after its address.
module tb_apriori_mem;
  int checks = 0, failures = 0;
  localparam int DEPTH = 96, W = 16;
  logic clk = 0, rst = 1;
  logic clear, half, we;
  logic [6:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [2][DEPTH];
  bit           mv    [2][DEPTH];
  logic [W-1:0] exp_q;
  int n_zero = 0, n_data = 0;

  apriori_mem #(.DEPTH(DEPTH), .WIDTH(W)) dut (.clk, .rst, .clear, .half, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; half = 0; we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) mv[b][a] = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      @(negedge clk);
      if (cyc % 1000 == 999) half = ~half;
      clear = (cyc == 4500);
      we    = $urandom_range(99) < 40;
      waddr = 7'($urandom_range(DEPTH - 1));
      wdata = W'($urandom);
      raddr = 7'($urandom_range(DEPTH - 1));
      exp_q = mv[half][raddr] ? model[half][raddr] : '0;
      @(posedge clk);
      if (clear) begin
        for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) mv[b][a] = 0;
      end else if (we) begin
        model[!half][waddr] = wdata;
        mv[!half][waddr] = 1;
      end
      #1;
      if (!clear) begin
        checks++;
        if (rdata != exp_q) begin
          failures++;
          if (failures < 10) $display("cyc %0d half %0d raddr %0d: got %h exp %h", cyc, half, raddr, rdata, exp_q);
        end
        if (exp_q == 0) n_zero++; else n_data++;
      end
    end
    checks++;
    if (n_zero == 0 || n_data == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
