// Self-checking test of re_fifo: random push/pop traffic (respecting the
// flags, as the RE does) against a queue model; checks head data, count,
// full and empty every cycle and that both full and empty are reached.
module tb_re_fifo;
  int checks = 0, failures = 0;
  localparam int W = 27, DEPTH = 8;
  logic clk = 0, rst = 1;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [3:0] count;
  logic [W-1:0] model [$];
  int n_full = 0, n_empty = 0;

  re_fifo #(.WIDTH(W), .DEPTH(DEPTH)) dut (.clk, .rst, .push, .din, .pop, .dout, .full, .empty, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || full != (model.size() == DEPTH) || empty != (model.size() == 0) ||
          (model.size() > 0 && dout != model[0])) begin
        failures++;
        if (failures < 10) $display("cyc %0d: count=%0d model=%0d full=%0d empty=%0d", cyc, count, model.size(), full, empty);
      end
      if (full) n_full++;
      if (empty) n_empty++;
      // phases: fill-biased then drain-biased
      push = !full && ($urandom_range(99) < ((cyc / 500) % 2 ? 30 : 70));
      pop  = !empty && ($urandom_range(99) < ((cyc / 500) % 2 ? 70 : 30));
      din  = W'($urandom);
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
