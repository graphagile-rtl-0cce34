// tb_ga_instr_queue: self-checking test of the Instruction Queue.
// Random pushes and pops against a queue model for several thousand cycles;
// checks the head word, head_valid, push_ready (full at DEPTH entries) and
// the count every cycle, and that a word pushed into an empty queue is at
// the head one cycle later.
module tb_ga_instr_queue;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic push, push_ready, head_valid, pop;
  logic [127:0] din, head;
  logic [$clog2(DEPTH):0] count;
  logic [127:0] model [$];
  ga_instr_queue #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .push_ready, .din, .head_valid,
                                       .head, .pop, .count);
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      checks++;
      if (count != model.size() || head_valid != (model.size() > 0) ||
          push_ready != (model.size() < DEPTH) ||
          (model.size() > 0 && head != model[0])) begin
        failures++;
        if (failures < 5) $display("FAIL cycle %0d: count %0d model %0d", c, count, model.size());
      end
      push = ($urandom_range(99) < ((c / 1000) % 2 ? 30 : 70));
      pop  = ($urandom_range(99) < ((c / 1000) % 2 ? 70 : 30));
      din  = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (pop && model.size() > 0) void'(model.pop_front());
      if (push && push_ready) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
