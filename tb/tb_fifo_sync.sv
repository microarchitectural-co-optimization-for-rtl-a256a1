// tb_fifo_sync: self-checking testbench of the synchronous FIFO used for
// transaction queues, the load result queue and instruction queues.
// Random push/pop traffic (pushes only when not full or popping, pops only
// when not empty) is compared with a reference queue: head data, full,
// empty and occupancy are checked every cycle.
module tb_fifo_sync;
  localparam int unsigned DEPTH = 4;
  typedef logic [15:0] word_t;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  push, pop, full, empty;
  word_t din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;

  fifo_sync #(.T(word_t), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .data_i(din), .pop_i(pop),
    .data_o(dout), .full_o(full), .empty_o(empty), .count_o(count)
  );

  word_t ref_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    push = 1'b0; pop = 1'b0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      check(empty === (ref_q.size() == 0), "empty flag");
      check(full === (ref_q.size() == DEPTH), "full flag");
      check(count === ref_q.size(), $sformatf("count %0d vs %0d", count, ref_q.size()));
      if (ref_q.size() != 0) check(dout === ref_q[0], $sformatf("head %h vs %h", dout, ref_q[0]));
      pop  = !empty && ($urandom_range(0, 99) < ((cyc / 1000) % 2 ? 70 : 30));
      push = (!full || pop) && ($urandom_range(0, 99) < 50);
      din  = word_t'($urandom);
      @(posedge clk);
      if (pop)  void'(ref_q.pop_front());
      if (push) ref_q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
