// tb_ptr_ring: checks the 16-deep pointer ring against a queue model.
//
// Fills the ring to 16 entries (full must rise, a 17th push is not
// attempted), drains it in order, then runs 2000 clocks of random pushes
// and pops (together too) comparing head, count and nonempty every clock
// with a SystemVerilog queue.
module tb_ptr_ring;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic        push, pop, nonempty, full;
  logic [31:0] push_data, head;
  logic [4:0]  count;
  logic [3:0]  head_idx;
  int checks = 0, failures = 0;
  logic [31:0] model [$];
  int pops = 0;

  ptr_ring dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic step(input bit pu, input bit po);
    @(negedge clk);
    push = pu && (model.size() < 16);
    pop  = po && (model.size() > 0);
    push_data = $urandom;
    @(posedge clk);
    if (pop) begin void'(model.pop_front()); pops++; end
    if (push) model.push_back(push_data);
    #1;
    check(count == 5'(model.size()), $sformatf("count %0d exp %0d", count, model.size()));
    check(nonempty == (model.size() > 0), "nonempty");
    check(full == (model.size() == 16), "full");
    if (model.size() > 0) check(head == model[0], "head");
    check(head_idx == 4'(pops), "head index");
  endtask

  initial begin
    push = 0; pop = 0; push_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (16) step(1, 0);
    check(full, "full after 16");
    repeat (16) step(0, 1);
    check(!nonempty, "empty after drain");
    repeat (2000) step($urandom % 2, $urandom % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
