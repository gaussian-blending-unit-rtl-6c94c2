// row_buffer_tb -- checks the Row Buffer FIFO.
//
// Pushes and pops row tasks with random valid/ready patterns (phases that
// fill the buffer alternate with phases that drain it) and compares the
// popped sequence with a queue kept by the testbench; also checks that
// push_ready falls exactly when DEPTH entries are held and that empty
// matches the model.  Runs at the default depth of 8.
module row_buffer_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, pop_valid, pop_ready = 0, empty;
  row_task_t push_data = '0, pop_data;
  row_task_t model[$];
  int full_seen = 0;
  logic hold, taken = 0;

  row_buffer #(.DEPTH(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (pop_valid && pop_ready) void'(model.pop_front());
    if (push_valid && push_ready) model.push_back(push_data);
    taken <= push_valid && push_ready;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      checks++;
      if (pop_valid != (model.size() > 0) || empty != (model.size() == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL valid/empty size=%0d", model.size());
      end
      checks++;
      if (push_ready != (model.size() < 8)) begin
        failures++;
        if (failures < 10) $display("FAIL ready size=%0d", model.size());
      end
      if (model.size() == 8) full_seen++;
      if (pop_valid && model.size() > 0) begin
        checks++;
        if (pop_data != model[0]) begin
          failures++;
          if (failures < 10) $display("FAIL data");
        end
      end
      hold = push_valid && !taken;
      pop_ready = (($urandom % 4) < (((cyc / 500) % 2 == 0) ? 1 : 3));
      if (!hold) begin
        push_valid = (($urandom % 4) < (((cyc / 500) % 2 == 0) ? 3 : 1));
        push_data  = row_task_t'({$urandom, $urandom, $urandom, $urandom});
      end
    end
    checks++;
    if (full_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
