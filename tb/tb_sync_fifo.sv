// tb_sync_fifo: self-checking test of the controller's command queue.
//
// Pushes and pops at random (each side active on a $urandom coin flip) for
// 4000 cycles and compares every popped entry with a reference queue kept
// in the testbench. Also checks that in_ready drops exactly when DEPTH
// entries are held, out_valid exactly when none are, and that a push and a
// pop in the same cycle on a full queue is blocked on the push side as the
// interface defines. DEPTH = 8 as used by the controller.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int unsigned DEPTH = 8;
  typedef logic [15:0] data_t;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t in_data, out_data;

  sync_fifo #(.T(data_t), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  data_t model [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_full = 0, n_empty = 0;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // bias the coin so the queue both fills and drains
      in_valid  = ($urandom % 100) < ((t / 500) % 2 ? 30 : 70);
      out_ready = ($urandom % 100) < ((t / 500) % 2 ? 70 : 30);
      in_data   = 16'($urandom);
      #0.1;
      check(in_ready == (model.size() < DEPTH), "in_ready matches occupancy");
      check(out_valid == (model.size() > 0), "out_valid matches occupancy");
      if (out_valid && model.size() > 0) check(out_data == model[0], "head entry");
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      @(posedge clk);
      if (out_valid && out_ready && model.size() > 0) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(n_full > 0 && n_empty > 0, "queue both filled and drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
