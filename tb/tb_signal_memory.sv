// tb_signal_memory: self-checking test of the batch memory.
//
// With a small ring (DEPTH 4, LEN 66) it writes batches sample by sample
// until the ring is full, checks that s_ready falls and that a sample offered
// then is not stored, reads batches back in order with fetch while writing
// more (wrap-around), and compares every sample of every batch read with
// what was written. ready must follow the number of full batches.
module tb_signal_memory;
  import tb_ref_pkg::*;
  localparam int DEPTH = 4, LEN = 66, NB = 11;

  logic clk = 0, rst_n = 0;
  logic run = 1, s_valid = 0, s_ready, ready, fetch = 0;
  logic signed [9:0] s_data = '0;
  logic signed [LEN-1:0][9:0] out_arr;
  logic [2:0] count;

  signal_memory #(.DEPTH(DEPTH), .LEN(LEN)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, full_seen = 0;
  int q [$];          // samples written, in order
  int nwr = 0, nrd = 0;

  task automatic check_batch();
    checks++;
    if (!ready) begin failures++; $display("FAIL: ready low with %0d batches stored", nwr - nrd); end
    for (int t = 0; t < LEN; t++) begin
      int e;
      e = q.pop_front();
      checks++;
      if (int'($signed(out_arr[t])) != e) begin
        failures++;
        if (failures < 10) $display("FAIL batch %0d sample %0d: got %0d expected %0d", nrd, t, int'($signed(out_arr[t])), e);
      end
    end
    fetch = 1;
    @(negedge clk);
    fetch = 0;
    nrd++;
  endtask

  task automatic write_batch();
    for (int t = 0; t < LEN; t++) begin
      int v;
      v = rnd_act(511);
      s_valid = 1; s_data = 10'(v);
      q.push_back(v);
      @(negedge clk);
    end
    s_valid = 0;
    nwr++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (ready || !s_ready) begin failures++; $display("FAIL: memory not empty after reset"); end
    // fill the ring
    for (int n = 0; n < DEPTH; n++) write_batch();
    checks++;
    if (s_ready || int'(count) != DEPTH) begin failures++; $display("FAIL: ring not full (count %0d)", count); end
    else full_seen++;
    // run low hides the stored batches
    run = 0; #1;
    checks++;
    if (ready) begin failures++; $display("FAIL: ready while run is low"); end
    @(negedge clk); run = 1;
    // offer a sample while full: it must be ignored
    s_valid = 1; s_data = 10'(123);
    @(negedge clk);
    s_valid = 0;
    // drain and refill with wrap-around
    while (nrd < NB) begin
      check_batch();
      if (nwr < NB) write_batch();
    end
    @(negedge clk);
    checks++;
    if (ready || count != 0) begin failures++; $display("FAIL: memory not empty at end"); end
    $display("signal_memory: %0d batches through a %0d-slot ring, full %0d time(s)", NB, DEPTH, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
