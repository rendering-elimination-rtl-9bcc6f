// ot_queue_tb: fills the queue until it reports full (16 entries), checks
// that pushes are refused while full, drains it in order, then runs random
// simultaneous pushes and pops against a queue model.
module ot_queue_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_last = 0, pop_ready = 0;
  logic [11:0] push_tile = '0;
  logic push_ready, pop_valid, pop_last, full;
  logic [11:0] pop_tile;
  logic [12:0] model [$];

  ot_queue dut (.clk, .rst_n, .push_valid, .push_ready, .push_tile, .push_last,
                .pop_valid, .pop_ready, .pop_tile, .pop_last, .full);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // Model update at each edge, using the values presented before the edge.
  always @(posedge clk) if (rst_n) begin
    if (pop_valid && pop_ready) begin
      logic [12:0] e;
      checks++;
      if (model.size() == 0) begin
        failures++;
        $display("FAIL pop from empty");
      end else begin
        e = model.pop_front();
        if ({pop_tile, pop_last} != e) begin
          failures++;
          if (failures < 10) $display("FAIL pop got=%0h exp=%0h", {pop_tile, pop_last}, e);
        end
      end
    end
    if (push_valid && push_ready) model.push_back({push_tile, push_last});
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int accepted = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("empty after reset", int'(pop_valid), 0);
    // Fill without popping.
    for (int i = 0; i < 20; i++) begin
      push_valid = 1; push_tile = 12'(100 + i); push_last = (i % 3 == 2);
      if (push_ready) accepted++;
      @(negedge clk);
    end
    push_valid = 0;
    check("accepted before full", accepted, 16);
    check("full flag", int'(full), 1);
    check("push_ready low when full", int'(push_ready), 0);
    // Drain.
    pop_ready = 1;
    repeat (16) @(negedge clk);
    pop_ready = 0;
    check("empty after drain", int'(pop_valid), 0);
    // Random traffic.
    for (int i = 0; i < 3000; i++) begin
      push_valid = ($urandom_range(0, 3) != 0);
      push_tile  = 12'($urandom);
      push_last  = $urandom_range(0, 1);
      pop_ready  = ($urandom_range(0, 2) == 0);
      @(negedge clk);
      check("occupancy", int'(full), int'(model.size() == 16));
    end
    push_valid = 0; pop_ready = 1;
    repeat (20) @(negedge clk);
    check("drained", model.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
