// tb_timed_fifo: checks that events fire exactly at their time.
//
// Events with increasing times (some in the same repetition, some tagged
// for the next one) are pushed while the timer is stopped. The timer then
// runs; every event must fire in the clock whose `now` equals its time and
// carry its payload. Events of repetition 1 must wait until `rep` becomes 1
// and then fire at their own time. An event pushed with a time already past
// must fire at once and set `late`. A full queue must refuse pushes.
module tb_timed_fifo;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, push_valid = 0, push_ready, run = 0;
  logic [47:0] push_time = 0, now = 0;
  logic [3:0] push_rep = 0, rep = 0;
  logic [15:0] push_data = 0, fire_data;
  logic fire, late;
  logic [4:0] level;
  int checks = 0, failures = 0, nfired = 0;
  int tv[$], rv[$];

  timed_fifo #(.DEPTH(16), .W(16), .EW(4)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // timer: counts while run; restarts at 0 and bumps rep at now == 100
  always @(posedge clk) if (run) begin
    if (now == 100) begin now <= 0; rep <= rep + 1; end
    else now <= now + 1;
  end

  always @(negedge clk) if (fire) begin
    nfired++;
    checks++;
    if (tv.size() == 0) begin failures++; $display("spurious fire"); end
    else begin
      if ((rv[0] == 2 ? now < 48'(tv[0]) : now != 48'(tv[0])) || rep != 4'(rv[0]) || fire_data != 16'(tv[0] * 7 + rv[0])) begin
        failures++;
        $display("fired at %0d/%0d data %0d, exp %0d/%0d", now, rep, fire_data, tv[0], rv[0]);
      end
      void'(tv.pop_front()); void'(rv.pop_front());
    end
  end

  task automatic push(input int t, input int r);
    @(negedge clk);
    push_valid = 1; push_time = 48'(t); push_rep = 4'(r); push_data = 16'(t * 7 + r);
    tv.push_back(t); rv.push_back(r);
    @(negedge clk) push_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    push(3, 0); push(4, 0); push(40, 0); push(99, 0);
    push(0, 1); push(5, 1); push(60, 1);
    @(negedge clk) run = 1;
    wait (rep == 2);
    @(negedge clk);
    checks++;
    if (nfired != 7 || late) begin failures++; $display("fired %0d late %b", nfired, late); end
    // late event: now is past 10 in repetition 2 once now > 10
    wait (now == 20);
    push(10, 2);
    @(negedge clk);
    checks++;
    if (!late || nfired != 8) begin failures++; $display("late not flagged"); end
    // fill: 16 entries accepted, 17th refused
    run = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); push_valid = 1; push_time = 48'(1000 + i); push_rep = 4'd3;
      checks++;
      if (!push_ready) begin failures++; $display("refused at %0d", i); end
    end
    @(negedge clk);
    checks++;
    if (push_ready) begin failures++; $display("full queue accepts"); end
    push_valid = 0;
    flush = 1; @(negedge clk); flush = 0;
    checks++;
    if (level != 0 || late) begin failures++; $display("flush"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
