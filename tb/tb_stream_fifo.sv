// tb_stream_fifo: self-checking test of stream_fifo.
//
// Random valid on the write side and random ready on the read side for
// several thousand cycles; every word must come out once, in order, and the
// count output must match a software model of the occupancy. Because the model
// counts a word as readable on the cycle after it was written, the count check
// also pins the one-cycle latency; a phase with both sides always active
// checks one word per cycle.
module tb_stream_fifo;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WIDTH-1:0] model [$];
  int occ = 0;
  int pin = 50, pout = 50;
  // sample at the falling edge, where everything is settled for the rising one
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != occ) begin
      failures++;
      $display("%0t count %0d expected %0d", $time, count, occ);
    end
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data != model[0]) begin
        failures++;
        $display("%0t data %0h expected %0h", $time, out_data, (model.size() > 0) ? model[0] : 0);
      end
      if (model.size() > 0) void'(model.pop_front());
      occ--;
    end
    if (in_valid && in_ready) begin
      model.push_back(in_data);
      occ++;
    end
  end
  // new stimulus just after each rising edge
  always @(posedge clk) begin
    #1;
    in_valid  = ($urandom_range(99) < pin);
    in_data   = WIDTH'($urandom);
    out_ready = ($urandom_range(99) < pout);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    pin = 90; pout = 20;   // mostly full
    repeat (2000) @(posedge clk);
    pin = 20; pout = 90;   // mostly empty
    repeat (2000) @(posedge clk);
    pin = 100; pout = 100; // full rate
    repeat (500) @(posedge clk);
    pin = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (model.size() != 0) begin
      failures++;
      $display("%0d words never came out", model.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
