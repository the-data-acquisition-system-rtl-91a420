// tb_adc_pipeline: every channel carries a time stamp (cycle number plus
// channel), so each captured row tells which clock it was digitized in.
// For several pipeline delays D and trigger times T the record must hold the
// WINDOW consecutive rows starting with the row digitized at T+1-D (the
// sample driven in cycle n leaves the pipeline D clocks later). Read-out is
// throttled at random. The test also fills both event slots and checks that
// busy rises and that a further trigger is reported lost.
module tb_adc_pipeline;
  import koto_pkg::*;
  localparam int DEPTH = 500, W = 64;
  logic clk = 0, rst = 1;
  adc_row_t samples, rd_row;
  logic [$clog2(DEPTH+1)-1:0] delay;
  logic trig = 0, busy, lost, rd_valid, rd_first, rd_last, rd_ready;
  int checks = 0, failures = 0, cyc = 0;
  int exp_start[$];

  adc_pipeline #(.DEPTH(DEPTH), .WINDOW_N(W), .EVT_SLOTS(2)) dut (.*);
  always #4 clk = ~clk;

  function automatic adc_row_t stamp(int n);
    for (int c = 0; c < 16; c++) stamp[c] = sample_t'((n * 16 + c) & 16'h3fff);
  endfunction

  // drive the stamped samples
  always @(posedge clk) begin cyc <= cyc + 1; samples <= stamp(cyc + 1); end

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected first row of a record: the row leaving the pipeline in the
  // clock after the trigger, i.e. digitized D-1 clocks before the row that
  // is entering the pipeline when the trigger is sampled
  always @(posedge clk) if (trig && !busy && !dut.capturing) exp_start.push_back(cyc + 1 - int'(delay));

  // reader with random stalls
  int ridx = 0;
  always @(posedge clk) begin
    rd_ready <= ($urandom_range(0, 3) != 0);
    if (!rst && rd_valid && rd_ready) begin
      checks++;
      if (rd_row != stamp(exp_start[0] + ridx) || rd_first != (ridx == 0) || rd_last != (ridx == W-1)) begin
        failures++;
        if (failures < 5) $display("row mismatch idx=%0d got=%0h exp=%0h q=%p t=%0t", ridx, rd_row[0], stamp(exp_start[0] + ridx)[0], exp_start, $time);
      end
      ridx++;
      if (ridx == W) begin ridx = 0; void'(exp_start.pop_front()); end
    end
  end

  task automatic fire(int d);
    delay = ($clog2(DEPTH+1))'(d);
    repeat (3) @(posedge clk);
    @(posedge clk); trig <= 1;
    @(posedge clk); trig <= 0;
    repeat (W + 2) @(posedge clk);
  endtask

  initial begin
    samples = '0; delay = 9'(DEPTH); rd_ready = 0;
    repeat (5) @(posedge clk); rst <= 0;
    repeat (DEPTH + 10) @(posedge clk);
    fire(500); fire(37); fire(250); fire(2); fire(499);
    wait (exp_start.size() == 0);
    // fill both slots with reading stopped
    force rd_ready = 0;
    fire(100); fire(100);
    checks++; if (!busy) begin failures++; $display("busy not raised"); end
    @(posedge clk); trig <= 1; @(posedge clk); trig <= 0; #1;
    checks++; if (!lost) begin failures++; $display("lost not flagged"); end
    release rd_ready;
    wait (exp_start.size() == 0);
    repeat (4) @(posedge clk);
    checks++; if (busy) begin failures++; $display("busy stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
