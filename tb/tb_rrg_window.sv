// tb_rrg_window: self-checking test of the detection window.
// Pushes random residuals, sometimes with idle clocks between, and compares
// every slot, fill and full with a model of the last N residuals.
module tb_rrg_window;
  import rrg_pkg::*;

  localparam int N = 10;
  logic clk = 0, rst = 1, push = 0;
  r_t r_in;
  r_t win [N];
  logic [$clog2(N + 1)-1:0] fill;
  logic full;
  r_t model [N];
  int pushes = 0;
  int checks = 0, failures = 0;

  rrg_window #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int expfill;
    expfill = (pushes > N) ? N : pushes;
    for (int j = 0; j < N; j++) begin
      checks++;
      if (win[j] !== model[j]) begin
        failures++;
        $display("FAIL slot %0d = %0d, expected %0d", j, win[j], model[j]);
      end
    end
    checks++;
    if (int'(fill) != expfill || full != (expfill == N)) begin
      failures++;
      $display("FAIL fill=%0d full=%0b after %0d pushes", fill, full, pushes);
    end
  endtask

  initial begin
    r_in = '0;
    for (int j = 0; j < N; j++) model[j] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    compare();
    for (int k = 0; k < 500; k++) begin
      r_in = r_t'($urandom);
      push = ($urandom % 3) != 0;
      @(negedge clk);
      if (push) begin
        for (int j = N - 1; j > 0; j--) model[j] = model[j-1];
        model[0] = r_in;
        pushes++;
      end
      push = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
