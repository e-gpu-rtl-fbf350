// tb_egpu_power_ctrl: self-checking test of the power controller.
//
// For many kernels with random finishing orders it checks that start powers up
// and ungates every compute unit, that the units are started exactly one cycle
// later (a single pulse), that an event still shown from the previous kernel in
// the start cycle is ignored, that each unit is gated and powered down in the
// cycle after its own event and not before, and that done pulses once, in the
// cycle after the last event. It also checks abort.
module tb_egpu_power_ctrl;
  localparam int NC = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, abort = 0;
  logic [NC-1:0] sleep = '0, clk_en, pwr_en, cu_done;
  logic cu_start, busy, done;

  egpu_power_ctrl #(.NUM_CU(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .abort_i(abort), .cu_sleep_i(sleep),
    .cu_clk_en_o(clk_en), .cu_pwr_en_o(pwr_en), .cu_start_o(cu_start), .cu_done_o(cu_done),
    .busy_o(busy), .done_o(done)
  );

  int checks = 0, failures = 0;
  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("idle after reset", clk_en == '0 && pwr_en == '0 && !busy);
    for (int k = 0; k < 30; k++) begin
      int fin [NC];
      int n_done;
      // the units still show their sleep event from the last kernel
      sleep = (k == 0) ? '0 : '1;
      start = 1;
      @(negedge clk);
      start = 0;
      chk("powered on", clk_en == '1 && pwr_en == '1 && busy && !cu_start);
      @(negedge clk);
      chk("start pulse", cu_start == 1'b1);
      @(negedge clk);                 // units leave sleep now
      chk("single start pulse", cu_start == 1'b0);
      chk("stale events ignored", clk_en == '1);
      sleep = '0;
      for (int i = 0; i < NC; i++) fin[i] = $urandom_range(1, 12);
      n_done = 0;
      for (int t = 1; t <= 13; t++) begin
        for (int i = 0; i < NC; i++) if (fin[i] == t) sleep[i] = 1'b1;
        @(negedge clk);
        for (int i = 0; i < NC; i++) begin
          chk("gated after own event", clk_en[i] == (fin[i] > t) && pwr_en[i] == (fin[i] > t));
        end
        n_done = 0;
        for (int i = 0; i < NC; i++) if (fin[i] <= t) n_done++;
        if (done) chk("done only after all events", n_done == NC);
        if (n_done == NC) begin
          chk("done pulse", done);
          break;
        end
      end
      @(negedge clk);
      chk("done is one pulse", !done && !busy);
    end
    // abort while running
    sleep = '0;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (3) @(negedge clk);
    abort = 1;
    @(negedge clk);
    abort = 0;
    chk("abort powers down", clk_en == '0 && pwr_en == '0 && !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
