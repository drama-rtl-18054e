// tb_drama_refresh_timer: refresh credit, idle-only requests, postponement
// limit.
//
// With a short trefi, checks that credits accrue one per trefi cycles, that
// ref_req stays low while a search runs (idle = 0) and rises afterwards, that
// acknowledging refreshes pays the credits back one by one, and that a credit
// earned with MAX_PENDING owed is dropped with a `missed` pulse.
module tb_drama_refresh_timer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] trefi = 16'd10;
  logic idle = 0, ref_ack = 0;
  logic ref_req, missed;
  logic [3:0] pending;

  drama_refresh_timer #(.MAX_PENDING(8)) dut (.clk, .rst_n, .trefi, .idle, .ref_req,
                                              .ref_ack, .pending, .missed);

  int checks = 0, failures = 0, n_missed = 0;
  always @(posedge clk) if (missed) n_missed++;

  task automatic expect_(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (pending=%0d req=%0d)", what, pending, ref_req); end
  endtask

  initial begin : wd
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // busy for 35 cycles: 3 credits, no request
    repeat (35) begin @(negedge clk); expect_("no request while busy", !ref_req); end
    expect_("3 credits after 35 cycles", pending == 4'd3);
    idle = 1;
    #1 expect_("request when idle", ref_req);
    // pay back
    for (int i = 0; i < 3; i++) begin
      ref_ack = 1; @(negedge clk); ref_ack = 0;
    end
    expect_("credits paid", pending == 4'd0 && !ref_req);
    // long search: 8 credits max, then missed
    idle = 0;
    repeat (95) @(negedge clk);
    expect_("capped at 8", pending == 4'd8);
    expect_("missed pulses counted", n_missed >= 1);
    idle = 1;
    #1 expect_("request after long search", ref_req);
    while (pending != 0) begin ref_ack = 1; @(negedge clk); end
    ref_ack = 0;
    expect_("drained", !ref_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
