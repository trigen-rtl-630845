// tb_sync_unit: self-checking test of the multi-NPU synchronisation unit,
// for a unit in a system of three NPUs. The testbench plays the two other
// NPUs. It checks that a SYNC broadcasts the unit's Sync-ID, that the unit waits
// while any other NPU is behind, that it is released in the cycle after the last
// other NPU's ID (same or later) has been registered, and that an NPU that is already
// ahead lets it pass at once (one cycle after start).
module tb_sync_unit;
  logic clk = 0, rst_n = 0, start = 0, done, busy, sync_out_valid;
  logic [7:0] sync_id = '0, sync_out_id;
  logic sync_in_valid [2];
  logic [7:0] sync_in_id [2];
  int checks = 0, failures = 0, bcast = 0, dones = 0;

  trigen_sync_unit #(.NUM_NPUS(3)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && sync_out_valid) bcast <= bcast + 1;
    if (rst_n && done) dones <= dones + 1;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic remote(input int i, input int id);
    @(negedge clk);
    sync_in_valid[i] = 1; sync_in_id[i] = 8'(id);
    @(negedge clk);
    sync_in_valid[i] = 0;
  endtask

  initial begin
    sync_in_valid[0] = 0; sync_in_valid[1] = 0; sync_in_id[0] = '0; sync_in_id[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; sync_id = 8'd5;
    @(negedge clk);
    start = 0;
    chk(sync_out_valid && sync_out_id == 8'd5, "broadcast of own ID");
    chk(busy, "waiting");
    repeat (5) @(negedge clk);
    chk(dones == 0 && busy, "held while others are behind");
    remote(0, 5);
    repeat (3) @(negedge clk);
    chk(dones == 0, "held while one is behind");
    remote(1, 6);           // the last one arrives with a later ID
    chk(!done && busy, "remote ID registered first");
    @(negedge clk);
    chk(done && dones == 0, "released the cycle after the last arrival is registered");
    @(negedge clk);
    chk(!busy && dones == 1, "released once");
    // both others already at 6 or later: the next SYNC to 6 passes at once
    remote(0, 6);
    start = 1; sync_id = 8'd6;
    @(negedge clk);
    start = 0;
    chk(sync_out_valid && sync_out_id == 8'd6 && dones == 1, "second broadcast");
    @(negedge clk);
    chk(done && !busy && bcast == 2, "no wait when the others are ahead");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
