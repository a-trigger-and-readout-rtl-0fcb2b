// tb_multi_event_buffer: fills slots with known words and headers, checks
// full after NUM_SLOTS commits, reads every slot back in order through the
// registered read port (one-cycle latency) and checks headers, empty and
// used, including a commit and a release in the same cycle.
module tb_multi_event_buffer;
  timeunit 1ns; timeprecision 1ps;
  localparam int NS = 4, SW = 32;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, commit = 0, release_slot = 0;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic [63:0] commit_hdr = 0, rd_hdr;
  logic full, empty;
  logic [2:0] used;
  int checks = 0, failures = 0;
  int next_wr = 0, next_rd = 0;

  always #4 clk = ~clk;

  multi_event_buffer #(.NUM_SLOTS(NS), .SLOT_WORDS(SW)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .commit, .commit_hdr, .full,
    .empty, .rd_hdr, .rd_addr, .rd_data, .release_slot, .used
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] word(input int ev, input int a);
    return 16'(ev * 1000 + a * 3 + 5);
  endfunction

  task automatic fill(input int ev, input bit also_release);
    for (int a = 0; a < SW; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(a); wr_data = word(ev, a);
    end
    @(negedge clk); wr_en = 0; commit = 1; commit_hdr = {32'(ev), 32'(ev + 77)};
    release_slot = also_release;
    @(negedge clk); commit = 0; release_slot = 0;
  endtask

  task automatic drain(input int ev);
    check(!empty, "not empty before read");
    check(rd_hdr == {32'(ev), 32'(ev + 77)}, $sformatf("header of event %0d", ev));
    for (int a = 0; a < SW; a++) begin
      @(negedge clk); rd_addr = 5'(a);
      @(negedge clk);
      check(rd_data == word(ev, a), $sformatf("event %0d word %0d: %h", ev, a, rd_data));
    end
    @(negedge clk); release_slot = 1;
    @(negedge clk); release_slot = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(empty && !full && used == 0, "empty after reset");
    for (int e = 0; e < NS; e++) begin
      check(!full, "not full while filling");
      fill(e, 0);
      check(used == 3'(e + 1), "used counts commits");
    end
    check(full, "full after NUM_SLOTS events");
    drain(0);
    check(!full && used == 3'(NS - 1), "one slot free after release");
    // commit and release in the same cycle keeps used constant
    fill(4, 0);
    check(full, "full again");
    drain(1);
    drain(2);
    fill(5, 0);
    drain(3);
    drain(4);
    drain(5);
    check(empty && used == 0, "empty at end");
    fill(6, 0);
    check(used == 1, "one event");
    // read and release while committing another event
    @(negedge clk);
    fill(7, 1);
    check(used == 1, "used unchanged by simultaneous commit and release");
    check(rd_hdr == {32'd7, 32'd84}, "oldest is event 7 after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
