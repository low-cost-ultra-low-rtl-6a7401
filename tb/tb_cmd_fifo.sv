// tb_cmd_fifo: random pushes and pops against a queue reference model.
// Checks every popped word, full/empty/count after every cycle, that pushes
// into a full buffer and pops from an empty one change nothing, and fills the
// buffer to its depth. DEPTH is reduced to 16 for speed; a second instance
// keeps the default depth and is filled completely once.
module tb_cmd_fifo;
  localparam int W = 22, D = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] wdata = '0;
  logic [W-1:0] rdata;
  logic [$clog2(D):0] count;

  cmd_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .wdata_i(wdata),
    .pop_i(pop), .rdata_o(rdata), .full_o(full), .empty_o(empty), .count_o(count));

  logic bpush = 0, bpop = 0, bfull, bempty;
  logic [W-1:0] bwdata = '0, brdata;
  logic [10:0] bcount;
  cmd_fifo big (.clk_i(clk), .rst_ni(rst_n), .push_i(bpush), .wdata_i(bwdata),
    .pop_i(bpop), .rdata_o(brdata), .full_o(bfull), .empty_o(bempty), .count_o(bcount));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model[$];
  logic         exp_rd_valid;
  logic [W-1:0] exp_rd;
  int pushes_full = 0, pops_empty = 0, max_level = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    for (int n = 0; n < 3000; n++) begin
      int mode, sz;
      mode = (n / 500) % 3;  // phases favouring fill, drain, balance
      push  = ($urandom_range(0, 99) < (mode == 0 ? 80 : mode == 1 ? 20 : 50));
      pop   = ($urandom_range(0, 99) < (mode == 0 ? 20 : mode == 1 ? 80 : 50));
      wdata = W'($urandom);
      // reference: decisions use the level before the clock edge
      sz = model.size();
      exp_rd_valid = 0;
      if (push && sz == D) pushes_full++;
      if (pop && sz == 0) pops_empty++;
      if (pop && sz > 0) begin exp_rd = model.pop_front(); exp_rd_valid = 1; end
      if (push && sz < D) model.push_back(wdata);
      @(negedge clk);
      if (exp_rd_valid) check(rdata == exp_rd, $sformatf("read %06h expected %06h", rdata, exp_rd));
      check(count == model.size(), $sformatf("count %0d expected %0d", count, model.size()));
      check(full == (model.size() == D) && empty == (model.size() == 0), "flags");
      if (model.size() > max_level) max_level = model.size();
    end
    push = 0; pop = 0;
    check(max_level == D, "reached full");
    check(pushes_full > 0 && pops_empty > 0, "pushed when full and popped when empty");
    // default depth: fill completely, then drain
    for (int k = 0; k < 1024; k++) begin bpush = 1; bwdata = W'(k * 7 + 3); @(negedge clk); end
    bpush = 1; bwdata = '1; @(negedge clk); bpush = 0;
    check(bfull && bcount == 1024, "default depth full at 1024");
    for (int k = 0; k < 1024; k++) begin
      bpop = 1; @(negedge clk);
      check(brdata == W'(k * 7 + 3), $sformatf("default depth read %0d", k));
    end
    bpop = 0;
    check(bempty, "default depth drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
