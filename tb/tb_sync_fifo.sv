// Testbench for sync_fifo: random simultaneous writes and reads against a
// queue model; checks data order, empty/full/count flags, that writes while
// full are dropped (FIFO keeps its contents) and reads while empty do
// nothing. The writer and reader here respect full/empty except in the
// dedicated phase, which is run with the DUT's assertions in mind (they
// report; they do not stop the simulation).
module tb_sync_fifo;
  localparam int W = 12, DEPTH = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_data, .full, .rd_en, .rd_data, .empty, .count);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(bit w, bit r);
    @(negedge clk);
    // flag checks against the model before the edge
    checks += 3;
    if (empty != (model.size() == 0)) begin failures++; $display("empty wrong"); end
    if (full != (model.size() == DEPTH)) begin failures++; $display("full wrong"); end
    if (count != 4'(model.size())) begin failures++; $display("count %0d vs %0d", count, model.size()); end
    if (!empty) begin
      checks++;
      if (rd_data != model[0]) begin failures++; $display("data %h vs %h", rd_data, model[0]); end
    end
    wr_en = w && !full;
    rd_en = r && !empty;
    wr_data = W'($urandom);
    @(posedge clk);
    if (rd_en) void'(model.pop_front());
    if (wr_en) model.push_back(wr_data);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int p = (n / 500) % 3;   // phases: fill-biased, drain-biased, balanced
      cycle(($urandom_range(0, 9) < (p == 0 ? 8 : (p == 1 ? 2 : 5))),
            ($urandom_range(0, 9) < (p == 0 ? 2 : (p == 1 ? 8 : 5))));
    end
    // fill completely, then confirm a blocked write leaves contents intact
    while (model.size() < DEPTH) cycle(1, 0);
    cycle(1, 0);
    checks++;
    if (model.size() != DEPTH) failures++;
    while (model.size() > 0) cycle(0, 1);
    cycle(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
