// tb_gs_fifo: self-checking test of gs_fifo (depth 5, a depth that is not a
// power of two, so pointer wrap-around is exercised).
//
// Random pushes and pops for 4000 cycles against a queue model: every popped
// word must be the oldest pushed one, in_ready must be low exactly when the
// model holds DEPTH words, count must equal the model's size, and clear must
// empty the FIFO.
module tb_gs_fifo;
  localparam int WIDTH = 16, DEPTH = 5;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];
  int full_seen = 0;

  gs_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // bias towards filling during the first half, draining during the second
      in_valid  = ($urandom % 100) < ((cyc < 2000) ? 70 : 30);
      out_ready = ($urandom % 100) < ((cyc < 2000) ? 30 : 70);
      in_data   = WIDTH'($urandom);
      clear     = (cyc == 3000);
      check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() != 0), "out_valid");
      if (model.size() == DEPTH) full_seen++;
      if (out_valid) check(out_data == model[0], "data order");
      @(posedge clk);
      if (clear) model.delete();
      else begin
        if (out_valid && out_ready) void'(model.pop_front());
        if (in_valid && in_ready) model.push_back(in_data);
      end
    end
    check(full_seen > 10, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
