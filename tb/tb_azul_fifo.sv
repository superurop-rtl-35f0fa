// tb_azul_fifo: self-checking test of the network queue.
//
// Pushes and pops random 64-bit words with random valid/ready patterns and
// compares every popped word with a reference queue kept in the testbench;
// also checks that in_ready falls exactly when DEPTH words are held, that
// out_valid falls when empty, and that count tracks the occupancy.
module tb_azul_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [63:0] model [$];

  azul_fifo #(.WIDTH(64), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // phases: fill-heavy, drain-heavy, mixed
      in_valid  = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 80 : 30);
      out_ready = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 30 : 80);
      in_data   = {$urandom, $urandom};
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready vs occupancy");
      check(out_valid == (model.size() > 0), "out_valid vs occupancy");
      check(count == model.size(), "count");
      if (out_valid && model.size() > 0) check(out_data == model[0], "head data");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
