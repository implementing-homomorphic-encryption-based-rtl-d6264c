// tb_network_link: self-checking test of the fixed-latency network model.
// Sends random messages, some back to back, and checks that each leaves
// exactly LATENCY cycles after it entered, with its payload intact, and that
// the in-flight count matches the messages sent but not yet delivered.
module tb_network_link;
  localparam int unsigned DW = 40, LAT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  logic [DW-1:0] in_data = '0, out_data;
  logic [$clog2(LAT+1)-1:0] in_flight;

  network_link #(.DW(DW), .LATENCY(LAT)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] sent_d [$];
  int            sent_t [$];
  int            cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      cyc++;
      check(int'(in_flight) == sent_d.size(), "in-flight count");
      if (out_valid) begin
        check(sent_d.size() > 0 && out_data == sent_d[0], "payload in order");
        check(sent_t.size() > 0 && cyc - sent_t[0] == LAT, $sformatf("latency %0d", cyc - sent_t[0]));
        void'(sent_d.pop_front());
        void'(sent_t.pop_front());
      end
      in_valid = ($urandom % 3) != 0;
      in_data  = {$urandom, $urandom};
      if (in_valid) begin
        sent_d.push_back(in_data);
        sent_t.push_back(cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
