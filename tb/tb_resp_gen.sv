// tb_resp_gen: self-checking test of the acknowledgement packet builder.
//
// Requests responses for random command IDs and status codes while the
// receiving side applies random back-pressure, reassembles the byte stream
// and checks each packet against AA 55 00 09 id status sum 55 AA, that
// req_ready is low while a packet is being sent, and that an unstalled packet
// takes exactly 9 cycles.
module tb_resp_gen;
  import tj_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req = 1'b0, req_ready, tx_valid, tx_ready = 1'b1;
  logic [7:0] cmd_id = '0, tx_data;
  status_e status = ST_ACCEPTED;
  int checks = 0, failures = 0;
  bit stall = 0;

  always #5 clk = ~clk;

  resp_gen dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  byte unsigned got [$];
  always @(posedge clk) if (tx_valid && tx_ready) got.push_back(tx_data);
  always @(negedge clk) tx_ready <= stall ? 1'($urandom()) : 1'b1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      byte unsigned id, st, s;
      int t0, t1;
      byte unsigned exp [9];
      stall = (n >= 20);
      id = 8'($urandom());
      st = 8'($urandom_range(0, 3));
      got.delete();
      @(negedge clk);
      check(req_ready, "ready when idle");
      req = 1'b1; cmd_id = id; status = status_e'(st);
      @(negedge clk);
      req = 1'b0;
      t0 = 0;
      while (tx_valid) begin
        if (req_ready) begin check(0, "ready while sending"); break; end
        @(negedge clk);
        t0++;
      end
      s = 8'hAA + 8'h55 + 8'h09 + id + st;
      exp = '{8'hAA, 8'h55, 8'h00, 8'h09, id, st, s, 8'h55, 8'hAA};
      check(got.size() == 9, $sformatf("packet length %0d", got.size()));
      if (got.size() == 9) foreach (exp[i]) check(got[i] == exp[i], $sformatf("byte %0d", i));
      if (!stall) check(t0 == 9, $sformatf("9 cycles per packet, got %0d", t0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
