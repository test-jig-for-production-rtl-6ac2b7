// tb_cmd_parser: self-checking test of the command packet parser.
//
// Sends Event, Monitoring and Cross talk packets with random fields, with and
// without idle cycles between bytes and with garbage before the header, and
// checks every decoded field, the checksum/trailer flag, the command/length
// flag and the two-cycle latency from the last byte to pkt_valid. Corrupted
// checksums and trailers, an unknown Command ID and a Size that does not fit
// the Command ID must be flagged.
module tb_cmd_parser;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rx_valid = 1'b0;
  logic [7:0] rx_data = '0;
  logic pkt_valid, cks_ok, id_ok;
  command_t pkt;
  int checks = 0, failures = 0;
  longint cyc = 0, last_byte_cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cmd_parser dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input bytes_t q, input bit gaps);
    foreach (q[i]) begin
      if (gaps && ($urandom_range(0, 2) == 0)) begin
        rx_valid <= 1'b0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
      end
      rx_valid <= 1'b1;
      rx_data  <= q[i];
      @(posedge clk);
      last_byte_cyc = cyc;
    end
    rx_valid <= 1'b0;
  endtask

  // Waits for pkt_valid; returns 0 if none comes within 20 cycles.
  task automatic wait_pkt(output bit got, output longint lat);
    got = 0;
    lat = 0;
    for (int i = 0; i < 20; i++) begin
      @(posedge clk);
      if (pkt_valid) begin got = 1; lat = cyc - last_byte_cyc; break; end
    end
  endtask

  initial begin
    bit got; longint lat;
    logic [31:0] x32, u32; logic [15:0] a, b, c; logic [127:0] z; bit rack;
    bytes_t q;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    for (int n = 0; n < 30; n++) begin
      int kind = n % 3;
      bit gaps = (n % 2 == 1);
      x32 = $urandom(); u32 = $urandom(); a = 16'($urandom()); b = 16'($urandom());
      c = 16'($urandom()); z = rand128(); rack = 1'($urandom());
      if (kind == 0)      q = event_pkt(x32, z, u32, a, b, rack);
      else if (kind == 1) q = mon_pkt(a, z, b, rack);
      else                q = xtalk_pkt(a, b, c, rack);
      if (n % 5 == 4) send('{8'h12, 8'hAA, 8'h00, 8'hAA}, 0);   // garbage first
      send(q, gaps);
      wait_pkt(got, lat);
      check(got, $sformatf("packet %0d decoded", n));
      if (!got) continue;
      check(lat == 2, $sformatf("packet %0d latency %0d, expected 2", n, lat));
      check(cks_ok && id_ok, $sformatf("packet %0d flags cks=%0b id=%0b", n, cks_ok, id_ok));
      check(pkt.r_ack == rack, "r_ack");
      if (kind == 0) begin
        check(pkt.cmd_id == 8'h01, "event id");
        check(pkt.ev.x_events == x32 && pkt.ev.z_pattern == z && pkt.ev.u_period == u32 &&
              pkt.ev.w_width == a && pkt.ev.t_delay == b, "event fields");
      end else if (kind == 1) begin
        check(pkt.cmd_id == 8'h02, "mon id");
        check(pkt.mon.y_width == a && pkt.mon.z_strips == z && pkt.mon.w_count == b, "mon fields");
      end else begin
        check(pkt.cmd_id == 8'h03, "xtalk id");
        check(pkt.xt.x_hits == a && pkt.xt.d_delay == b && pkt.xt.w_width == c, "xtalk fields");
      end
    end

    // Bad checksum.
    q = xtalk_pkt(16'd3, 16'd4, 16'd5, 1);
    q[q.size() - 3] ^= 8'h01;
    send(q, 0); wait_pkt(got, lat);
    check(got && !cks_ok, "bad checksum flagged");
    // Bad trailer.
    q = mon_pkt(16'd3, rand128(), 16'd5, 1);
    q[q.size() - 1] = 8'h00;
    send(q, 0); wait_pkt(got, lat);
    check(got && !cks_ok, "bad trailer flagged");
    // Unknown command ID with a good checksum.
    q = xtalk_pkt(16'd1, 16'd2, 16'd3, 0);
    q[4] = 8'h7E;
    q[q.size() - 3] = q[q.size() - 3] + 8'h7E - 8'h03;
    send(q, 0); wait_pkt(got, lat);
    check(got && cks_ok && !id_ok && pkt.cmd_id == 8'h7E, "unknown command flagged");
    // Size that does not fit the command: Event ID in a 15-byte packet.
    q = xtalk_pkt(16'd1, 16'd2, 16'd3, 0);
    q[4] = 8'h01;
    q[q.size() - 3] = q[q.size() - 3] + 8'h01 - 8'h03;
    send(q, 0); wait_pkt(got, lat);
    check(got && cks_ok && !id_ok, "wrong size flagged");
    // Impossible Size: dropped, and the parser resynchronises on the next packet.
    send('{8'hAA, 8'h55, 8'h00, 8'h03, 8'h01}, 0);
    wait_pkt(got, lat);
    check(!got, "impossible size dropped");
    q = xtalk_pkt(16'd9, 16'd8, 16'd7, 1);
    send(q, 0); wait_pkt(got, lat);
    check(got && cks_ok && id_ok && pkt.xt.x_hits == 16'd9, "resynchronised");

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
