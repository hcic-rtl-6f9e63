// tb_puf_model: self-checking test of the PUF behavioural model: response
// exactly LATENCY cycles after the request, busy while waiting, requests
// ignored while busy, successive responses distinct and non-zero, and two
// chip identities giving different responses.
//
// The published design only asks that the PUF give distinct responses; the
// latency and handshake checked here belong to this model.
module tb_puf_model;
  int checks = 0, failures = 0;

  localparam int LAT = 4;

  logic        clk = 0, rst_n = 0;
  logic        req = 0;
  logic        busy_a, valid_a, busy_b, valid_b;
  logic [31:0] resp_a, resp_b;

  puf_model #(.LATENCY(LAT), .CHIP_ID(32'h0000_1234)) dut_a
    (.clk(clk), .rst_n(rst_n), .req_i(req), .busy_o(busy_a), .valid_o(valid_a), .resp_o(resp_a));
  puf_model #(.LATENCY(LAT), .CHIP_ID(32'h0000_1235)) dut_b
    (.clk(clk), .rst_n(rst_n), .req_i(req), .busy_o(busy_b), .valid_o(valid_b), .resp_o(resp_b));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] seen[$];

  initial begin
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < 50; r++) begin
      int lat;
      @(negedge clk) req = 1;
      @(negedge clk) req = ($urandom & 1);  // extra requests while busy are ignored
      lat = 0;  // cycles counted from the edge that sampled the request
      check(busy_a, "busy after request");
      while (!valid_a) begin
        @(negedge clk) req = ($urandom & 1);
        lat++;
        if (lat > 20) break;
      end
      req = 0;
      check(lat == LAT, $sformatf("latency %0d exp %0d", lat, LAT));
      check(valid_b, "both models respond together");
      check(resp_a != 0, "response non-zero");
      check(resp_a != resp_b, "different chips differ");
      foreach (seen[i]) check(seen[i] != resp_a, "responses repeat");
      seen.push_back(resp_a);
      @(negedge clk);
      check(!valid_a && !busy_a, "idle after response");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
