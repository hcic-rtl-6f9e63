// puf_model: behavioural model of the silicon PUF that supplies key_1 and
// key_2. A real PUF derives its response from manufacturing variation and is
// an analog / process-specific circuit; this model only stands in for it so
// the rest of HCIC can be simulated and synthesised.
//
// Each request (req_i high for one cycle while busy_o is low) yields one
// W-bit response: resp_o is valid while valid_o pulses high, LATENCY cycles
// after the request. Successive responses differ (the model steps an internal
// challenge), and different CHIP_ID values give different response streams,
// standing in for chip-unique behaviour. HCIC does not need responses to be
// reproducible, so no error correction is modelled. The response function (a
// 32-bit xorshift generator seeded from CHIP_ID) is this model's own choice
// and has no security meaning. A response of zero is never produced.
module puf_model #(
  parameter int unsigned W        = 32,
  parameter int unsigned LATENCY  = 4,
  parameter logic [31:0] CHIP_ID  = 32'h5EED_C0DE
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_i,
  output logic         busy_o,
  output logic         valid_o,
  output logic [W-1:0] resp_o
);

  localparam int unsigned CW = $clog2(LATENCY + 1);

  logic [31:0]   state;
  logic [31:0]   nxt;
  logic [CW-1:0] wait_cnt;

  // xorshift32 step
  always_comb begin
    nxt = state ^ (state << 13);
    nxt = nxt ^ (nxt >> 17);
    nxt = nxt ^ (nxt << 5);
  end

  assign busy_o = (wait_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= (CHIP_ID == 32'd0) ? 32'h1 : CHIP_ID;
      wait_cnt <= '0;
      valid_o  <= 1'b0;
      resp_o   <= '0;
    end else begin
      valid_o <= 1'b0;
      if (req_i && !busy_o) begin
        wait_cnt <= CW'(LATENCY);
      end else if (busy_o) begin
        wait_cnt <= wait_cnt - CW'(1);
        if (wait_cnt == CW'(1)) begin
          state   <= nxt;
          valid_o <= 1'b1;
          for (int unsigned i = 0; i < W; i++) begin
            resp_o[i] <= nxt[i % 32];
          end
        end
      end
    end
  end

endmodule
