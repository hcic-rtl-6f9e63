// ehdcc: encrypted Hamming distance calculation circuit.
//
// Input is the XOR of a return address with key_2 (from the XOR unit), so its
// population count is the Hamming distance HD between address and key_2
// (0..W, HD_W = clog2(W+1) bits). The EHD is formed as the method defines it:
//   1. append the first L bits of key_2 (its most significant bits) below HD,
//      giving the 2**K-bit word {HD, key_2[W-1 -: L]}, with L = 2**K - HD_W;
//   2. rotate that word right by m, the last K bits of key_2 (key_2[K-1:0]).
// With W = 32 and K = 5 (the main configuration) L = 26 and the EHD is 32
// bits; K = 3 gives the 8-bit EHD of the small worked example (L = 2).
// Check values: key_2 = 0x12345678 with HD = 20 gives 0x48D15950 (K = 5);
// key_2 = 0xA2156CF7, address 0x0804854B gives 132 and address 0x080486F1
// gives 108 (K = 3).
//
// Purely combinational. Key bits between the L used ones and the K of m
// (key_2[K..W-L-1]; bit 5 at the defaults) do not enter the EHD directly.
//
// The formula and both check values are the published ones; the bit
// positions of "first L bits" (taken as the most significant) and of "last
// K bits" (the least significant) are this design's reading.
module ehdcc #(
  parameter int unsigned W = 32,
  parameter int unsigned K = 5
) (
  input  logic [W-1:0]        xor_i,
  input  logic [W-1:0]        key_2_i,
  output logic [(1<<K)-1:0]   ehd_o
);

  localparam int unsigned HD_W  = $clog2(W + 1);
  localparam int unsigned EHD_W = 1 << K;
  localparam int unsigned L     = EHD_W - HD_W;

  initial begin
    assert (EHD_W > HD_W && L <= W)
      else $error("ehdcc: 2**K must exceed the HD width and 2**K - HD width must not exceed W");
  end

  logic [HD_W-1:0]    hd;
  logic [EHD_W-1:0]   pre;
  logic [K-1:0]       m;
  logic [2*EHD_W-1:0] twice;

  always_comb begin
    hd = '0;
    for (int unsigned i = 0; i < W; i++) begin
      hd = hd + HD_W'(xor_i[i]);
    end
    pre   = {hd, key_2_i[W-1 -: L]};
    m     = key_2_i[K-1:0];
    twice = {pre, pre} >> m;
    ehd_o = twice[EHD_W-1:0];
  end

endmodule
