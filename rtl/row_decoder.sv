// row_decoder: row decoder of an Inhale subarray (5:32 at the default size).
//
// Turns a row index into a one-hot wordline vector. Each computing subarray has two of
// them, so that two rows can be raised at once for bitline XOR/AND; with only one enabled
// the subarray reads, writes or inverts a single row. Purely combinational.
// Ports: addr (AW bits), en; wl (2**AW bits), at most one bit high.
// The 5:32 size and the count of two decoders per subarray follow the paper; the enable
// input is this design's own addition so a decoder can stay idle.
module row_decoder #(
  parameter int unsigned AW = 5
) (
  input  logic [AW-1:0]      addr,
  input  logic               en,
  output logic [(1<<AW)-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en) wl[addr] = 1'b1;
  end
endmodule
