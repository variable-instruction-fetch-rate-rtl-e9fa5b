// conf_hash: index of the path confidence table for one branch.
//
// The forked branch address (word address, the two byte-offset bits dropped)
// is XORed with the branch history bits and folded to IDX_W bits ("m_bits").
// Where the table has fewer entries than 2**IDX_W (8132 in the paper's
// configuration, against 8192 for 13 bits), an index at or above ENTRIES is
// wrapped by one subtraction of ENTRIES, so ENTRIES must exceed
// 2**(IDX_W-1). The XOR is the paper's; the folding and the wrap are this
// design's choice. Purely combinational.
module conf_hash #(
  parameter int unsigned PC_W    = 32,
  parameter int unsigned HIST_W  = 16,
  parameter int unsigned ENTRIES = 8132,
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic [PC_W-1:0]   br_addr,  // forked branch address (bytes)
  input  logic [HIST_W-1:0] hist,     // branch history bits
  output logic [IDX_W-1:0]  idx       // table index, always < ENTRIES
);
  localparam int unsigned WORD_W = PC_W - 2;
  localparam int unsigned MIX_W  = (WORD_W > HIST_W) ? WORD_W : HIST_W;
  localparam int unsigned NCHUNK = (MIX_W + IDX_W - 1) / IDX_W;

  logic [MIX_W-1:0]        mix;
  logic [NCHUNK*IDX_W-1:0] padded;
  logic [IDX_W-1:0]        folded;

  always_comb begin
    mix    = MIX_W'(br_addr[PC_W-1:2]) ^ MIX_W'(hist);
    padded = (NCHUNK*IDX_W)'(mix);
    folded = '0;
    for (int unsigned k = 0; k < NCHUNK; k++)
      folded ^= padded[k*IDX_W +: IDX_W];
    if ({1'b0, folded} >= (IDX_W+1)'(ENTRIES)) idx = folded - IDX_W'(ENTRIES);
    else                                       idx = folded;
  end
endmodule
