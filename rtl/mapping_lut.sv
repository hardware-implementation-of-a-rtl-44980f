// mapping_lut: the soft-decision filter's mapping lookup table.
//
// The read address is iSelect[11:0] = {snr[3:0], sel[7:0]}: the one-hot
// comparator result is encoded to a 3-bit level and joined with the SNR
// setting, so the table holds 16 banks x 8 levels x 9 bits = 1152 bits,
// which matches the memory-bit count the paper reports for the receiver.
// Reads are combinational. On reset every bank is loaded with the paper's
// mapping table (LLR_TABLE, Q2.7); a write port lets a host load other
// per-SNR values (one 9-bit entry per cycle, address {snr, level}).
//
// The paper gives one set of LLR values and the 12-bit iSelect layout; that
// the SNR bits pick a bank, the reset contents of the other banks and the
// write port are this design's choices.
module mapping_lut
  import vlc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  snr_t               snr,
  input  logic [NCMP-1:0]    sel,       // one-hot
  output lut_llr_t           llr,
  // table load port
  input  logic               wr_en,
  input  logic [LUT_AW-1:0]  wr_addr,   // {snr, level}
  input  lut_llr_t           wr_data
);

  lut_llr_t mem [LUT_DEPTH];
  logic [2:0] level;

  always_comb begin
    level = '0;
    for (int k = 0; k < int'(NCMP); k++)
      if (sel[k]) level = 3'(k);
  end

  assign llr = mem[{snr, level}];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < int'(LUT_DEPTH); a++) mem[a] <= LLR_TABLE[a % NCMP];
    end else if (wr_en) begin
      mem[wr_addr] <= wr_data;
    end
  end

  ap_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(sel))
    else $error("comparator result not one-hot");

endmodule
