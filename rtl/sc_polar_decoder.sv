// sc_polar_decoder: (256,158) successive-cancellation polar decoder.
//
// Structure, following the paper's decoder diagram: an input register holds
// the 256 channel LLRs; seven combinational decoding layers of PEs
// (128, 64, 32, 16, 8, 4, 2 PEs) reduce them to the two LLRs of the current
// bit pair; a last pair of PEs decides those two bits; a register collects
// the decided bits u_hat; the scheduling FSM steps the pair index j and the
// encoder selector feeds each layer the re-encoded bits of its left sibling
// node; the bit indicator marks frozen bits. No registers sit between the
// layers, so one bit pair is decided per clock and a codeword takes 128
// decoding cycles (the long combinational path is what limits the clock).
//
// Leaf pair: with layer-7 LLRs (a, b), u_2j has LLR f(a,b) and u_2j+1 has
// LLR g(a,b,u_2j); a bit is 1 when its LLR is negative (LLR = ln P0/P1) and
// is forced to 0 when frozen.
//
// Output: the 158 message bits in increasing index order. In the
// non-systematic mode (systematic = 0) they are u_hat at the information
// positions; in the systematic mode the decided word is re-encoded,
// x_hat = u_hat * F^(kron 8), and x_hat is read at the information positions.
// The mode is sampled with the frame.
//
// Timing: in_valid with llr_in for one cycle loads the input register (only
// accepted when ready); 128 cycles decode; one cycle extracts the message;
// out_valid is high for one cycle, 130 cycles after the in_valid cycle. With
// the 256 sample cycles of the soft-decision filter in front this gives the
// 386-cycle receiver latency the paper reports (256 + 130). No new frame is
// accepted until out_valid.
//
// This design's choices: the two-bits-per-cycle schedule (derived from the
// reported latency and from the 2-PE last layer), the information set, the
// 7-bit saturating PE width, and the mode input for the systematic code.
module sc_polar_decoder
  import vlc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  llr_t  llr_in [N],
  input  logic  systematic,
  output logic  ready,
  output logic  out_valid,
  output msg_t  msg_out
);

  typedef enum logic [1:0] {S_IDLE, S_DEC, S_OUT} state_t;

  state_t             state;
  logic [LOG2N-2:0]   j;
  llr_t               llr_reg [N];
  word_t              u_hat;
  logic               sys_r;

  // ---------------- scheduling support: bit indicator, encoder selector
  logic [1:0]         info_pair;
  word_t              info_mask;
  logic [N/2-1:0]     ps [LOG2N-1];

  bit_indicator    u_bi (.j, .info_pair, .info_mask);
  encoder_selector u_es (.u_hat, .j, .ps);

  // ---------------- decoding layers
  for (genvar k = 0; k < LOG2N; k++) begin : g_lay
    localparam int unsigned S = N >> k;
    pe_llr_t l [S];
    if (k == 0) begin : g_in
      for (genvar i = 0; i < N; i++) begin : g_ext
        assign l[i] = PE_W'(llr_reg[i]);
      end
    end else begin : g_pe
      for (genvar i = 0; i < S; i++) begin : g_i
        polar_pe #(.W(PE_W)) u_pe (
          .a(g_lay[k-1].l[i]), .b(g_lay[k-1].l[i + S]),
          .u(ps[k-1][i]), .g_sel(j[LOG2N-1-k]), .y(l[i])
        );
      end
    end
  end

  // ---------------- leaf pair
  pe_llr_t la, lb, l_u0, l_u1;
  logic    u0, u1;
  assign la = g_lay[LOG2N-1].l[0];
  assign lb = g_lay[LOG2N-1].l[1];

  polar_pe #(.W(PE_W)) u_leaf_f (.a(la), .b(lb), .u(1'b0), .g_sel(1'b0), .y(l_u0));
  assign u0 = info_pair[0] & l_u0[PE_W-1];
  polar_pe #(.W(PE_W)) u_leaf_g (.a(la), .b(lb), .u(u0),   .g_sel(1'b1), .y(l_u1));
  assign u1 = info_pair[1] & l_u1[PE_W-1];

  // ---------------- message extraction
  word_t x_hat, word_sel;
  msg_t  msg_next;
  polar_encoder #(.SIZE(N)) u_reenc (.u(u_hat), .x(x_hat));
  assign word_sel = sys_r ? x_hat : u_hat;

  always_comb begin
    int m;
    m = 0;
    msg_next = '0;
    for (int i = 0; i < int'(N); i++)
      if (info_mask[i]) begin
        msg_next[m] = word_sel[i];
        m++;
      end
  end

  // ---------------- scheduling FSM
  assign ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      j         <= '0;
      u_hat     <= '0;
      sys_r     <= 1'b0;
      out_valid <= 1'b0;
      msg_out   <= '0;
      for (int i = 0; i < int'(N); i++) llr_reg[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          llr_reg <= llr_in;
          sys_r   <= systematic;
          j       <= '0;
          state   <= S_DEC;
        end
        S_DEC: begin
          u_hat[{j, 1'b0}]  <= u0;
          u_hat[{j, 1'b1}]  <= u1;
          j <= j + 1'b1;
          if (&j) state <= S_OUT;
        end
        S_OUT: begin
          msg_out   <= msg_next;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert ($countones(INFO_MASK) == K) else $error("information set size differs from K");

endmodule
