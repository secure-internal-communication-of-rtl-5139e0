// grain128a_core: Grain-128a pre-output generator producing W keystream
// bits per clock.
//
// Two 128-bit registers, an NFSR b and an LFSR s (b[j], s[j] hold b_(i+j),
// s_(i+j), index 0 is the next bit to leave). Per step:
//   f : s_(i+128) = s0+s7+s38+s70+s81+s96
//   g : b_(i+128) = s0+b0+b26+b56+b91+b96+b3b67+b11b13+b17b18+b27b59
//                   +b40b48+b61b65+b68b84+b88b92b93b95+b22b24b25+b70b78b82
//   h : b12s8 + s13s20 + b95s42 + s60s79 + b12b95s94
//   y = h + s93 + b2+b15+b36+b45+b64+b73+b89   (pre-output)
// During initialisation y is also added into both feedbacks. Every output
// bit of a step depends only on bits that are still inside the registers
// for the next 32 steps, so the step is unrolled W times (W <= 32).
//
// Initialisation: b = key (b_i = k_i), s_0..s_95 = IV, s_96..s_126 = 1,
// s_127 = 0; then 256 steps with y fed back, i.e. 256/W clocks (8 at W=32).
// The keystream is the pre-output itself (Grain-128a without the
// authentication mode, IV_0 = 0); the MAC part is not built.
//
// Interface and timing: as trivium_core. load sampled high loads key/iv
// and drops ready; 256/W clocks later ready rises; while ready, ks holds
// the next W keystream bits (ks[j] = y_(n+j)) and next advances W steps.
//
// f, g, h, the output taps and the loading rule are Grain-128a as
// published; the handshake, the port bit order and the reset state are
// this design's choices.
module grain128a_core #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] key,
  input  logic [95:0]  iv,
  input  logic         next,
  output logic         ready,
  output logic [W-1:0] ks
);

  localparam int unsigned INIT_ROUNDS = 256;
  localparam int unsigned INIT_CLOCKS = INIT_ROUNDS / W;
  localparam int unsigned CW          = $clog2(INIT_CLOCKS + 1);

  if (W < 1 || W > 32 || (INIT_ROUNDS % W) != 0) begin : gen_bad_w
    $error("grain128a_core: W must divide 256 and be at most 32");
  end

  typedef struct packed {
    logic [127:0] b;   // NFSR
    logic [127:0] s;   // LFSR
  } state_t;

  function automatic logic pre_output(input logic [127:0] b, input logic [127:0] s);
    logic h;
    h = (b[12] & s[8]) ^ (s[13] & s[20]) ^ (b[95] & s[42]) ^ (s[60] & s[79])
      ^ (b[12] & b[95] & s[94]);
    return h ^ s[93] ^ b[2] ^ b[15] ^ b[36] ^ b[45] ^ b[64] ^ b[73] ^ b[89];
  endfunction

  // One step; init adds the pre-output into both feedbacks.
  function automatic state_t step(input state_t st, input logic init, output logic y);
    logic [127:0] b, s;
    logic f, g;
    b = st.b;
    s = st.s;
    y = pre_output(b, s);
    f = s[0] ^ s[7] ^ s[38] ^ s[70] ^ s[81] ^ s[96];
    g = s[0] ^ b[0] ^ b[26] ^ b[56] ^ b[91] ^ b[96]
      ^ (b[3] & b[67]) ^ (b[11] & b[13]) ^ (b[17] & b[18]) ^ (b[27] & b[59])
      ^ (b[40] & b[48]) ^ (b[61] & b[65]) ^ (b[68] & b[84])
      ^ (b[88] & b[92] & b[93] & b[95]) ^ (b[22] & b[24] & b[25])
      ^ (b[70] & b[78] & b[82]);
    if (init) begin
      f = f ^ y;
      g = g ^ y;
    end
    return '{b: {g, b[127:1]}, s: {f, s[127:1]}};
  endfunction

  state_t        state, state_adv;
  logic [CW-1:0] init_cnt;
  logic          initing;

  assign initing = (init_cnt != '0);

  always_comb begin
    state_t tmp;
    logic   y;
    tmp = state;
    ks  = '0;
    for (int unsigned j = 0; j < W; j++) begin
      tmp   = step(tmp, initing, y);
      ks[j] = y;
    end
    state_adv = tmp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= '0;
      init_cnt <= '0;
      ready    <= 1'b0;
    end else if (load) begin
      state.b  <= key;
      state.s  <= {1'b0, {31{1'b1}}, iv};
      init_cnt <= CW'(INIT_CLOCKS);
      ready    <= 1'b0;
    end else if (initing) begin
      state    <= state_adv;
      init_cnt <= init_cnt - 1'b1;
      ready    <= (init_cnt == CW'(1));
    end else if (ready && next) begin
      state <= state_adv;
    end
  end

endmodule
