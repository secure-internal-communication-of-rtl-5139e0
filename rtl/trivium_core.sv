// trivium_core: Trivium stream cipher producing W keystream bits per clock.
//
// The 288-bit state is held as three shift registers, s1..s93, s94..s177
// and s178..s288 (state[i-1] holds s_i). One round takes the taps s66/s93,
// s162/s177 and s243/s288 for the output bit, adds the AND of s91.s92,
// s175.s176 and s286.s287 plus one tap of the next register (s171, s264,
// s69) to form the three feedback bits, and shifts each register by one.
// The round is written once as a function and the combinational block
// applies it W times, so a clock advances the cipher W rounds.
//
// Initialisation: key K1..K80 goes to s1..s80, IV1..IV80 to s94..s173,
// s286..s288 are set to one and everything else to zero; the state is then
// clocked 1152 times without output, i.e. 1152/W clocks (36 at W = 32).
//
// Interface and timing:
//   load  : sampled high -> key/iv are loaded, ready drops; the next
//           1152/W clocks each run W rounds; ready rises after the last.
//   ks    : while ready, the next W keystream bits, ks[j] = z_(n+j).
//   next  : while ready, advance W rounds (the chunk on ks is consumed).
//
// The round, the tap positions and the 1152-round initialisation are
// Trivium as published; the load/next/ready handshake, the key/IV bit
// order on the ports and the reset to an all-zero, not-ready state are
// this design's choices.
module trivium_core #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [79:0]  key,
  input  logic [79:0]  iv,
  input  logic         next,
  output logic         ready,
  output logic [W-1:0] ks
);

  localparam int unsigned INIT_ROUNDS = 1152;
  localparam int unsigned INIT_CLOCKS = INIT_ROUNDS / W;
  localparam int unsigned CW          = $clog2(INIT_CLOCKS + 1);

  if (W < 1 || W > 64 || (INIT_ROUNDS % W) != 0) begin : gen_bad_w
    $error("trivium_core: W must divide 1152 and be at most 64");
  end

  typedef logic [287:0] state_t;

  // One Trivium round; returns the new state, output bit in z.
  function automatic state_t round(input state_t s, output logic z);
    logic t1, t2, t3;
    t1 = s[65]  ^ s[92];
    t2 = s[161] ^ s[176];
    t3 = s[242] ^ s[287];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (s[90]  & s[91])  ^ s[170];
    t2 = t2 ^ (s[174] & s[175]) ^ s[263];
    t3 = t3 ^ (s[285] & s[286]) ^ s[68];
    return {s[286:177], t2, s[175:93], t1, s[91:0], t3};
  endfunction

  state_t        state, state_adv;
  logic [CW-1:0] init_cnt;

  always_comb begin
    state_t tmp;
    logic   z;
    tmp = state;
    ks  = '0;
    for (int unsigned j = 0; j < W; j++) begin
      tmp   = round(tmp, z);
      ks[j] = z;
    end
    state_adv = tmp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= '0;
      init_cnt <= '0;
      ready    <= 1'b0;
    end else if (load) begin
      state             <= '0;
      state[79:0]       <= key;
      state[172:93]     <= iv;
      state[287:285]    <= 3'b111;
      init_cnt          <= CW'(INIT_CLOCKS);
      ready             <= 1'b0;
    end else if (init_cnt != '0) begin
      state    <= state_adv;
      init_cnt <= init_cnt - 1'b1;
      ready    <= (init_cnt == CW'(1));
    end else if (ready && next) begin
      state <= state_adv;
    end
  end

endmodule
