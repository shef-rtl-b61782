// aes_core: iterative AES block encryption engine (the Shield's Enc/Dec engine).
//
// The Shield runs AES in counter mode, so only the forward cipher is needed:
// the engine set and the register interface encrypt counter blocks and XOR
// the result into the data. The paper gives the engine's knobs, and they are
// kept here: one 256-byte S-box table that is replicated SBOX_PAR times (the
// paper evaluates 4x and 16x), and a key size of 128 or 256 bits chosen at
// build time. How the rounds are scheduled is this design's choice.
//
// How it works: on key_load the key schedule is expanded, one 32-bit word per
// cycle, into a round-key table (44 or 60 cycles; key_ready then rises). A
// block accepted on in_valid/in_ready is XORed with round key 0. Each round
// then substitutes SBOX_PAR state bytes per cycle (16/SBOX_PAR cycles) and
// spends one more cycle on ShiftRows, MixColumns and AddRoundKey.
//
// Interface: valid/ready on both sides; one block in flight.
// Timing: latency from accept to out_valid = 1 + NR*(16/SBOX_PAR + 1) cycles,
// NR = 10 (AES-128) or 14 (AES-256): 21 cycles for AES-128 at 16x, 51 at 4x.
module aes_core
  import shield_pkg::*;
#(
  parameter int KEY_BITS = 128,  // 128 or 256
  parameter int SBOX_PAR = 16    // S-box lookups per cycle: 1, 2, 4, 8 or 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // key
  input  logic                key_load,
  input  logic [KEY_BITS-1:0] key,
  output logic                key_ready,
  // input block
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [127:0]        in_block,
  // output block
  output logic                out_valid,
  input  logic                out_ready,
  output logic [127:0]        out_block
);

  localparam int NK     = KEY_BITS / 32;
  localparam int NR     = NK + 6;
  localparam int NW     = 4 * (NR + 1);
  localparam int SUBCYC = 16 / SBOX_PAR;

  initial begin
    assert (KEY_BITS == 128 || KEY_BITS == 256) else $error("KEY_BITS must be 128 or 256");
    assert (16 % SBOX_PAR == 0) else $error("SBOX_PAR must divide 16");
  end

  typedef enum logic [2:0] {S_IDLE, S_KEXP, S_SUB, S_MIX, S_DONE} state_t;
  state_t state;

  logic [31:0]  w [NW];          // expanded key words
  logic [6:0]   kidx;            // key schedule word index
  logic [127:0] st;              // cipher state
  logic [4:0]   round;
  logic [4:0]   subc;            // substitution step within a round

  // ---------------- key schedule (4 S-box lookups, one word per cycle)
  logic [31:0] kprev, ktemp, krot;
  always_comb begin
    kprev = w[kidx-7'd1];
    krot  = {kprev[23:0], kprev[31:24]};
    ktemp = kprev;
    if ((kidx % NK) == 0)
      ktemp = {aes_sbox(krot[31:24]) ^ aes_rcon(kidx / NK), aes_sbox(krot[23:16]),
               aes_sbox(krot[15:8]), aes_sbox(krot[7:0])};
    else if (NK > 6 && (kidx % NK) == 4)
      ktemp = {aes_sbox(kprev[31:24]), aes_sbox(kprev[23:16]),
               aes_sbox(kprev[15:8]), aes_sbox(kprev[7:0])};
  end

  // ---------------- SubBytes on SBOX_PAR bytes per cycle
  logic [127:0] st_sub;
  always_comb begin
    st_sub = st;
    for (int p = 0; p < SBOX_PAR; p++) begin
      st_sub[127 - 8*(int'(subc)*SBOX_PAR + p) -: 8] =
        aes_sbox(st[127 - 8*(int'(subc)*SBOX_PAR + p) -: 8]);
    end
  end

  function automatic logic [127:0] round_key(input int unsigned r);
    return {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  assign in_ready  = (state == S_IDLE) && key_ready && !key_load;
  assign out_valid = (state == S_DONE);
  assign out_block = st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      key_ready <= 1'b0;
      kidx      <= '0;
      st        <= '0;
      round     <= '0;
      subc      <= '0;
      for (int i = 0; i < NW; i++) w[i] <= '0;
    end else begin
      if (key_load) begin
        // A new key aborts any block in flight and restarts the schedule.
        for (int i = 0; i < NK; i++) w[i] <= key[KEY_BITS-1-32*i -: 32];
        kidx      <= 7'(NK);
        key_ready <= 1'b0;
        state     <= S_KEXP;
      end else begin
        unique case (state)
          S_KEXP: begin
            w[kidx] <= w[kidx-7'(NK)] ^ ktemp;
            if (kidx == 7'(NW-1)) begin
              key_ready <= 1'b1;
              state     <= S_IDLE;
            end
            kidx <= kidx + 7'd1;
          end
          S_IDLE: if (in_valid && in_ready) begin
            st    <= in_block ^ round_key(0);
            round <= 5'd1;
            subc  <= '0;
            state <= S_SUB;
          end
          S_SUB: begin
            st <= st_sub;
            if (subc == 5'(SUBCYC-1)) begin
              subc  <= '0;
              state <= S_MIX;
            end else begin
              subc <= subc + 5'd1;
            end
          end
          S_MIX: begin
            st <= aes_shift_mix(st, round == 5'(NR)) ^ round_key(round);
            if (round == 5'(NR)) state <= S_DONE;
            else begin
              round <= round + 5'd1;
              state <= S_SUB;
            end
          end
          S_DONE: if (out_ready) state <= S_IDLE;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
