// lz77_encoder: sliding-window LZ77 compressor, one input character per clock
// cycle. This is the function protected by TPAD on the LZ77 test chip.
//
// The dictionary is a shift register of the last D characters: dict[0] is the
// most recent one, dict[d] the one d+1 positions back ("distance" d+1). A
// match vector m has one bit per distance and says at which distances the
// characters collected so far (the pending string, length len) repeat.
// For each new character c every dictionary entry is compared with c in
// parallel; because the dictionary shifts along with the input, a match at a
// fixed distance stays at the same index, so m & (dict == c) gives the
// distances at which the longer string still matches.
//   * if some distance still matches and len < LMAX, the string grows;
//   * otherwise a codeword (Cp, Cl, Cn) is emitted in this cycle: Cp is the
//     index of the nearest matching distance (distance = Cp + 1), Cl = len,
//     Cn = c. The decoder copies Cl characters from distance Cp + 1 and then
//     appends Cn. With len = 0, Cp is 0 and unused.
// flush (when no character is offered) emits a pending string as
// (Cp, len - 1, last character), so the output covers every input character.
// Only dictionary entries already filled can match.
//
// Interface: in_valid/in_data/in_ready is a valid-ready input; a character is
// accepted when both are high. cw_ready must be high for input to be accepted
// (room for a codeword downstream), in_ready = cw_ready. cw_valid/cw_cp/
// cw_cl/cw_cn carry an emitted codeword in the same cycle as the character that
// ends it (combinational). pending is high while a string is being collected.
//
// The codeword format (pointer, match length, next character as a fixed-length
// tuple) and the shift-register dictionary follow the paper. The match-vector
// organisation, nearest-match choice, flush rule and handshake are this
// design's; the paper refers to the compressor's original publication for its
// insides.
module lz77_encoder #(
  parameter int unsigned W    = 8,
  parameter int unsigned D    = 256,
  parameter int unsigned LMAX = 255,
  localparam int unsigned CP_W = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned CL_W = $clog2(LMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [W-1:0]    in_data,
  output logic            in_ready,
  input  logic            flush,
  input  logic            cw_ready,
  output logic            cw_valid,
  output logic [CP_W-1:0] cw_cp,
  output logic [CL_W-1:0] cw_cl,
  output logic [W-1:0]    cw_cn,
  output logic            pending
);

  logic [W-1:0]    dict [D];
  logic [D-1:0]    filled;
  logic [D-1:0]    m;
  logic [CL_W-1:0] len;

  logic [D-1:0]    eq, hitv;
  logic            hit, accept, do_flush;
  logic [CP_W-1:0] near;

  assign in_ready = cw_ready;
  assign accept   = in_valid & in_ready;
  assign do_flush = flush & ~in_valid & cw_ready & (len != '0);
  assign pending  = (len != '0);

  always_comb begin
    for (int unsigned d = 0; d < D; d++) eq[d] = filled[d] & (dict[d] == in_data);
    hitv = m & eq;
    hit  = (|hitv) && (32'(len) < LMAX);
    // Nearest distance at which the pending string matches.
    near = '0;
    for (int d = int'(D) - 1; d >= 0; d--) begin
      if (m[d]) near = CP_W'(d);
    end
  end

  always_comb begin
    cw_valid = 1'b0;
    cw_cp    = '0;
    cw_cl    = len;
    cw_cn    = in_data;
    if (accept && !hit) begin
      cw_valid = 1'b1;
      cw_cp    = (len != '0) ? near : '0;
    end else if (do_flush) begin
      cw_valid = 1'b1;
      cw_cp    = (len > CL_W'(1)) ? near : '0;
      cw_cl    = len - 1'b1;
      cw_cn    = dict[0];
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      dict[0] <= in_data;
      for (int unsigned d = 1; d < D; d++) dict[d] <= dict[d-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filled <= '0;
      m      <= '1;
      len    <= '0;
    end else if (accept) begin
      filled <= {filled[D-2:0], 1'b1};
      if (hit) begin
        m   <= hitv;
        len <= len + 1'b1;
      end else begin
        m   <= '1;
        len <= '0;
      end
    end else if (do_flush) begin
      m   <= '1;
      len <= '0;
    end
  end

endmodule
