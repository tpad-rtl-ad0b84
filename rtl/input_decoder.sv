// input_decoder: TPAD input decoding of a chip's primary inputs.
//
// The sending chip encodes its outputs as output_encoder does, so each input
// word arrives with check bits c(t) = RP(data(t)) ^ c(t-1). The decoder keeps
// the previous input check bits, recovers the expected parity c(t) ^ c(t-1),
// recomputes the actual parity RP(data(t)) from the received word with the
// same programmable matrix as the sender, and compares the two in an LFSR
// encoded checker. A flipped pin (data or check) makes the two differ with
// probability close to 1 - 2^-R and is reported on err.
//
// Interface: init loads init_check (the sender's starting check bits) as the
// previous check bits. When valid is high a word (data, check) is accepted:
// the comparison is made in that cycle on err and the stored previous check
// bits become check. err equals lfsr_bits when there is nothing to report or no
// word is accepted. h is the R x K matrix configuration.
//
// Decoding rule and the example behaviour (data FA, check 1, previous B gives
// expected A) follow the paper (Section II.B, Fig. 6c). The valid qualifier
// and load-on-init are this design's choices.
module input_decoder #(
  parameter int unsigned K = 8,
  parameter int unsigned R = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,
  input  logic [R-1:0]   init_check,
  input  logic [R*K-1:0] h,
  input  logic           valid,
  input  logic [K-1:0]   data,
  input  logic [R-1:0]   check,
  input  logic [R-1:0]   lfsr_bits,
  output logic [R-1:0]   err
);

  logic [R-1:0] prev_check;
  logic [R-1:0] actual;
  logic [R-1:0] expected;

  rand_parity #(.K(K), .R(R)) u_rp (.x(data), .h(h), .p(actual));

  assign expected = check ^ prev_check;

  ced_checker #(.R(R)) u_chk (
    .valid    (valid & ~init),
    .actual   (actual),
    .predicted(expected),
    .lfsr_bits(lfsr_bits),
    .err      (err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     prev_check <= '0;
    else if (init)  prev_check <= init_check;
    else if (valid) prev_check <= check;
  end

endmodule
