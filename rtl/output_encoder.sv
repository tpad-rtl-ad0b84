// output_encoder: TPAD output encoding of a chip's primary outputs.
//
// Every time a K-bit output word leaves the chip it is sent with R output
// check bits. These are the randomized parity of the word XORed with the check
// bits sent with the previous word, so the check bits depend on the whole
// history of the outputs since start-up: out_check(t) = RP(data(t)) ^
// out_check(t-1). The history starts from a programmable value that is chosen
// at random for each start-up.
//
// Interface: init loads the starting check bits init_check (start-up); when
// valid is high, data is registered to out_data together with its check bits
// out_check, and out_valid is raised for one cycle. h is the R x K parity
// matrix configuration (see rand_parity). Latency: one clock cycle from
// valid/data to out_valid/out_data/out_check. out_check holds its value
// between words and is the "previous check bits" of the next word.
//
// The encoding rule follows the paper (Section II.A, Fig. 6a). Advancing the
// history only on valid words, and the registered output, are this design's
// choices (the paper computes a codeword every clock cycle, which is the same
// thing for an output that is valid every cycle).
module output_encoder #(
  parameter int unsigned K = 24,
  parameter int unsigned R = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,
  input  logic [R-1:0]   init_check,
  input  logic [R*K-1:0] h,
  input  logic           valid,
  input  logic [K-1:0]   data,
  output logic           out_valid,
  output logic [K-1:0]   out_data,
  output logic [R-1:0]   out_check
);

  logic [R-1:0] rp;

  rand_parity #(.K(K), .R(R)) u_rp (.x(data), .h(h), .p(rp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_check <= '0;
    end else begin
      out_valid <= valid & ~init;
      if (init) begin
        out_check <= init_check;
      end else if (valid) begin
        out_data  <= data;
        out_check <= rp ^ out_check;
      end
    end
  end

endmodule
