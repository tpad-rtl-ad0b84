// lz77_decoder: LZ77 decompressor, the inverse function used as the logic
// checker of the LZ77 compressor.
//
// Expands codewords (Cp, Cl, Cn) back into characters. Its dictionary is the
// history of the characters it has produced, kept as a circular buffer of
// 2^CP_W words in a trusted_ram (so the dictionary RAM is itself protected by
// memory CED). For each codeword it copies Cl characters from distance Cp + 1
// behind the write pointer and then appends the literal Cn. Each copied
// character costs two cycles on the single RAM port (read at wptr - Cp - 1,
// then write at wptr), the literal one cycle, plus one cycle to take the next
// codeword.
//
// Interface: cw_empty/cw_cp/cw_cl/cw_cn come from a first-word-fall-through
// codeword FIFO, cw_pop removes the codeword being taken. out_valid/out_char
// give one decompressed character (in the cycle it is written to the
// dictionary). h_ram and lfsr_bits go to the trusted RAM, whose two r-bit
// checker outputs are passed on as ram_rd_err and ram_wr_err. idle is high
// when no codeword is being expanded.
//
// The decompress-and-compare checking principle and the SRAM dictionary follow
// the paper (Section V.A); the state machine and the two-cycle copy are this
// design's.
module lz77_decoder
  import tpad_pkg::*;
#(
  parameter int unsigned W    = 8,
  parameter int unsigned CP_W = 8,
  parameter int unsigned CL_W = 8,
  parameter int unsigned R    = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cw_empty,
  input  logic [CP_W-1:0]       cw_cp,
  input  logic [CL_W-1:0]       cw_cl,
  input  logic [W-1:0]          cw_cn,
  output logic                  cw_pop,
  output logic                  out_valid,
  output logic [W-1:0]          out_char,
  input  logic [R*(CP_W+W)-1:0] h_ram,
  input  logic [R-1:0]          lfsr_bits,
  output logic [R-1:0]          ram_rd_err,
  output logic [R-1:0]          ram_wr_err,
  output logic                  idle
);

  typedef enum logic [1:0] {
    S_TAKE,     // wait for / take the next codeword
    S_COPY_RD,  // read the character at distance cp + 1
    S_COPY_WR,  // write and output the character just read
    S_LIT       // write and output the literal
  } state_e;

  state_e          state;
  logic [CP_W-1:0] wptr, cp;
  logic [CL_W-1:0] remaining;
  logic [W-1:0]    lit;

  ram_op_e         ram_op;
  logic [CP_W-1:0] ram_addr;
  logic [W-1:0]    ram_din, ram_dout;
  logic            ram_dout_valid;

  trusted_ram #(.AW(CP_W), .DW(W), .R(R)) u_dict (
    .clk(clk), .rst_n(rst_n), .op(ram_op), .addr(ram_addr), .din(ram_din),
    .h(h_ram), .lfsr_bits(lfsr_bits), .dout(ram_dout),
    .dout_valid(ram_dout_valid), .rd_err(ram_rd_err), .wr_err(ram_wr_err)
  );

  assign idle   = (state == S_TAKE);
  assign cw_pop = (state == S_TAKE) && !cw_empty;

  always_comb begin
    ram_op    = RAM_IDLE;
    ram_addr  = wptr;
    ram_din   = lit;
    out_valid = 1'b0;
    out_char  = lit;
    unique case (state)
      S_COPY_RD: begin
        ram_op   = RAM_READ;
        ram_addr = wptr - cp - 1'b1;
      end
      S_COPY_WR: begin
        ram_op    = RAM_WRITE;
        ram_din   = ram_dout;
        out_valid = 1'b1;
        out_char  = ram_dout;
      end
      S_LIT: begin
        ram_op    = RAM_WRITE;
        out_valid = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_TAKE;
      wptr      <= '0;
      cp        <= '0;
      remaining <= '0;
      lit       <= '0;
    end else begin
      unique case (state)
        S_TAKE: if (!cw_empty) begin
          cp        <= cw_cp;
          remaining <= cw_cl;
          lit       <= cw_cn;
          state     <= (cw_cl != '0) ? S_COPY_RD : S_LIT;
        end
        S_COPY_RD: state <= S_COPY_WR;
        S_COPY_WR: begin
          wptr      <= wptr + 1'b1;
          remaining <= remaining - 1'b1;
          state     <= (remaining == CL_W'(1)) ? S_LIT : S_COPY_RD;
        end
        S_LIT: begin
          wptr  <= wptr + 1'b1;
          state <= S_TAKE;
        end
        default: state <= S_TAKE;
      endcase
    end
  end

endmodule
