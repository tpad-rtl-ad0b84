// fft_engine: N-point radix-2 decimation-in-time Cooley-Tukey FFT in IEEE
// half-precision (FP16) floating point. This is the function that the
// Plancherel checker (plancherel_ced) protects.
//
// Operation: a frame of N complex samples {re, im} (FP16 each) is accepted on
// in_valid/in_data while in_ready is high and stored at bit-reversed
// addresses of an N-word register file. The engine then runs log2(N) stages
// of N/2 butterflies, one butterfly per clock cycle:
//     t = w * b,   a' = a + t,   b' = a - t,
// with twiddle w = exp(-2*pi*i*p/N) taken from a table that is computed at
// elaboration and rounded to FP16. Finally the N outputs X_0 ... X_{N-1} are
// streamed in natural order on out_valid/out_data, one per cycle, after
// which the next frame is accepted. A frame therefore takes
// N + (N/2)*log2(N) + N cycles (704 for N = 128).
//
// All arithmetic uses fp16_pkg (round to nearest even, flush to zero).
// Follows the paper: Cooley-Tukey with half-precision arithmetic. This
// design's choices: an iterative engine with one butterfly per cycle rather
// than a fully pipelined one (the paper gives no pipeline structure), natural
// output order, and no back-pressure on the output stream.
module fft_engine
  import fp16_pkg::*;
#(
  parameter int unsigned N  = 128,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  output logic        in_ready,
  output logic        out_valid,
  output logic [31:0] out_data
);
  typedef enum logic [1:0] { S_LOAD, S_CALC, S_OUT } state_e;

  // FP16 value of a real number (elaboration only)
  function automatic logic [15:0] real_to_fp16(input real v);
    logic s;
    real  a;
    int   e, m;
    s = v < 0.0;
    a = s ? -v : v;
    if (a < 0.00006103515625) return {s, 15'd0};   // below 2^-14: flushed
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'($floor(a * 1024.0 + 0.5));
    if (m >= 2048) begin m = 1024; e++; end
    return {s, 5'(e + 15), 10'(m - 1024)};
  endfunction

  typedef logic [31:0] tw_t [N/2];
  function automatic tw_t twiddles();
    tw_t t;
    for (int p = 0; p < N / 2; p++) begin
      real ang;
      ang  = -2.0 * 3.14159265358979323846 * real'(p) / real'(N);
      t[p] = {real_to_fp16($cos(ang)), real_to_fp16($sin(ang))};
    end
    return t;
  endfunction
  localparam tw_t TW = twiddles();

  function automatic logic [NW-1:0] bitrev(input logic [NW-1:0] v);
    logic [NW-1:0] r;
    for (int i = 0; i < NW; i++) r[i] = v[NW-1-i];
    return r;
  endfunction

  state_e           state;
  logic [31:0]      mem [N];
  logic [NW-1:0]    cnt;         // sample counter (load, output)
  logic [NW-2:0]    bfly;        // butterfly index within a stage
  logic [$clog2(NW+1)-1:0] stage;
  logic [NW-1:0]    i0, i1, half, pos;
  logic [NW-2:0]    tw_idx;
  logic [31:0]      a, b, w, t, a_new, b_new;

  // butterfly addressing for stage s: half = 2^s, groups of 2*half
  always_comb begin
    half   = NW'(1) << stage;
    pos    = NW'(bfly) & (half - 1'b1);
    i0     = ((NW'(bfly) >> stage) << (stage + 1)) | pos;
    i1     = i0 | half;
    tw_idx = (NW-1)'(pos << (NW - 1 - int'(stage)));
    a      = mem[i0];
    b      = mem[i1];
    w      = TW[tw_idx];
    t      = {fp16_add(fp16_mul(w[31:16], b[31:16]), fp16_neg(fp16_mul(w[15:0], b[15:0]))),
              fp16_add(fp16_mul(w[31:16], b[15:0]),  fp16_mul(w[15:0], b[31:16]))};
    a_new  = {fp16_add(a[31:16], t[31:16]), fp16_add(a[15:0], t[15:0])};
    b_new  = {fp16_add(a[31:16], fp16_neg(t[31:16])), fp16_add(a[15:0], fp16_neg(t[15:0]))};
  end

  assign in_ready  = state == S_LOAD;
  assign out_valid = state == S_OUT;
  assign out_data  = mem[cnt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      bfly  <= '0;
      stage <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == NW'(N - 1)) begin
            state <= S_CALC;
            bfly  <= '0;
            stage <= '0;
          end
        end
        S_CALC: begin
          bfly <= bfly + 1'b1;
          if (bfly == (NW-1)'(N / 2 - 1)) begin
            stage <= stage + 1'b1;
            if (stage == ($clog2(NW+1))'(NW - 1)) begin
              state <= S_OUT;
              cnt   <= '0;
            end
          end
        end
        S_OUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == NW'(N - 1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // sample memory: no reset (every word is written before it is read)
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) mem[bitrev(cnt)] <= in_data;
    if (state == S_CALC) begin
      mem[i0] <= a_new;
      mem[i1] <= b_new;
    end
  end
endmodule
