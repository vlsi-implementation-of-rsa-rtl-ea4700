// rsa_core: RSA encryption / decryption engine computing m = a^b mod n.
//
// Encryption (L = M^J mod N) and decryption (M = L^I mod N) are the same
// operation with a different key, so one engine serves both: the caller
// supplies the text a, the exponent b and the modulus n. The engine runs the
// left-to-right square-and-multiply loop
//   l = 0; m = 1
//   for j = k downto 0:  l = 2l;  m = (m*m) mod n
//                        if b_j: l = l+1;  m = (m*a) mod n
// with one mod_mult unit (overlay multiplier + straight divider), shared
// between the squaring and the multiplication. l rebuilds the exponent bit by
// bit and is offered as an output; at the end it equals b.
//
// Timing: each modular product takes one clock cycle (the multiplier and the
// divider are combinational). After the cycle in which start is sampled high,
// the engine spends one SQUARE cycle per exponent bit and one MULT cycle per
// set bit, EXP_W + popcount(b) cycles in all, then holds done high with the
// result on m until the next start. start is ignored while busy. Keys are
// latched at start. Sequencing one product per cycle and the start/busy/done
// handshake are this design's choices; the loop itself follows the source.
//
// Interface: clk, rst_n (active-low, asynchronous), start, a/n (W bits),
// b (EXP_W bits) in; m (W bits), l (EXP_W bits), busy, done out.
module rsa_core #(
  parameter int unsigned W     = rsa_pkg::OPER_W,
  parameter int unsigned EXP_W = rsa_pkg::EXP_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [W-1:0]     a,
  input  logic [EXP_W-1:0] b,
  input  logic [W-1:0]     n,
  output logic [W-1:0]     m,
  output logic [EXP_W-1:0] l,
  output logic             busy,
  output logic             done
);
  rsa_pkg::exp_state_e        state;
  logic [W-1:0]               a_q, n_q;
  logic [EXP_W-1:0]           b_q;
  logic [$clog2(EXP_W)-1:0]   j;         // index of the exponent bit in work
  logic [W-1:0]               mm_y, mm_r;

  initial begin
    assert (EXP_W >= 2) else $fatal(1, "rsa_core: EXP_W must be at least 2");
  end

  // The shared modular multiplier: m*m in SQUARE, m*a in MULT.
  assign mm_y = (state == rsa_pkg::ST_MULT) ? a_q : m;

  mod_mult #(.W(W)) u_modmul (
    .x (m),
    .y (mm_y),
    .n (n_q),
    .r (mm_r)
  );

  assign busy = (state == rsa_pkg::ST_SQUARE) || (state == rsa_pkg::ST_MULT);
  assign done = (state == rsa_pkg::ST_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= rsa_pkg::ST_IDLE;
      a_q   <= '0;
      b_q   <= '0;
      n_q   <= '0;
      m     <= '0;
      l     <= '0;
      j     <= '0;
    end else begin
      unique case (state)
        rsa_pkg::ST_IDLE, rsa_pkg::ST_DONE: begin
          if (start) begin
            a_q   <= a;
            b_q   <= b;
            n_q   <= n;
            m     <= W'(1);
            l     <= '0;
            j     <= ($clog2(EXP_W))'(EXP_W - 1);
            state <= rsa_pkg::ST_SQUARE;
          end
        end
        rsa_pkg::ST_SQUARE: begin
          m <= mm_r;
          l <= l << 1;
          if (b_q[j]) begin
            state <= rsa_pkg::ST_MULT;
          end else if (j == '0) begin
            state <= rsa_pkg::ST_DONE;
          end else begin
            j <= j - 1'b1;
          end
        end
        rsa_pkg::ST_MULT: begin
          m <= mm_r;
          l <= l + 1'b1;
          if (j == '0) begin
            state <= rsa_pkg::ST_DONE;
          end else begin
            j     <= j - 1'b1;
            state <= rsa_pkg::ST_SQUARE;
          end
        end
        default: state <= rsa_pkg::ST_IDLE;
      endcase
    end
  end

  // Rules of the engine: a finished result is reduced below a non-zero
  // modulus, and the latched key does not change while the engine is busy.
  a_result_reduced: assert property (@(posedge clk) disable iff (!rst_n)
    (done && n_q != '0) |-> (m < n_q));
  a_key_stable: assert property (@(posedge clk) disable iff (!rst_n)
    busy |=> ($stable(b_q) && $stable(n_q) && $stable(a_q)));
endmodule
