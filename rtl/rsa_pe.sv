// rsa_pe: RSA accelerator, one of the two PE functions: result = m^e mod n.
//
// Right-to-left square-and-multiply over the bits of e. Each modular product
// is formed bit-serially (interleaved shift-and-add with conditional
// subtraction of n), W cycles per product, so a whole exponentiation takes
// about 2*W*(bits of e) cycles. m is first reduced mod n by one pass of the multiplier (m*1). For n = 0 or 1 the
// result is 0. Handshake: start while not busy, done pulses once, result held.
// Algorithm and W = 16 are this design's choice; only the function is given.
module rsa_pe #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] m,
  input  logic [W-1:0] e,
  input  logic [W-1:0] n,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] result
);
  typedef enum logic [2:0] {R_IDLE, R_RED, R_STEP, R_MUL, R_SQR, R_END} rs_e;

  rs_e            state;
  logic [W-1:0]   base, acc, ex, nn;
  // modular multiplier: p = (p*2 + bit*mb) mod n, over the bits of ma
  logic [W-1:0]   ma, mb;
  logic [W+1:0]   p;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W+1:0]   p2, p2s, p2ss;

  // one multiplier step; p < n so 2p + mb < 3n
  always_comb begin
    p2   = {p[W:0], 1'b0} + (ma[W-1] ? {2'b00, mb} : '0);
    p2s  = (p2  >= {2'b00, nn}) ? p2  - {2'b00, nn} : p2;
    p2ss = (p2s >= {2'b00, nn}) ? p2s - {2'b00, nn} : p2s;
  end

  assign busy = (state != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= R_IDLE;
      base   <= '0;
      acc    <= '0;
      ex     <= '0;
      nn     <= '0;
      ma     <= '0;
      mb     <= '0;
      p      <= '0;
      cnt    <= '0;
      done   <= 1'b0;
      result <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        R_IDLE: if (start) begin
          ma    <= m;
          mb    <= 1;
          p     <= '0;
          cnt   <= '0;
          ex    <= e;
          nn    <= n;
          acc   <= 1;
          state <= (n <= 1) ? R_END : R_RED;
          if (n <= 1) acc <= '0;
        end
        R_STEP: begin
          if (ex == '0) state <= R_END;
          else if (ex[0]) begin            // acc = acc * base mod n
            ma <= acc; mb <= base; p <= '0; cnt <= '0; state <= R_MUL;
          end else begin                   // base = base * base mod n
            ma <= base; mb <= base; p <= '0; cnt <= '0; state <= R_SQR;
          end
        end
        R_RED, R_MUL, R_SQR: begin
          p   <= p2ss;
          ma  <= ma << 1;
          cnt <= cnt + 1'b1;
          if (int'(cnt) == W - 1) begin
            if (state == R_RED) begin      // base = m*1 mod n
              base  <= p2ss[W-1:0];
              state <= R_STEP;
            end else if (state == R_MUL) begin
              acc   <= p2ss[W-1:0];
              ma    <= base; mb <= base; p <= '0; cnt <= '0;
              state <= R_SQR;
            end else begin
              base  <= p2ss[W-1:0];
              ex    <= ex >> 1;
              state <= R_STEP;
            end
          end
        end
        default: begin                     // R_END
          result <= acc;
          done   <= 1'b1;
          state  <= R_IDLE;
        end
      endcase
    end
  end
endmodule
