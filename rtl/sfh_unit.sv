// sfh_unit: line fingerprint generator (SuperFastHash).
//
// Computes the 32-bit SuperFastHash of one memory line. The line is captured
// on `start`, then consumed one byte per cycle, lowest byte first (byte i is
// bits [8i+7:8i]). Every fourth byte completes a 32-bit word, split into two
// little-endian 16-bit halves, and one hash round runs:
//   h += lo16; t = (hi16 << 11) ^ h; h = (h << 16) ^ t; h += h >> 11;
// starting from h = LINE_BYTES. After the last word one cycle applies the
// final avalanche (h ^= h<<3; h += h>>5; h ^= h<<4; h += h>>17; h ^= h<<25;
// h += h>>6) and `done` pulses with the result on `lfp`.
//
// Timing: `start` in cycle 0, `done` in cycle LINE_BYTES+1, so a 256-byte
// line takes 257 cycles. `start` is ignored while `busy`.
//
// The choice of SuperFastHash, the 4-byte fingerprint and the rate of one
// byte per cycle follow the design description. The byte order, the
// one-cycle avalanche stage and the restriction to line sizes that are a
// multiple of four (so the algorithm's tail cases never occur) are this
// implementation's choices; the round and avalanche are those of the
// published SuperFastHash algorithm.
module sfh_unit #(
  parameter int LINE_BYTES = caram_pkg::LINE_BYTES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [LINE_BYTES*8-1:0] line,
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             lfp
);
  localparam int CNT_W = $clog2(LINE_BYTES + 1);

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_FIN } state_e;
  state_e                  state;
  logic [LINE_BYTES*8-1:0] sh;
  logic [CNT_W-1:0]        cnt;
  logic [23:0]             part;   // first three bytes of the current word
  logic [31:0]             h;

  logic [7:0]  cur_byte;
  logic [31:0] word, h_round, t_r, h_r1, h_r2;
  logic [31:0] a1, a2, a3, a4, a5, a6;

  assign cur_byte = sh[7:0];
  assign word     = {cur_byte, part};

  always_comb begin
    h_r1    = h + {16'd0, word[15:0]};
    t_r     = ({16'd0, word[31:16]} << 11) ^ h_r1;
    h_r2    = (h_r1 << 16) ^ t_r;
    h_round = h_r2 + (h_r2 >> 11);
  end

  always_comb begin
    a1 = h  ^ (h  << 3);
    a2 = a1 + (a1 >> 5);
    a3 = a2 ^ (a2 << 4);
    a4 = a3 + (a3 >> 17);
    a5 = a4 ^ (a4 << 25);
    a6 = a5 + (a5 >> 6);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      sh    <= '0;
      cnt   <= '0;
      part  <= '0;
      h     <= '0;
      done  <= 1'b0;
      lfp   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sh    <= line;
          cnt   <= '0;
          part  <= '0;
          h     <= 32'(LINE_BYTES);
          state <= S_RUN;
        end
        S_RUN: begin
          sh   <= sh >> 8;
          part <= {cur_byte, part[23:8]};
          if (cnt[1:0] == 2'd3) h <= h_round;
          cnt <= cnt + 1'b1;
          if (cnt == CNT_W'(LINE_BYTES - 1)) state <= S_FIN;
        end
        S_FIN: begin
          lfp   <= a6;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (LINE_BYTES % 4 == 0)
    else $error("sfh_unit: LINE_BYTES must be a multiple of 4");

endmodule
