// stream_ctrl -- sequencer for the processing step of the CAS forest.
//
// For every query string it drives the forest input with the sequence the
// paper prescribes: each character is followed by a start value x, which is
// d+1 while fewer than m characters of the string have entered (no complete
// window yet, so any sum that grows from it exceeds d) and 0 after that;
// after the last character, m '-' tokens push the remaining sums down to the
// exit nodes. A string of l characters thus takes 2l + m clocks. The string
// number str_idx, which the exit nodes record, advances when the flush ends.
// After N_STRINGS strings the batch is done; the exit nodes then show which
// leaves are verified solutions.
//
// The paper's pseudo-code says x = d+1 while "tick count <= m"; its worked
// example (m = 3: values 2, 2, 0) and figure text ("until the length of the
// substring is >= m") give d+1 only for the first m-1 characters, which is
// what is built. The pseudo-code flushes for k = l..l+m; the step count 2l+m
// gives m flush tokens, which is what is built.
//
// This design's own choices: the host streams characters with a valid/ready
// handshake and marks each string's last character with s_last. If no
// character is offered in a character slot, '-' is sent in it and in the
// following number slot, so characters and numbers keep alternating and the
// exit-node strobe keeps its phase. 'start' begins a batch: it clears the exit
// nodes' string lists and sets str_idx to 0. d is loaded with d_we while idle.
// 'sync' marks the clock in which a string's first character enters.
module stream_ctrl
  import cas_pkg::*;
#(
  parameter int M         = 3,
  parameter int N_STRINGS = 4,
  localparam int IDX_W = (N_STRINGS > 1) ? $clog2(N_STRINGS) : 1,
  localparam int CNT_W = $clog2(M + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             d_we,
  input  dist_t            d_in,
  input  logic             start,
  // query characters
  input  logic             s_valid,
  output logic             s_ready,
  input  base_t            s_char,
  input  logic             s_last,
  // to the forest
  output token_t           top,        // token entering the tree roots
  output logic             sync,       // first character of a string enters
  output logic [IDX_W-1:0] str_idx,
  output logic             clear,      // empty the exit-node lists
  output dist_t            d,
  output logic             busy,
  output logic             done
);

  typedef enum logic [2:0] {
    S_IDLE, S_CHAR, S_NUM, S_BUBBLE, S_FLUSH, S_DONE
  } state_e;

  state_e           state;
  logic [CNT_W-1:0] nchar;      // characters of this string so far, saturating at M
  logic [CNT_W-1:0] nflush;
  logic             last_q;
  logic             take;

  assign take    = (state == S_CHAR) && s_valid;
  assign s_ready = (state == S_CHAR);
  assign clear   = (state == S_IDLE || state == S_DONE) && start;
  assign sync    = take && (nchar == '0);
  assign busy    = (state != S_IDLE) && (state != S_DONE);
  assign done    = (state == S_DONE);

  always_comb begin
    unique case (state)
      S_CHAR:  top = take ? mk_char(s_char) : TOKEN_NONE;
      S_NUM:   top = (32'(nchar) < M) ? mk_num(sum_t'(d) + sum_t'(1)) : mk_num('0);
      default: top = TOKEN_NONE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      nchar   <= '0;
      nflush  <= '0;
      last_q  <= 1'b0;
      str_idx <= '0;
      d       <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (d_we) d <= d_in;
          if (start) begin
            state   <= S_CHAR;
            nchar   <= '0;
            str_idx <= '0;
          end
        end
        S_CHAR: begin
          if (take) begin
            state  <= S_NUM;
            last_q <= s_last;
            if (32'(nchar) < M) nchar <= nchar + 1'b1;
          end else begin
            state <= S_BUBBLE;
          end
        end
        S_BUBBLE: state <= S_CHAR;
        S_NUM: begin
          if (last_q) begin
            state  <= S_FLUSH;
            nflush <= '0;
          end else begin
            state <= S_CHAR;
          end
        end
        S_FLUSH: begin
          if (32'(nflush) == M - 1) begin
            nchar <= '0;
            if (32'(str_idx) == N_STRINGS - 1) begin
              state <= S_DONE;
            end else begin
              state   <= S_CHAR;
              str_idx <= str_idx + 1'b1;
            end
          end else begin
            nflush <= nflush + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_alternate: assert property (@(posedge clk) disable iff (!rst_n)
    top.kind == TK_CHAR |=> top.kind == TK_NUM);

endmodule
