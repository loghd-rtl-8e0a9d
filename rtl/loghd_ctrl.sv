// loghd_ctrl: sequencer of one LogHD inference.
//
// Inference in LogHD is two passes: n similarities of D-dimensional vectors,
// then C distances in the n-dimensional activation space. This controller
// runs them back to back:
//   S_ACC   accept ROWS = ceil(D/LANES) query beats (q_valid/q_ready), issuing
//           for each the read of the matching bundle row; one cycle later
//           (mac_en, mac_first) the similarity unit accumulates that beat.
//   S_WAIT  one cycle for the last beat's multiply-accumulate.
//   S_DEC   C cycles, reading profile c = 0..C-1; one cycle later
//           (dec_en, dec_first, dec_cls) the decoder compares it.
//   S_FIN   one cycle for the last compare.
//   S_OUT   res_valid high until res_ready; then back to S_ACC.
// Timing: with q_valid always high, res_valid rises ROWS + C + 2 cycles after
// the first beat is accepted, and a new query can start one cycle after the
// result is taken. Beats of the next query are not accepted before then.
// The phase order is the method's; the states, handshakes and latency are
// this design's.
module loghd_ctrl
  import loghd_pkg::C_DEF, loghd_pkg::D_DEF, loghd_pkg::LANES_DEF, loghd_pkg::idx_width, loghd_pkg::state_e,
         loghd_pkg::S_ACC, loghd_pkg::S_WAIT, loghd_pkg::S_DEC, loghd_pkg::S_FIN, loghd_pkg::S_OUT;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned ROWS = (D + LANES - 1) / LANES,
  localparam int unsigned RW   = idx_width(ROWS),
  localparam int unsigned CW   = idx_width(C)
) (
  input  logic            clk,
  input  logic            rst_n,
  // query stream
  input  logic            q_valid,
  output logic            q_ready,
  // bundle memory read
  output logic            row_rd_en,
  output logic [RW-1:0]   row_rd_addr,
  // similarity unit
  output logic            mac_en,
  output logic            mac_first,
  // profile memory read
  output logic            prof_rd_en,
  output logic [CW-1:0]   prof_rd_class,
  // decoder
  output logic            dec_en,
  output logic            dec_first,
  output logic [CW-1:0]   dec_cls,
  // result
  output logic            res_valid,
  input  logic            res_ready
);

  state_e        state;
  logic [RW-1:0] beat;
  logic [CW-1:0] cls;
  logic          accept;

  assign q_ready       = (state == S_ACC);
  assign accept        = q_valid && q_ready;
  assign row_rd_en     = accept;
  assign row_rd_addr   = beat;
  assign prof_rd_en    = (state == S_DEC);
  assign prof_rd_class = cls;
  assign res_valid     = (state == S_OUT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_ACC;
      beat      <= '0;
      cls       <= '0;
      mac_en    <= 1'b0;
      mac_first <= 1'b0;
      dec_en    <= 1'b0;
      dec_first <= 1'b0;
      dec_cls   <= '0;
    end else begin
      mac_en    <= accept;
      mac_first <= accept && (beat == '0);
      dec_en    <= prof_rd_en;
      dec_first <= prof_rd_en && (cls == '0);
      dec_cls   <= cls;
      unique case (state)
        S_ACC: if (accept) begin
          if (beat == RW'(ROWS - 1)) begin
            beat  <= '0;
            state <= S_WAIT;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_WAIT: begin
          cls   <= '0;
          state <= S_DEC;
        end
        S_DEC: begin
          if (cls == CW'(C - 1)) state <= S_FIN;
          else                   cls   <= cls + 1'b1;
        end
        S_FIN: state <= S_OUT;
        S_OUT: if (res_ready) state <= S_ACC;
        default: state <= S_ACC;
      endcase
    end
  end

  // The decoder sees every class exactly once, in order, starting with first.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dec_en && dec_first |-> dec_cls == '0);
  // The result stays offered until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   res_valid && !res_ready |=> res_valid);

endmodule
