// dataway_arbiter: shares the readout-crate backplane dataway of one FEM
// between the trigger stream and the SN stream.
//
// The paper states that the dataway (up to 512 MB/s) is shared by both streams
// and that the trigger stream has priority over the SN stream through a
// token-passing scheme; it gives no further detail. This block is the simplest
// circuit with that behaviour: a FEM may drive the dataway only while it holds
// the token. On receiving the token (token_in pulse) it sends one whole packet,
// a trigger-stream packet if one is waiting, otherwise an SN frame record, and
// then passes the token on (token_out pulse); with nothing to send it passes the
// token on at once. Packets are never interleaved, so an SN frame already
// started is finished first. The width (16 bits per clock) and the packet
// delimiting by a last flag are this design's choices.
//
// Interface: two valid/ready packet streams in (data, last); dataway out with
// bp_valid/bp_ready, bp_last and bp_sn (1 while an SN packet is sent).
module dataway_arbiter
  import sn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              token_in,
  output logic              token_out,
  input  logic              trg_valid,
  output logic              trg_ready,
  input  logic [WORD_W-1:0] trg_data,
  input  logic              trg_last,
  input  logic              sn_valid,
  output logic              sn_ready,
  input  logic [WORD_W-1:0] sn_data,
  input  logic              sn_last,
  output logic              bp_valid,
  input  logic              bp_ready,
  output logic [WORD_W-1:0] bp_data,
  output logic              bp_last,
  output logic              bp_sn
);
  typedef enum logic [1:0] {A_WAIT, A_DECIDE, A_TRG, A_SN} astate_e;
  astate_e state;

  assign trg_ready = (state == A_TRG) && bp_ready;
  assign sn_ready  = (state == A_SN)  && bp_ready;
  assign bp_valid  = (state == A_TRG) ? trg_valid : (state == A_SN) ? sn_valid : 1'b0;
  assign bp_data   = (state == A_TRG) ? trg_data  : sn_data;
  assign bp_last   = (state == A_TRG) ? trg_last  : sn_last;
  assign bp_sn     = (state == A_SN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_WAIT;
      token_out <= 1'b0;
    end else begin
      token_out <= 1'b0;
      case (state)
        A_WAIT:   if (token_in) state <= A_DECIDE;
        A_DECIDE: begin
          if (trg_valid)     state <= A_TRG;
          else if (sn_valid) state <= A_SN;
          else begin
            state     <= A_WAIT;
            token_out <= 1'b1;
          end
        end
        A_TRG: if (trg_valid && bp_ready && trg_last) begin
          state     <= A_WAIT;
          token_out <= 1'b1;
        end
        default: if (sn_valid && bp_ready && sn_last) begin  // A_SN
          state     <= A_WAIT;
          token_out <= 1'b1;
        end
      endcase
    end
  end

  a_token_once: assert property (@(posedge clk) disable iff (!rst_n)
    token_in |-> state == A_WAIT);

endmodule
