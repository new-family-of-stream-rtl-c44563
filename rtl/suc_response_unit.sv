// suc_response_unit: the unit-side part of the enrolment, identification and
// update protocols of a keystream-based secret unknown cipher (SUC).
//
// A response Y_i is the next K keystream bits. On cmd_gen the unit saves the
// generator state S_{i-1}, runs the generator for K cycles and shifts the
// keystream bits into y (the first bit ends in the MSB). Enrolment and the
// update protocol simply issue cmd_gen t times in a row and read each y.
//
// Identification: the authority sends E_{Y_i}(R_T) || R_T. After generating
// Y_i, the unit decrypts the first part with an external standard cipher and
// presents R'_T on r_t_dec together with R_T on r_t, with cmd_check. If the
// two differ the message did not come from the authority: the unit raises
// reject and reloads the saved state S_{i-1}, so that one forged message
// cannot push it out of step with the authority's records; the response
// index goes back as well. If they match it raises accept and keeps S_i.
//
// Interface and timing: cmd_gen and cmd_check are one-cycle commands taken
// only while busy is low (and cmd_check only while y_valid is high). busy
// is high for exactly K cycles after the cycle in which cmd_gen was seen;
// y_valid rises with the last of them, K+1 clock edges after cmd_gen.
// accept / reject are one-cycle pulses in the cycle after cmd_check; the
// restore happens on the same edge. ksg_en and ksg_load drive the generator.
//
// What follows the published protocols: K-cycle responses, sequential use of
// Y_i, keeping S_{i-1} when R'_T != R_T. This design's own choices: the
// values of K and RW, the command handshake, the bit order of y, and the
// snapshot register used to keep S_{i-1}.
module suc_response_unit #(
  parameter int unsigned K  = 128,  // response length in bits
  parameter int unsigned RW = 128,  // width of the challenge R_T
  parameter int unsigned SW = 223   // generator state bits
) (
  input  logic          clk,
  input  logic          rst_n,
  // commands
  input  logic          cmd_gen,
  input  logic          cmd_check,
  input  logic [RW-1:0] r_t,
  input  logic [RW-1:0] r_t_dec,
  // results
  output logic [K-1:0]  y,
  output logic          y_valid,
  output logic          busy,
  output logic          accept,
  output logic          reject,
  output logic [31:0]   resp_idx,
  // keystream generator
  output logic          ksg_en,
  output logic          ksg_load,
  output logic [SW-1:0] ksg_load_value,
  input  logic [SW-1:0] ksg_state,
  input  logic          z
);

  typedef enum logic {IDLE, GEN} st_e;

  localparam int unsigned CW = $clog2(K + 1);

  st_e          st;
  logic [CW-1:0] cnt;
  logic [SW-1:0] snap;     // S_{i-1}: state before the latest response
  logic          mismatch;
  logic          do_check;

  assign busy           = (st == GEN);
  assign ksg_en         = (st == GEN);
  assign mismatch       = (r_t_dec != r_t);
  assign do_check       = (st == IDLE) && cmd_check && y_valid;
  assign ksg_load       = do_check && mismatch;
  assign ksg_load_value = snap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= IDLE;
      cnt      <= '0;
      snap     <= '0;
      y        <= '0;
      y_valid  <= 1'b0;
      accept   <= 1'b0;
      reject   <= 1'b0;
      resp_idx <= '0;
    end else begin
      accept <= 1'b0;
      reject <= 1'b0;
      case (st)
        IDLE: begin
          if (cmd_gen) begin
            snap    <= ksg_state;
            cnt     <= '0;
            y_valid <= 1'b0;
            st      <= GEN;
          end else if (do_check) begin
            if (mismatch) begin
              reject   <= 1'b1;
              y_valid  <= 1'b0;
              resp_idx <= resp_idx - 32'd1;
            end else begin
              accept <= 1'b1;
            end
          end
        end
        GEN: begin
          y   <= {y[K-2:0], z};
          cnt <= cnt + CW'(1);
          if (cnt == CW'(K - 1)) begin
            st       <= IDLE;
            y_valid  <= 1'b1;
            resp_idx <= resp_idx + 32'd1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // Commands are exclusive and a check needs a finished response.
  a_cmd_excl: assert property (@(posedge clk) disable iff (!rst_n) !(cmd_gen && cmd_check))
    else $error("cmd_gen and cmd_check in the same cycle");
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) ksg_load |-> !ksg_en)
    else $error("state restore while generating");

endmodule
