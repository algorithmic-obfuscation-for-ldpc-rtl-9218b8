// decoder_ctrl: three-state controller of the column-serial decoder.
//
// States (the usual LDPC decoder FSM): S_INIT, S_ITER, S_FINAL.
//  S_INIT  accepts a frame one block column per in_valid cycle (in_ready high).
//          Every accepted column is processed at once as the initialisation
//          pass: u = gamma', z' = sign(gamma'), syndrome accumulated.
//  S_ITER  processes one block column per cycle; KB cycles make one decoding
//          iteration. Iterations are counted 1..IMAX.
//  S_FINAL lasts one cycle, pulses done, then returns to S_INIT.
// At the last column of every pass the stop input (key-locked stop check on
// the complete syndrome) is sampled: if set, decoding ends with success;
// otherwise, after iteration IMAX, it ends as a decoding failure. success and
// iters are registered and hold until the next frame finishes.
// Timing: a frame that stops after I iterations is done KB*(I+1) cycles after its
// first column is accepted (if columns arrive back to back), plus one cycle.
module decoder_ctrl
  import ldpc_pkg::*;
#(
  parameter int KB   = KB_DEF,
  parameter int IMAX = IMAX_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic                     stop,
  output logic                     col_valid,
  output logic [idx_w(KB)-1:0]     col,
  output logic                     init_pass,
  output logic                     first_col,
  output logic                     last_col,
  output logic                     done,
  output logic                     success,
  output logic [idx_w(IMAX+1)-1:0] iters
);
  localparam int CW = idx_w(KB);
  localparam int IW = idx_w(IMAX + 1);

  typedef enum logic [1:0] {S_INIT, S_ITER, S_FINAL} state_t;

  state_t        state;
  logic [IW-1:0] pass;

  always_comb begin
    in_ready  = (state == S_INIT);
    init_pass = (state == S_INIT);
    col_valid = (state == S_INIT) ? in_valid : (state == S_ITER);
    first_col = (col == '0);
    last_col  = (col == CW'(KB - 1));
    done      = (state == S_FINAL);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_INIT;
      col     <= '0;
      pass    <= '0;
      success <= 1'b0;
      iters   <= '0;
    end else begin
      unique case (state)
        S_INIT, S_ITER: if (col_valid) begin
          col <= last_col ? '0 : col + 1'b1;
          if (last_col) begin
            if (stop) begin
              state   <= S_FINAL;
              success <= 1'b1;
              iters   <= pass;
            end else if (pass == IW'(IMAX)) begin
              state   <= S_FINAL;
              success <= 1'b0;
              iters   <= pass;
            end else begin
              state <= S_ITER;
              pass  <= pass + 1'b1;
            end
          end
        end
        S_FINAL: begin
          state <= S_INIT;
          pass  <= '0;
        end
        default: state <= S_INIT;
      endcase
    end
  end

  // Columns are only ever numbered 0..KB-1.
  a_col_range: assert property (@(posedge clk) disable iff (!rst_n) col < CW'(KB));
  // Iteration counter never passes IMAX.
  a_pass_range: assert property (@(posedge clk) disable iff (!rst_n) pass <= IW'(IMAX));

endmodule
