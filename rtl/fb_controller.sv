// Accelerator controller.
//
// Runs one output-stationary GEMM tile C[M x N] = A[M x K] * W[K x N] on the
// X x Y PE array, with M = X*na and N = Y*nw. PE (x,y) owns rows
// x*na .. x*na+na-1 and columns y*nw .. y*nw+nw-1 of C.
//  LOAD    the two bus readers stream the packed activation and weight
//          buffers concurrently; chunk t of the activation stream is the
//          register (row x = t / K, step k = t % K) and is broadcast on row
//          bus x to address k of every PE of that row; the weight stream is
//          likewise laid out column by column on the column buses.
//  COMPUTE K steps, one per cycle, on all PEs in parallel (first step
//          clears the accumulators and loads the MX scales), then two
//          cycles for the PE pipeline.
//  DRAIN   the outputs leave in row-major order of C, one element per
//          handshake with the unpacking unit (drain select x, y, slot).
// 'done' pulses when the last output has been accepted.
module fb_controller
  import flexibit_pkg::*;
#(
  parameter int unsigned X  = 8,
  parameter int unsigned Y  = 8,
  parameter int unsigned LB_DEPTH = 30,
  localparam int unsigned AW = $clog2(LB_DEPTH),
  localparam int unsigned XW = (X > 1) ? $clog2(X) : 1,
  localparam int unsigned YW = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [4:0]    tile_k,
  input  fb_cfg_t       cfg,
  input  fb_ctl_t       ctl,
  output logic          busy,
  output logic          done,
  // bus readers
  output logic          rd_start,
  output logic [5:0]    a_chunk_bits,
  output logic [5:0]    w_chunk_bits,
  input  logic          a_valid,
  input  logic          w_valid,
  output logic          a_take,
  output logic          w_take,
  // row / column buses
  output logic          a_we,
  output logic [XW-1:0] a_row,
  output logic [AW-1:0] a_addr,
  output logic          w_we,
  output logic [YW-1:0] w_col,
  output logic [AW-1:0] w_addr,
  // compute broadcast
  output logic          step,
  output logic          step_clear,
  output logic [AW-1:0] step_addr,
  output logic          scale_ld,
  // drain
  output logic [XW-1:0] d_x,
  output logic [YW-1:0] d_y,
  output logic [5:0]    d_sel,
  output logic          d_valid,
  output logic          d_last,
  input  logic          d_ready
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMP, S_WAIT, S_DRAIN, S_DONE} state_t;
  state_t state_q;

  logic [XW-1:0] ax_q;  logic [AW-1:0] ak_q;  logic a_done_q;
  logic [YW-1:0] wy_q;  logic [AW-1:0] wk_q;  logic w_done_q;
  logic [AW-1:0] k_q;
  logic [1:0]    wait_q;
  logic [XW-1:0] dx_q;  logic [4:0] di_q;
  logic [YW-1:0] dy_q;  logic [4:0] dj_q;
  logic [AW-1:0] klast;

  assign klast        = AW'(tile_k - 5'd1);
  assign a_chunk_bits = 6'(ctl.na * cfg.pa);
  assign w_chunk_bits = 6'(ctl.nw * cfg.pw);
  assign busy         = (state_q != S_IDLE);

  assign a_take = (state_q == S_LOAD) && !rd_start && !a_done_q && a_valid;
  assign w_take = (state_q == S_LOAD) && !rd_start && !w_done_q && w_valid;
  assign a_we   = a_take;
  assign a_row  = ax_q;
  assign a_addr = ak_q;
  assign w_we   = w_take;
  assign w_col  = wy_q;
  assign w_addr = wk_q;

  assign step       = (state_q == S_COMP);
  assign step_clear = (state_q == S_COMP) && (k_q == '0);
  assign step_addr  = k_q;
  assign scale_ld   = step_clear;

  assign d_valid = (state_q == S_DRAIN);
  assign d_x     = dx_q;
  assign d_y     = dy_q;
  assign d_sel   = 6'(dj_q * ctl.na + di_q);
  assign d_last  = (32'(dx_q) == X - 1) && (di_q == ctl.na - 5'd1) &&
                   (32'(dy_q) == Y - 1) && (dj_q == ctl.nw - 5'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      rd_start <= 1'b0;
      done <= 1'b0;
      ax_q <= '0; ak_q <= '0; a_done_q <= 1'b0;
      wy_q <= '0; wk_q <= '0; w_done_q <= 1'b0;
      k_q <= '0; wait_q <= '0;
      dx_q <= '0; di_q <= '0; dy_q <= '0; dj_q <= '0;
    end else begin
      rd_start <= 1'b0;
      done     <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q  <= S_LOAD;
          rd_start <= 1'b1;
          ax_q <= '0; ak_q <= '0; a_done_q <= 1'b0;
          wy_q <= '0; wk_q <= '0; w_done_q <= 1'b0;
        end
        S_LOAD: begin
          if (a_take) begin
            if (ak_q == klast) begin
              ak_q <= '0;
              if (32'(ax_q) == X - 1) a_done_q <= 1'b1;
              else ax_q <= ax_q + 1'b1;
            end else ak_q <= ak_q + 1'b1;
          end
          if (w_take) begin
            if (wk_q == klast) begin
              wk_q <= '0;
              if (32'(wy_q) == Y - 1) w_done_q <= 1'b1;
              else wy_q <= wy_q + 1'b1;
            end else wk_q <= wk_q + 1'b1;
          end
          if (a_done_q && w_done_q) begin
            state_q <= S_COMP;
            k_q <= '0;
          end
        end
        S_COMP: begin
          if (k_q == klast) begin
            state_q <= S_WAIT;
            wait_q  <= 2'd1;
          end else k_q <= k_q + 1'b1;
        end
        S_WAIT: begin
          if (wait_q == 2'd0) begin
            state_q <= S_DRAIN;
            dx_q <= '0; di_q <= '0; dy_q <= '0; dj_q <= '0;
          end else wait_q <= wait_q - 1'b1;
        end
        S_DRAIN: if (d_ready) begin
          if (d_last) state_q <= S_DONE;
          else if (dj_q != ctl.nw - 5'd1) dj_q <= dj_q + 1'b1;
          else begin
            dj_q <= '0;
            if (32'(dy_q) != Y - 1) dy_q <= dy_q + 1'b1;
            else begin
              dy_q <= '0;
              if (di_q != ctl.na - 5'd1) di_q <= di_q + 1'b1;
              else begin
                di_q <= '0;
                dx_q <= dx_q + 1'b1;
              end
            end
          end
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
