// Control and state registers (CSRs).
//
// The host (or its compiler) writes the layer configuration here once per
// layer; the registers drive the configuration broadcast to all PEs, the
// bit-packing unit and the controller. Register map (32-bit, word index):
//   0 FORMAT  [4:0] pa [8:5] ea [13:9] pw [17:14] ew [22:18] po [26:23] eo
//             [27] int_mode [28] mx_en
//   1 SCALE   [7:0] MX activation scale, [15:8] MX weight scale (E8M0)
//   2 TILE_K  [4:0] number of k steps of the tile
//   3 LOAD    [0] destination of the off-chip input stream (0 act, 1 weight)
//             [5:1] element container precision for the BPU
//             [6] 16-bit containers ; a write also restarts the BPU
//   4 CMD     write [0] = 1 starts the tile (pulse)
//   5 STATUS  read: [0] busy, [15:8] tiles completed, [31:16] BPU elements
// Reads are combinational. Reset values: FP16 (E5M10) x FP16 to FP16, K = 1.
module fb_csr
  import flexibit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [2:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic        busy,
  input  logic        tile_done,
  input  logic [31:0] bpu_elems,
  output fb_cfg_t     cfg,
  output logic [4:0]  tile_k,
  output logic        load_dst,
  output logic [4:0]  load_prec,
  output logic        load_cont16,
  output logic        bpu_restart,
  output logic        start
);
  logic [28:0] fmt_q;
  logic [15:0] scale_q;
  logic [7:0]  done_cnt_q;
  logic [6:0]  load_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fmt_q      <= {1'b0, 1'b0, 4'd5, 5'd16, 4'd5, 5'd16, 4'd5, 5'd16};
      scale_q    <= {8'd127, 8'd127};
      tile_k     <= 5'd1;
      load_q     <= {1'b1, 5'd16, 1'b0};
      done_cnt_q <= '0;
      bpu_restart <= 1'b0;
      start      <= 1'b0;
    end else begin
      bpu_restart <= 1'b0;
      start       <= 1'b0;
      if (tile_done) done_cnt_q <= done_cnt_q + 1'b1;
      if (we) begin
        case (addr)
          3'd0: fmt_q   <= wdata[28:0];
          3'd1: scale_q <= wdata[15:0];
          3'd2: tile_k  <= wdata[4:0];
          3'd3: begin load_q <= wdata[6:0]; bpu_restart <= 1'b1; end
          3'd4: start   <= wdata[0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    cfg.pa       = fmt_q[4:0];
    cfg.ea       = fmt_q[8:5];
    cfg.pw       = fmt_q[13:9];
    cfg.ew       = fmt_q[17:14];
    cfg.po       = fmt_q[22:18];
    cfg.eo       = fmt_q[26:23];
    cfg.int_mode = fmt_q[27];
    cfg.mx_en    = fmt_q[28];
    cfg.scale_a  = scale_q[7:0];
    cfg.scale_w  = scale_q[15:8];
    load_dst     = load_q[0];
    load_prec    = load_q[5:1];
    load_cont16  = load_q[6];
    case (addr)
      3'd0: rdata = {3'b0, fmt_q};
      3'd1: rdata = {16'b0, scale_q};
      3'd2: rdata = {27'b0, tile_k};
      3'd3: rdata = {25'b0, load_q};
      3'd5: rdata = {bpu_elems[15:0], done_cnt_q, 7'b0, busy};
      default: rdata = '0;
    endcase
  end
endmodule
