// FlexiBit accelerator top level.
//
// An X x Y array of flexible-precision PEs fed over a two-dimensional bus
// from two global buffers that hold operands in bit-packed form.
//  * Off-chip input (64-bit words of zero-padded elements) passes through
//    the bit-packing unit into the activation or the weight global buffer,
//    as selected by the LOAD CSR.
//  * The controller streams both buffers through bus readers onto the row
//    buses (activations) and column buses (weights) into the PE local
//    buffers, runs the K steps of the tile on all PEs, and drains the C tile
//    through the unpacking unit to the 64-bit off-chip output stream.
//  * The CSRs hold the layer's precision/format; the control signal
//    generator turns it into the datapath control broadcast to every PE.
// Defaults: an 8 x 8 PE array (the Mobile-A configuration has 32 x 32;
// see the documentation for why the default is smaller), 2 MB weight and
// 1 MB activation/output buffers (64-bit words), 64-bit off-chip channel.
// Results stream straight from the PEs to the unpacking unit rather than
// being staged in the activation/output buffer first.
module flexibit_top
  import flexibit_pkg::*;
#(
  parameter int unsigned X         = 8,
  parameter int unsigned Y         = 8,
  parameter int unsigned WGB_DEPTH = 262144,
  parameter int unsigned AGB_DEPTH = 131072,
  parameter int unsigned LB_DEPTH  = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR port (host)
  input  logic        csr_we,
  input  logic [2:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  // off-chip input stream
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  input  logic        in_last,
  // off-chip output stream
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  output logic        out_last,
  output logic        busy
);
  localparam int unsigned AW  = $clog2(LB_DEPTH);
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1;
  localparam int unsigned YW  = (Y > 1) ? $clog2(Y) : 1;
  localparam int unsigned WAW = $clog2(WGB_DEPTH);
  localparam int unsigned AAW = $clog2(AGB_DEPTH);
  localparam int unsigned BAW = (WAW > AAW) ? WAW : AAW;

  fb_cfg_t cfg;
  fb_ctl_t ctl;
  logic [4:0] tile_k, load_prec;
  logic load_dst, load_cont16, bpu_restart, start, done;
  logic [31:0] bpu_elems;

  fb_csr u_csr (
    .clk, .rst_n, .we(csr_we), .addr(csr_addr), .wdata(csr_wdata), .rdata(csr_rdata),
    .busy, .tile_done(done), .bpu_elems, .cfg, .tile_k, .load_dst, .load_prec,
    .load_cont16, .bpu_restart, .start
  );

  fb_cfg_decode u_dec (.cfg, .ctl);

  // ---------------- bit packing into the global buffers ----------------
  logic           bpu_we;
  logic [BAW-1:0] bpu_addr;
  logic [63:0]    bpu_data;

  fb_bpu #(.AW(BAW)) u_bpu (
    .clk, .rst_n, .restart(bpu_restart), .prec(load_prec), .cont16(load_cont16),
    .in_valid, .in_ready, .in_data, .in_last,
    .wr_en(bpu_we), .wr_addr(bpu_addr), .wr_data(bpu_data), .elem_count(bpu_elems)
  );

  logic           a_rd_en, w_rd_en;
  logic [AAW-1:0] a_rd_addr;
  logic [WAW-1:0] w_rd_addr;
  logic [63:0]    a_rd_data, w_rd_data;

  fb_sram #(.W(64), .DEPTH(AGB_DEPTH)) u_act_gb (
    .clk, .we(bpu_we && !load_dst), .waddr(AAW'(bpu_addr)), .wdata(bpu_data),
    .rd_en(a_rd_en), .raddr(a_rd_addr), .rdata(a_rd_data)
  );
  fb_sram #(.W(64), .DEPTH(WGB_DEPTH)) u_wgt_gb (
    .clk, .we(bpu_we && load_dst), .waddr(WAW'(bpu_addr)), .wdata(bpu_data),
    .rd_en(w_rd_en), .raddr(w_rd_addr), .rdata(w_rd_data)
  );

  // ---------------- bus readers and controller ----------------
  logic             rd_start, a_valid, w_valid, a_take, w_take;
  logic [5:0]       a_bits, w_bits;
  logic [REG_W-1:0] a_chunk, w_chunk;

  fb_bus_reader #(.AW(AAW)) u_ard (
    .clk, .rst_n, .start(rd_start), .chunk_bits(a_bits), .chunk_valid(a_valid),
    .chunk(a_chunk), .take(a_take), .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(a_rd_data)
  );
  fb_bus_reader #(.AW(WAW)) u_wrd (
    .clk, .rst_n, .start(rd_start), .chunk_bits(w_bits), .chunk_valid(w_valid),
    .chunk(w_chunk), .take(w_take), .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data)
  );

  logic          a_we, w_we, step, step_clear, scale_ld;
  logic [XW-1:0] a_row, d_x;
  logic [YW-1:0] w_col, d_y;
  logic [AW-1:0] a_addr, w_addr, step_addr;
  logic [5:0]    d_sel;
  logic          d_valid, d_last, d_ready;

  fb_controller #(.X(X), .Y(Y), .LB_DEPTH(LB_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .tile_k, .cfg, .ctl, .busy, .done,
    .rd_start, .a_chunk_bits(a_bits), .w_chunk_bits(w_bits), .a_valid, .w_valid,
    .a_take, .w_take, .a_we, .a_row, .a_addr, .w_we, .w_col, .w_addr,
    .step, .step_clear, .step_addr, .scale_ld,
    .d_x, .d_y, .d_sel, .d_valid, .d_last, .d_ready
  );

  // ---------------- PE array on the 2-D bus ----------------
  logic [OUTW-1:0] pe_out [X][Y];

  for (genvar gx = 0; gx < X; gx++) begin : g_row
    for (genvar gy = 0; gy < Y; gy++) begin : g_col
      fb_pe #(.LB_DEPTH(LB_DEPTH)) u_pe (
        .clk, .rst_n, .cfg, .ctl,
        .we_a(a_we && 32'(a_row) == gx), .waddr_a(a_addr), .wdata_a(a_chunk),
        .we_w(w_we && 32'(w_col) == gy), .waddr_w(w_addr), .wdata_w(w_chunk),
        .step, .step_clear, .step_addr, .scale_ld,
        .out_sel(d_sel), .out_elem(pe_out[gx][gy])
      );
    end
  end

  // ---------------- drain through the unpacking unit ----------------
  fb_unpack u_unpack (
    .clk, .rst_n, .po(cfg.po), .in_valid(d_valid), .in_ready(d_ready),
    .in_elem(pe_out[d_x][d_y]), .in_last(d_last),
    .out_valid, .out_ready, .out_data, .out_last
  );
endmodule
