// spade_accel: SIMD posit systolic accelerator (Fig. 3), the top level.
//
// A host processor (off this design) loads weights and input features into
// the WT and IF memory banks over a simple word bus, programs the control
// unit and starts it. The control unit streams K rows out of both banks; the
// wt_mem and if_mem skew registers line the streams up for an N x N array of
// spade_pe processing elements; each PE runs a SIMD posit dot product in its
// spade_mac. When every PE is done, the result rows pass through the
// activation-function unit into the OF bank, and irq pulses.
//
// Data layout (mode selects 4 x Posit(8,0), 2 x Posit(16,1) or 1 x
// Posit(32,2) lanes per 32-bit word; lanes are independent problems):
//   WT bank row (wt_base + k), column i : weight  W[i][k]
//   IF bank row (if_base + k), column j : feature X[j][k]
//   OF bank row (of_base + i), column j : AF( sum_k W[i][k] * X[j][k] )
// Host bus: bus_req with bus_we writes bus_wdata at word address bus_addr;
// a read returns bus_rdata with bus_rvalid on the next cycle. Address map:
// [15:14] = 0 registers (see control_unit), 1 IF bank, 2 WT bank, 3 OF bank;
// inside a bank the offset is row * N + column.
// A run takes about K + 2N + 8 + N cycles (stream, array fill and MAC
// latency, write-back). The host processor and camera of the figure are not
// part of this design; the bus ports are where the host attaches.
module spade_accel
  import spade_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned CWI = (N > 1) ? $clog2(N) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_req,
  input  logic        bus_we,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        bus_rvalid,
  output logic        irq,
  output logic        busy
);

  // ---------------- address mapping ----------------
  logic [1:0]     region, region_q;
  logic [3:0]     reg_idx;
  logic [AW-1:0]  h_row, if_base, wt_base, of_base, if_addr, wt_addr, of_addr;
  logic [CWI-1:0] h_col;
  logic [15:0]    k, wr_row;

  address_mapper #(.N(N), .DEPTH(DEPTH)) u_amap (
    .host_addr(bus_addr), .region(region), .reg_idx(reg_idx), .row(h_row), .col(h_col),
    .if_base(if_base), .wt_base(wt_base), .of_base(of_base), .k(k), .i(wr_row),
    .if_addr(if_addr), .wt_addr(wt_addr), .of_addr(of_addr)
  );

  // ---------------- control unit ----------------
  logic [31:0] reg_rdata, reg_rdata_q;
  logic [1:0]  mode;
  logic        af_en, rd_en, wr_en, feed_valid, feed_first, feed_last, all_done;
  logic [3:0]  any_nar;

  control_unit #(.N(N), .DEPTH(DEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .reg_we(bus_req && bus_we && region == 2'd0), .reg_idx(reg_idx),
    .reg_wdata(bus_wdata), .reg_rdata(reg_rdata),
    .mode(mode), .af_en(af_en), .if_base(if_base), .wt_base(wt_base), .of_base(of_base),
    .k(k), .rd_en(rd_en), .feed_valid(feed_valid), .feed_first(feed_first),
    .feed_last(feed_last), .wr_row(wr_row), .wr_en(wr_en),
    .all_done(all_done), .any_nar(any_nar), .busy(busy), .irq(irq)
  );

  // ---------------- memory banks ----------------
  logic [WORD_W-1:0] if_row [N], wt_row [N], of_row [N], of_unused [N], zero_row [N];
  logic [WORD_W-1:0] if_h_rdata, wt_h_rdata, of_h_rdata;

  always_comb for (int j = 0; j < N; j++) zero_row[j] = '0;

  mem_bank #(.N(N), .DEPTH(DEPTH)) u_if_bank (
    .clk(clk),
    .h_we(bus_req && bus_we && region == 2'd1), .h_re(bus_req && !bus_we && region == 2'd1),
    .h_row(h_row), .h_col(h_col), .h_wdata(bus_wdata), .h_rdata(if_h_rdata),
    .a_re(rd_en), .a_raddr(if_addr), .a_rdata(if_row),
    .a_we(1'b0), .a_waddr('0), .a_wdata(zero_row)
  );

  mem_bank #(.N(N), .DEPTH(DEPTH)) u_wt_bank (
    .clk(clk),
    .h_we(bus_req && bus_we && region == 2'd2), .h_re(bus_req && !bus_we && region == 2'd2),
    .h_row(h_row), .h_col(h_col), .h_wdata(bus_wdata), .h_rdata(wt_h_rdata),
    .a_re(rd_en), .a_raddr(wt_addr), .a_rdata(wt_row),
    .a_we(1'b0), .a_waddr('0), .a_wdata(zero_row)
  );

  mem_bank #(.N(N), .DEPTH(DEPTH)) u_of_bank (
    .clk(clk),
    .h_we(bus_req && bus_we && region == 2'd3), .h_re(bus_req && !bus_we && region == 2'd3),
    .h_row(h_row), .h_col(h_col), .h_wdata(bus_wdata), .h_rdata(of_h_rdata),
    .a_re(1'b0), .a_raddr('0), .a_rdata(of_unused),
    .a_we(wr_en), .a_waddr(of_addr), .a_wdata(of_row)
  );

  // ---------------- if_mem / wt_mem skew registers ----------------
  logic [WORD_W-1:0] if_sk [N], wt_sk [N];
  logic [4:0]        wt_c [N];
  logic [0:0]        if_c [N];

  skew_register #(.N(N), .CW(5)) u_wt_reg (
    .clk(clk), .rst_n(rst_n), .din(wt_row),
    .cin({feed_valid, feed_first, feed_last, mode}), .dout(wt_sk), .cout(wt_c)
  );

  skew_register #(.N(N), .CW(1)) u_if_reg (
    .clk(clk), .rst_n(rst_n), .din(if_row), .cin(feed_valid), .dout(if_sk), .cout(if_c)
  );

  // ---------------- systolic array ----------------
  logic              c_valid [N], c_first [N], c_last [N];
  logic [1:0]        c_mode  [N];
  logic [WORD_W-1:0] result  [N][N];
  logic              pe_done [N][N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      c_valid[i] = wt_c[i][4];
      c_first[i] = wt_c[i][3];
      c_last[i]  = wt_c[i][2];
      c_mode[i]  = wt_c[i][1:0];
    end
  end

  systolic_array #(.N(N)) u_array (
    .clk(clk), .rst_n(rst_n),
    .ctrl_valid(c_valid), .ctrl_first(c_first), .ctrl_last(c_last), .ctrl_mode(c_mode),
    .wt_in(wt_sk), .if_in(if_sk),
    .result(result), .done(pe_done), .all_done(all_done), .any_nar(any_nar)
  );

  // ---------------- activation function into the OF bank ----------------
  logic [3:0] clipped [N];

  for (genvar j = 0; j < N; j++) begin : g_af
    act_func u_af (
      .en(af_en), .mode(mode), .din(result[wr_row[CWI-1:0]][j]),
      .dout(of_row[j]), .clipped(clipped[j])
    );
  end

  // ---------------- host read data ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_rvalid  <= 1'b0;
      region_q    <= '0;
      reg_rdata_q <= '0;
    end else begin
      bus_rvalid  <= bus_req && !bus_we;
      region_q    <= region;
      reg_rdata_q <= reg_rdata;
    end
  end

  always_comb begin
    case (region_q)
      2'd0:    bus_rdata = reg_rdata_q;
      2'd1:    bus_rdata = if_h_rdata;
      2'd2:    bus_rdata = wt_h_rdata;
      default: bus_rdata = of_h_rdata;
    endcase
  end

endmodule
