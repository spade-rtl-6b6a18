// control_unit: control and status registers and the sequencing FSM of the
// accelerator (Control Unit of Fig. 3: Status Reg, Control Reg, FSM &
// Control Logic; the Address Mapper is a separate module).
//
// Registers (index on the host bus, 32-bit):
//   0 CTRL    [0] start (write 1; reads 0), [2:1] mode, [3] AF enable
//   1 STATUS  [0] busy, [1] done (cleared by start), [7:4] NaR lanes seen
//   2 KLEN    dot-product length K (>= 1)
//   3 IF_BASE 4 WT_BASE 5 OF_BASE  first bank rows of the operands/results
//   6 CYCLES  clock cycles taken by the last run
// FSM: IDLE -> STREAM (K cycles: read row k of the IF and WT banks; the
// control word valid/first/last follows one cycle later, aligned with the
// bank read data) -> WAIT (at least 2N+2 cycles, then until every PE
// reports done) -> WRITE (N cycles: result row i through the AF into the
// OF bank) -> IDLE with done set and a one-cycle irq pulse.
// A start while busy is ignored. Registers are read combinationally
// (reg_rdata); the top registers the value. The paper names these parts
// only; register map, FSM and timing are this design's choices.
module control_unit
  import spade_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // register access
  input  logic          reg_we,
  input  logic [3:0]    reg_idx,
  input  logic [31:0]   reg_wdata,
  output logic [31:0]   reg_rdata,
  // configuration towards the datapath
  output logic [1:0]    mode,
  output logic          af_en,
  output logic [AW-1:0] if_base,
  output logic [AW-1:0] wt_base,
  output logic [AW-1:0] of_base,
  // sequencing
  output logic [15:0]   k,          // stream step (bank read row offset)
  output logic          rd_en,      // read IF/WT rows this cycle
  output logic          feed_valid, // control word for the wt_mem register,
  output logic          feed_first, //   aligned with the bank read data
  output logic          feed_last,
  output logic [15:0]   wr_row,     // result row being written
  output logic          wr_en,
  input  logic          all_done,
  input  logic [3:0]    any_nar,
  output logic          busy,
  output logic          irq
);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_WAIT, S_WRITE} state_e;
  state_e state;

  logic [15:0] klen, wait_cnt;
  logic [31:0] cycles;
  logic        done_q;
  logic [3:0]  nar_q;

  assign busy  = (state != S_IDLE);
  assign rd_en = (state == S_STREAM);
  assign wr_en = (state == S_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode       <= MODE_P8;
      af_en      <= 1'b0;
      klen       <= 16'd1;
      if_base    <= '0;
      wt_base    <= '0;
      of_base    <= '0;
      k          <= '0;
      wr_row     <= '0;
      wait_cnt   <= '0;
      cycles     <= '0;
      done_q     <= 1'b0;
      nar_q      <= '0;
      feed_valid <= 1'b0;
      feed_first <= 1'b0;
      feed_last  <= 1'b0;
      irq        <= 1'b0;
    end else begin
      irq        <= 1'b0;
      feed_valid <= 1'b0;
      feed_first <= 1'b0;
      feed_last  <= 1'b0;
      if (busy) cycles <= cycles + 32'd1;
      case (state)
        S_IDLE: begin
          if (reg_we) begin
            case (reg_idx)
              4'd0: begin
                mode  <= reg_wdata[2:1];
                af_en <= reg_wdata[3];
                if (reg_wdata[0]) begin
                  state  <= S_STREAM;
                  k      <= '0;
                  cycles <= '0;
                  done_q <= 1'b0;
                end
              end
              4'd2: klen    <= (reg_wdata[15:0] == 0) ? 16'd1 : reg_wdata[15:0];
              4'd3: if_base <= AW'(reg_wdata);
              4'd4: wt_base <= AW'(reg_wdata);
              4'd5: of_base <= AW'(reg_wdata);
              default: ;
            endcase
          end
        end
        S_STREAM: begin
          feed_valid <= 1'b1;
          feed_first <= (k == 0);
          feed_last  <= (k == klen - 16'd1);
          k <= k + 16'd1;
          if (k == klen - 16'd1) begin
            state    <= S_WAIT;
            wait_cnt <= '0;
          end
        end
        S_WAIT: begin
          wait_cnt <= wait_cnt + 16'd1;
          if (wait_cnt >= 16'(2*N + 2) && all_done) begin
            state  <= S_WRITE;
            wr_row <= '0;
            nar_q  <= any_nar;
          end
        end
        default: begin   // S_WRITE
          wr_row <= wr_row + 16'd1;
          if (wr_row == 16'(N - 1)) begin
            state  <= S_IDLE;
            done_q <= 1'b1;
            irq    <= 1'b1;
          end
        end
      endcase
    end
  end

  always_comb begin
    case (reg_idx)
      4'd0:    reg_rdata = {28'd0, af_en, mode, 1'b0};
      4'd1:    reg_rdata = {24'd0, nar_q, 2'b00, done_q, busy};
      4'd2:    reg_rdata = {16'd0, klen};
      4'd3:    reg_rdata = 32'(if_base);
      4'd4:    reg_rdata = 32'(wt_base);
      4'd5:    reg_rdata = 32'(of_base);
      4'd6:    reg_rdata = cycles;
      default: reg_rdata = '0;
    endcase
  end

endmodule
