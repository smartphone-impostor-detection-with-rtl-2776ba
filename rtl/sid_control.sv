// sid_control: Fetch, Decode and the macro-instruction FSM of SID.
//
// Fetch reads the instruction at the program counter from the instruction RAM;
// Decode loads its fields into the FSM state registers and then issues one
// iteration per cycle: the data RAM read addresses for x and y, and a uop that
// meets the read data in EXE0 the next cycle. The FSM follows the paper:
//   * vector modes: reg_length starts at Length and drops by N (the number of
//     tracks) every cycle; the iteration with reg_length <= N is the last.
//   * MVmul (a Width x Length matrix times a Length vector): loop tiling, one
//     matrix row of an N-column tile per cycle. reg_width counts the rows of
//     the tile and is reloaded from reg_width_copy when the next tile starts,
//     at which point reg_length drops by N. The last tile ends the instruction.
// So the same program runs on any N. MVmul keeps one partial sum per row in the
// scratchpad, so Width may not exceed the scratchpad size (asserted); larger
// matrices are split into several MVmul instructions by the program.
//
// Design choices, not from the paper: before fetching the next instruction the
// controller waits until the datapath has drained, so an instruction always
// sees the memory results of the one before it (costs about 7 cycles per
// instruction); mode HALT ends the program and pulses done; unused mode codes
// are skipped; start (or a sensor reading, in the top level) sets the program
// counter to 0 and (re)starts the program after the datapath drains.
module sid_control
  import sid_pkg::*;
#(
  parameter int unsigned N          = 4,
  parameter int unsigned IMEM_DEPTH = 8192,
  parameter int unsigned SPAD_WORDS = 64,
  localparam int unsigned PW        = $clog2(IMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,      // restart the program at PC 0
  // instruction RAM
  output logic              i_re,
  output logic [PW-1:0]     pc,
  input  inst_t             inst,
  // data RAM operand reads
  output logic              rx_en,
  output logic [ADDR_W-1:0] rx_addr,
  output logic              ry_en,
  output logic [ADDR_W-1:0] ry_addr,
  // to EXE0
  output uop_t              uop,
  input  logic              dp_busy,
  // status
  output logic              running,
  output logic              done,       // one-cycle pulse when HALT retires
  output logic              stalled     // waiting for the datapath to drain
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LOAD, S_EXEC, S_DRAIN, S_HALT} state_e;

  state_e            state;
  mode_e             mode;
  logic [LEN_W-1:0]  reg_length, reg_width, reg_width_copy, length_q, row;
  logic [ADDR_W-1:0] ax, ay, az, col, row_ptr;

  localparam logic [LEN_W-1:0] NL = LEN_W'(N);

  logic       last_col, mv;
  logic [7:0] lanes;
  assign last_col = reg_length <= NL;
  assign lanes    = last_col ? 8'(reg_length) : 8'(N);
  assign mv       = (mode == M_MVMUL);

  function automatic logic known_mode(mode_e m);
    return m inside {M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VEXP,
                     M_MVMUL, M_VSSGT, M_VMAXABS, M_VSQNORM};
  endfunction

  // Read addresses and the uop of the current iteration.
  always_comb begin
    rx_en   = (state == S_EXEC) && !start;
    ry_en   = (state == S_EXEC) && !start;
    rx_addr = mv ? row_ptr : ax + col;
    ry_addr = (mode == M_VSSGT) ? ay : ay + col;
    i_re    = (state == S_FETCH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      pc             <= '0;
      mode           <= M_HALT;
      reg_length     <= '0;
      reg_width      <= '0;
      reg_width_copy <= '0;
      length_q       <= '0;
      row            <= '0;
      ax             <= '0;
      ay             <= '0;
      az             <= '0;
      col            <= '0;
      row_ptr        <= '0;
      uop            <= '0;
      done           <= 1'b0;
    end else begin
      uop.valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        pc    <= '0;
        state <= S_DRAIN;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_FETCH: state <= S_LOAD;
          S_LOAD: begin
            pc             <= pc + 1'b1;
            mode           <= inst.mode;
            reg_length     <= inst.length;
            length_q       <= inst.length;
            reg_width      <= inst.width;
            reg_width_copy <= inst.width;
            ax             <= inst.addr_x;
            ay             <= inst.addr_y;
            az             <= inst.addr_z;
            col            <= '0;
            row            <= '0;
            row_ptr        <= inst.addr_x;
            if (inst.mode == M_HALT)         state <= S_HALT;
            else if (known_mode(inst.mode))  state <= S_EXEC;
            else                             state <= S_FETCH;
          end
          S_EXEC: begin
            uop.valid <= 1'b1;
            uop.mode  <= mode;
            uop.lanes <= lanes;
            uop.first <= (col == '0);
            uop.last  <= last_col;
            uop.row   <= mv ? row : '0;
            uop.waddr <= mv ? az + ADDR_W'(row) : (is_reduction(mode) ? az : az + col);
            if (mv && reg_width > 1) begin
              reg_width <= reg_width - 1'b1;
              row       <= row + 1'b1;
              row_ptr   <= row_ptr + ADDR_W'(length_q);
            end else if (last_col) begin
              state <= S_DRAIN;
            end else begin
              reg_length <= reg_length - NL;
              col        <= col + ADDR_W'(N);
              reg_width  <= reg_width_copy;
              row        <= '0;
              row_ptr    <= ax + col + ADDR_W'(N);
            end
          end
          S_DRAIN: if (!dp_busy) state <= S_FETCH;
          S_HALT: if (!dp_busy) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign running = (state != S_IDLE);
  assign stalled = (state == S_DRAIN || state == S_HALT) && dp_busy;

  // MVmul keeps one partial sum per matrix row in the scratchpad.
  a_mv_width: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_LOAD && inst.mode == M_MVMUL) |-> inst.width <= LEN_W'(SPAD_WORDS))
    else $error("MVmul width %0d exceeds scratchpad (%0d words)", inst.width, SPAD_WORDS);

endmodule
