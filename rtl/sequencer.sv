// sequencer: instruction memory and issue control of the SM.
//
// The host writes the program into the instruction memory (imem_we) and
// pulses start with the wavefront depth wave_rows (threads / 16, 1..ROWS).
// Starting at address 0, every instruction is issued once for each row of
// the wavefront, rows in order; one row occupies the issue slot for
//   1 cycle   for arithmetic, integer, immediate, lod_coeff and NOP,
//   4 cycles  for a load and for save_bank (four SPs per cycle, one per bank),
//   16 cycles for save (one SP per cycle, written to all four banks),
// with issue.sub giving the group or SP served in that cycle.  coeff_en and
// coeff_dis are issued once.  STOP ends the program: the sequencer waits
// PIPE_DEPTH cycles for the pipeline to drain, pulses done and returns to
// idle.  There are no branches.  issue is registered: an instruction chosen
// in one cycle is seen by the SPs in the next.
// The per-row cycle counts follow the memory port counts of the
// architecture (4 read ports, 1 write port, 4 virtual write ports with
// save_bank); the encoding and the start/done handshake are this design's.
module sequencer
  import egpu_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ROW_BITS:0]   wave_rows,
  input  logic                imem_we,
  input  logic [PC_BITS-1:0]  imem_addr,
  input  instr_t              imem_wdata,
  output issue_t              issue,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  instr_t              imem [IMEM_DEPTH];
  state_e              state;
  logic [PC_BITS-1:0]  pc;
  logic [ROW_BITS-1:0] row;
  logic [3:0]          sub;
  logic [ROW_BITS:0]   rows_q;
  logic [3:0]          drain;
  instr_t              cur;
  logic                last_sub, last_row;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  always_comb begin
    cur      = imem[pc];
    last_sub = (32'(sub) + 1 >= subs_per_row(cur.op));
    last_row = (cur.op inside {OP_COEFF_EN, OP_COEFF_DIS}) ||
               ((ROW_BITS + 1)'(row) + 1'b1 >= rows_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      row    <= '0;
      sub    <= '0;
      rows_q <= '0;
      drain  <= '0;
      issue  <= '0;
      done   <= 1'b0;
    end else begin
      done        <= 1'b0;
      issue.valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            state  <= S_RUN;
            pc     <= '0;
            row    <= '0;
            sub    <= '0;
            rows_q <= (wave_rows == 0) ? (ROW_BITS + 1)'(1) : wave_rows;
          end
        end
        S_RUN: begin
          if (cur.op == OP_STOP) begin
            state <= S_DRAIN;
            drain <= 4'(PIPE_DEPTH);
          end else begin
            issue <= '{valid: 1'b1, ins: cur, row: row, sub: sub};
            if (!last_sub) begin
              sub <= sub + 1'b1;
            end else begin
              sub <= '0;
              if (!last_row) begin
                row <= row + 1'b1;
              end else begin
                row <= '0;
                pc  <= pc + 1'b1;
              end
            end
          end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 4'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
