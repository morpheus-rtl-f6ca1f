// operand_collector: a collector unit with native Indirect-MOV support.
//
// An instruction (warp, op, dst, src) is accepted when the unit is idle.
// The unit keeps two operand slots, each with valid, register, value and
// ready fields as in the paper's figure. The register number sent to the
// register file comes from a multiplexer: the immediate source register of
// the instruction while slot 0 is not ready, and the eight least significant
// bits of the value read into slot 0 (an indirect register number) once
// slot 0 is ready. So
//   MOV  dst, src   : read R[src]                     -> write dst
//   IMOV dst, src   : read R[src], then read R[R[src][7:0]] -> write dst
// The write uses the same writeback path for both. The multiplexer, its
// ready-bit control and the use of the low eight bits follow the paper;
// the state sequence and the error flag for an indirect number outside the
// warp's registers are this design's choices.
//
// Timing (register file read latency 1): wb_valid and `done` are registered
// and rise 2 clock edges after the edge that accepts a MOV, 4 after an IMOV.
// An out-of-range register number gives `done` with `err` and no writeback.
// Lint note: slot 1 and the upper fields of slot 0 are kept because they are
// the collector's operand-slot state as in the paper's figure; the
// writeback takes the indirect value directly, so lint reports them unused.
module operand_collector
  import morpheus_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // instruction from fetch/decode
  input  logic                in_valid,
  output logic                in_ready,
  input  warp_id_t            in_warp,
  input  logic                in_indirect,   // 1 = Indirect-MOV, 0 = MOV
  input  logic [REG_ID_W-1:0] in_dst,
  input  logic [REG_ID_W-1:0] in_src,
  // register file read port
  output logic                rf_rd_valid,
  output warp_id_t            rf_rd_warp,
  output logic [REG_ID_W-1:0] rf_rd_reg,
  input  logic                rf_rd_data_valid,
  input  block_t              rf_rd_data,
  input  logic                rf_rd_err,
  // writeback (the MOV datapath)
  output logic                wb_valid,
  output warp_id_t            wb_warp,
  output logic [REG_ID_W-1:0] wb_reg,
  output block_t              wb_data,
  output logic                done,
  output logic                err
);
  typedef enum logic [2:0] {S_IDLE, S_RD_SRC, S_WAIT_SRC, S_RD_IND, S_WAIT_IND} state_e;

  typedef struct packed {
    logic                valid;
    logic [REG_ID_W-1:0] regno;
    block_t              value;
    logic                ready;
  } slot_t;

  state_e              state;
  warp_id_t            warp;
  logic                indirect;
  logic [REG_ID_W-1:0] dst, src;
  slot_t               slot0, slot1;
  logic                err_q;

  // source register number multiplexer (the new component)
  logic [REG_ID_W-1:0] src_reg_id;
  always_comb begin
    src_reg_id  = slot0.ready ? slot0.value[REG_ID_W-1:0] : src;
    in_ready    = (state == S_IDLE);
    rf_rd_valid = (state == S_RD_SRC) || (state == S_RD_IND);
    rf_rd_warp  = warp;
    rf_rd_reg   = src_reg_id;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; warp <= '0; indirect <= 1'b0; dst <= '0; src <= '0;
      slot0 <= '0; slot1 <= '0; err_q <= 1'b0;
      wb_valid <= 1'b0; wb_warp <= '0; wb_reg <= '0; wb_data <= '0;
      done <= 1'b0; err <= 1'b0;
    end else begin
      wb_valid <= 1'b0;
      done     <= 1'b0;
      err      <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          warp <= in_warp; indirect <= in_indirect; dst <= in_dst; src <= in_src;
          slot0 <= '{valid: 1'b1, regno: in_src, value: '0, ready: 1'b0};
          slot1 <= '{valid: in_indirect, regno: '0, value: '0, ready: 1'b0};
          err_q <= 1'b0;
          state <= S_RD_SRC;
        end
        S_RD_SRC: state <= S_WAIT_SRC;
        S_WAIT_SRC: if (rf_rd_data_valid) begin
          if (indirect) begin
            slot0.value <= rf_rd_data;
            slot0.ready <= 1'b1;
            slot1.regno <= rf_rd_data[REG_ID_W-1:0];
            err_q       <= rf_rd_err;
            state       <= S_RD_IND;
          end else begin
            wb_valid <= !rf_rd_err; wb_warp <= warp; wb_reg <= dst; wb_data <= rf_rd_data;
            done <= 1'b1; err <= rf_rd_err;
            slot0 <= '0;
            state <= S_IDLE;
          end
        end
        S_RD_IND: state <= S_WAIT_IND;
        S_WAIT_IND: if (rf_rd_data_valid) begin
          slot1.value <= rf_rd_data;
          slot1.ready <= 1'b1;
          wb_valid <= !(err_q || rf_rd_err); wb_warp <= warp; wb_reg <= dst; wb_data <= rf_rd_data;
          done <= 1'b1; err <= err_q || rf_rd_err;
          slot0 <= '0; slot1 <= '0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
