// ctm_controller: sequencing of one CTM inference.
//
// For each clause group g = 0 .. GROUPS-1 the controller
//   LOAD   reads group g from the TA store and clears the clause outputs,
//   SCAN   issues every patch position once, one per cycle, row by row
//          (pos_y outer, pos_x inner, stride 1: NPOS_Y*NPOS_X cycles),
//   DRAIN  waits one cycle for the last patch to pass the patch register,
//   ACC    adds the group's clause outputs to the class sums,
// and after the last group raises done for one cycle.
//
// Handshake: start is taken when busy is low; sum_clear pulses with it.
// From the cycle start is taken to the cycle done is high there are
// GROUPS*(NPOS_Y*NPOS_X + 3) + 1 cycles. At the default sizes (4 groups,
// 91x91 positions) that is 33,137 cycles, 331 us at 100 MHz.
//
// The paper gives the stride (1) and the clock (100 MHz) of its FPGA
// estimate; the group-serial schedule and this FSM are this design's own.
module ctm_controller #(
  parameter int unsigned GROUPS = ctm_pkg::CLASSES * ctm_pkg::CLAUSES / ctm_pkg::CLAUSE_PAR,
  parameter int unsigned NPOS_Y = ctm_pkg::IMG_H - ctm_pkg::PATCH + 1,
  parameter int unsigned NPOS_X = ctm_pkg::IMG_W - ctm_pkg::PATCH + 1,
  parameter int unsigned YW     = $clog2(ctm_pkg::IMG_H),
  parameter int unsigned XW     = $clog2(ctm_pkg::IMG_W)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  output logic                                busy,
  output logic                                done,
  // TA store and clause bank
  output logic [ctm_pkg::cnt_w(GROUPS-1)-1:0] group,
  output logic                                clause_clear,
  // patch positions
  output logic                                pos_valid,
  output logic [YW-1:0]                       pos_y,
  output logic [XW-1:0]                       pos_x,
  // class sums
  output logic                                sum_clear,
  output logic                                sum_add
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SCAN, S_DRAIN, S_ACC, S_DONE} state_t;
  state_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      group <= '0;
      pos_y <= '0;
      pos_x <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          group <= '0;
        end
        S_LOAD: begin
          state <= S_SCAN;
          pos_y <= '0;
          pos_x <= '0;
        end
        S_SCAN: begin
          if (32'(pos_x) == NPOS_X - 1) begin
            pos_x <= '0;
            if (32'(pos_y) == NPOS_Y - 1) state <= S_DRAIN;
            else                          pos_y <= pos_y + 1'b1;
          end else begin
            pos_x <= pos_x + 1'b1;
          end
        end
        S_DRAIN: state <= S_ACC;
        S_ACC: begin
          if (32'(group) == GROUPS - 1) state <= S_DONE;
          else begin
            group <= group + 1'b1;
            state <= S_LOAD;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy         = (state != S_IDLE);
  assign done         = (state == S_DONE);
  assign clause_clear = (state == S_LOAD);
  assign pos_valid    = (state == S_SCAN);
  assign sum_clear    = (state == S_IDLE) && start;
  assign sum_add      = (state == S_ACC);

endmodule
