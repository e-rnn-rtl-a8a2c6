// ernn_ctrl: the E-RNN controller.
//
// Runs the recurrent layer over a whole input sequence on all compute units
// at once. After run it clears the recurrent state of every CU, then for
// each time step t = 0 .. num_steps-1: copies frame t from the input buffer
// into BRAM 1 of every CU (QX blocks, one per cycle), starts the CUs and
// waits until each of them has reported done; the CUs write their c_t into
// the output buffer at step t meanwhile. After the last step it pulses done.
// The paper says the controller fetches data and sets the computation flow
// of the network; this sequence, and running all CUs in lock step, are this
// design's choices.
//
// Interface:
//   run, num_steps      start a sequence of num_steps frames (1..TMAX)
//   busy, done          busy until done pulses after the last step
//   step                current time step (for the output buffer)
//   ib_rd_t, ib_rd_blk  input buffer read address, data one cycle later
//   ld_en, ld_blk       write the input buffer data into BRAM 1 block ld_blk
//   cu_clear, cu_start  pulses to all CUs
//   cu_busy, cu_done    status of every CU
//
// Lint notes: num_steps is compared against a 32-bit constant
// (WIDTHEXPAND), harmless zero extension.
module ernn_ctrl #(
  parameter int unsigned NCU  = 2,
  parameter int unsigned TMAX = 8,
  parameter int unsigned QX   = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      run,
  input  logic [$clog2(TMAX+1)-1:0] num_steps,
  output logic                      busy,
  output logic                      done,
  output logic [$clog2(TMAX)-1:0]   step,
  output logic [$clog2(TMAX)-1:0]   ib_rd_t,
  output logic [$clog2(QX+1)-1:0]   ib_rd_blk,
  output logic                      ld_en,
  output logic [$clog2(QX+1)-1:0]   ld_blk,
  output logic                      cu_clear,
  output logic                      cu_start,
  input  logic                      cu_busy [NCU],
  input  logic                      cu_done [NCU]
);
  typedef enum logic [2:0] {C_IDLE, C_CLEAR, C_WCLR, C_LOAD, C_START, C_WAIT, C_DONE} cstate_e;
  cstate_e st;
  logic [$clog2(TMAX+1)-1:0] nsteps, t;
  logic [$clog2(QX+1)-1:0]   blk;
  logic [NCU-1:0]            got_done;
  logic                      any_busy, all_done;

  always_comb begin
    any_busy = 1'b0;
    all_done = 1'b1;
    for (int c = 0; c < NCU; c++) begin
      any_busy |= cu_busy[c];
      all_done &= got_done[c] | cu_done[c];
    end
  end

  assign busy      = (st != C_IDLE);
  assign step      = t[$clog2(TMAX)-1:0];
  assign ib_rd_t   = t[$clog2(TMAX)-1:0];
  assign ib_rd_blk = blk;
  assign cu_clear  = (st == C_CLEAR);
  assign cu_start  = (st == C_START) && !ld_en;   // after the last load write

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; nsteps <= '0; t <= '0; blk <= '0; got_done <= '0;
      ld_en <= 1'b0; ld_blk <= '0; done <= 1'b0;
    end else begin
      done   <= 1'b0;
      ld_en  <= (st == C_LOAD);
      ld_blk <= blk;
      unique case (st)
        C_IDLE:  if (run && num_steps != 0) begin nsteps <= num_steps; t <= '0; st <= C_CLEAR; end
        C_CLEAR: st <= C_WCLR;
        C_WCLR:  if (!any_busy) begin blk <= '0; st <= C_LOAD; end
        C_LOAD: begin
          if (blk == ($clog2(QX+1))'(QX - 1)) st <= C_START;
          else blk <= blk + 1;
        end
        C_START: if (!ld_en) begin got_done <= '0; st <= C_WAIT; end
        C_WAIT: begin
          for (int c = 0; c < NCU; c++) if (cu_done[c]) got_done[c] <= 1'b1;
          if (all_done) begin
            if (t + 1 == nsteps) st <= C_DONE;
            else begin t <= t + 1; blk <= '0; st <= C_LOAD; end
          end
        end
        C_DONE: begin done <= 1'b1; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_steps_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                     (st == C_IDLE && run) |-> num_steps <= TMAX);
endmodule
