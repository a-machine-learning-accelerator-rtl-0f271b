// nv_reg -- non-volatile (MTJ) register with a multi-cycle, tearable write.
//
// MASTER keeps its whole architectural state in a handful of non-volatile
// registers: the two copies of the program counter, the parity bit that
// says which copy is valid, and the register holding the last Activate
// Columns instruction. Their contents survive a power loss. A write to an
// MTJ takes time, so a write here is spread over WR_CYCLES clock cycles,
// one slice of ceil(W/WR_CYCLES) bits per cycle, least significant slice
// first. If power fails (rst_n low) part way, the register is left holding
// a mix of old and new bits -- the corrupted value the paper's duplicated PC
// exists to survive. The slice order and WR_CYCLES are this design's
// modelling choice; the paper says only that such writes can be corrupted.
//
// Interface: pulse `we` with `wdata` while not `busy`; `busy` is high for
// WR_CYCLES cycles and `done` pulses in the cycle after the last slice is
// written, when `q` holds wdata. `init` (factory initialisation, before
// deployment) loads INIT at once. rst_n is the volatile power-on reset: it
// cancels a write in progress but never touches the stored value.
module nv_reg #(
  parameter int unsigned W         = 16,
  parameter int unsigned WR_CYCLES = 2,
  parameter logic [W-1:0] INIT     = '0
) (
  input  logic         clk,
  input  logic         rst_n,   // volatile reset (power on)
  input  logic         init,    // factory initialisation
  input  logic         we,
  input  logic [W-1:0] wdata,
  output logic [W-1:0] q,
  output logic         busy,
  output logic         done
);

  localparam int unsigned SLICE = (W + WR_CYCLES - 1) / WR_CYCLES;
  localparam int unsigned CNT_W = (WR_CYCLES > 1) ? $clog2(WR_CYCLES + 1) : 1;

  logic [W-1:0]     store;     // the MTJs: no reset
  logic [W-1:0]     pend;      // value being written (volatile)
  logic [CNT_W-1:0] slice_i;   // next slice to write
  logic             active;

  // Volatile write sequencing.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      slice_i <= '0;
      pend    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (active) begin
        if (slice_i == CNT_W'(WR_CYCLES - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
        slice_i <= slice_i + 1'b1;
      end else if (we && !init) begin
        active  <= 1'b1;
        slice_i <= '0;
        pend    <= wdata;
      end
    end
  end

  // Non-volatile storage: written one slice per cycle while active.
  always_ff @(posedge clk) begin
    if (init) begin
      store <= INIT;
    end else if (active) begin   // active is cleared at once by rst_n
      for (int i = 0; i < W; i++)
        if (i / SLICE == int'(slice_i)) store[i] <= pend[i];
    end
  end

  assign q    = store;
  assign busy = active;

endmodule
