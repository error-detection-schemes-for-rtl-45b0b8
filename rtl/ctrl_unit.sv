// ctrl_unit: control unit of the NTT engine.
//
// Runs one complete NTT on the coefficient memory after a start pulse.
// For every butterfly given by ijk_gen it
//   RD0   reads alpha[j]                 (memory address j)
//   RD1   reads alpha[j+t], captures U   (address j+t)
//   RD2   captures X = alpha[j+t]
//   BU    hands U, X and the twiddle to the CT-BU
//   WAIT  waits for the CT-BU result
//   WR0   writes y0 to alpha[j]
//   WR1   writes y1 to alpha[j+t], steps ijk_gen
// and returns to IDLE with a done pulse after the last butterfly. While it
// is not IDLE it owns the memory port (sel_ntt = 1 to the mux and demux).
// Every butterfly whose fault flag is set increments fault_count, and
// fault_flag stays high until the next start; both clear on start.
// The sequencing is this design's choice: the paper names the control unit
// and its role of steering the muxes, but not its schedule.
//
// Timing: with a CT-BU latency of NW*NW + 4 edges one butterfly takes
// NW*NW + 10 cycles; done rises one cycle after the last write.
module ctrl_unit
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N      = KYBER_N,
  parameter int unsigned L      = KYBER_L,
  parameter int unsigned LAYERS = KYBER_LAYERS,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned CW = $clog2(LAYERS * N / 2 + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          fault_flag,
  output logic [CW-1:0] fault_count,
  // index generator
  output logic          ijk_init,
  output logic          ijk_step,
  input  logic [AW-1:0] aj,
  input  logic [AW-1:0] ajt,
  input  logic          ijk_last,
  // memory, through the mux
  output logic          sel_ntt,
  output logic [AW-1:0] mem_addr,
  output logic          mem_we,
  output logic [L-1:0]  mem_din,
  input  logic [L-1:0]  mem_dout,
  // butterfly
  output logic          bu_in_valid,
  input  logic          bu_in_ready,
  output logic [L-1:0]  bu_u,
  output logic [L-1:0]  bu_x,
  input  logic          bu_out_valid,
  input  logic [L-1:0]  bu_y0,
  input  logic [L-1:0]  bu_y1,
  input  logic          bu_fault
);

  typedef enum logic [2:0] {
    S_IDLE, S_RD0, S_RD1, S_RD2, S_BU, S_WAIT, S_WR0, S_WR1
  } state_e;

  state_e       state_q;
  logic [L-1:0] y1_q;
  logic         last_q;

  always_comb begin
    busy        = (state_q != S_IDLE);
    sel_ntt     = busy;
    ijk_init    = (state_q == S_IDLE) && start;
    ijk_step    = (state_q == S_WR1);
    bu_in_valid = (state_q == S_BU);
    mem_we      = (state_q == S_WR0) || (state_q == S_WR1);
    mem_addr    = ((state_q == S_RD1) || (state_q == S_WR1)) ? ajt : aj;
    mem_din     = (state_q == S_WR1) ? y1_q : bu_y0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      done        <= 1'b0;
      fault_flag  <= 1'b0;
      fault_count <= '0;
      bu_u        <= '0;
      bu_x        <= '0;
      y1_q        <= '0;
      last_q      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q     <= S_RD0;
          fault_flag  <= 1'b0;
          fault_count <= '0;
        end
        S_RD0: state_q <= S_RD1;
        S_RD1: begin
          bu_u    <= mem_dout;
          state_q <= S_RD2;
        end
        S_RD2: begin
          bu_x    <= mem_dout;
          state_q <= S_BU;
        end
        S_BU: if (bu_in_ready) state_q <= S_WAIT;
        S_WAIT: if (bu_out_valid) begin
          y1_q    <= bu_y1;
          last_q  <= ijk_last;
          state_q <= S_WR0;
          if (bu_fault) begin
            fault_flag  <= 1'b1;
            fault_count <= fault_count + 1'b1;
          end
        end
        // y0 is written straight from the CT-BU output register, which
        // holds it until the next butterfly
        S_WR0: state_q <= S_WR1;
        S_WR1: begin
          if (last_q) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_RD0;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
