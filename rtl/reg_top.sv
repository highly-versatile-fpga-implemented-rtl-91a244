// reg_top -- REG_TOP, the register set holding the run's settings and
// parameters (Table 2, Fig. 3(A)).
//
// Holds the mode bits (Ising/QUBO local field, F_chi identity/absolute),
// the system size N, the number of steps, the length and base address of
// the time-evolution program, the random seed and eight FP32 parameter
// registers P0..P7 that the time-evolution lanes read (g_s, eta, tau,
// beta, dt, K, ... as the program assigns them). Writing CTRL issues
// one-cycle commands: start a run, clear JMEM, reload the random seed.
// A finished run sets the interrupt (INT to the PCIe block), cleared by
// ACK or by writing 1 to IRQ. O_LED shows {irq, done, busy}.
//
// Bus: a request is acknowledged the next cycle, with read data. The paper
// names REG_TOP and the parameters it holds; the map (cim_pkg), the reset
// values and the LED meaning are this design's choices.
module reg_top
  import cim_pkg::*;
#(
  parameter int NMAX = 4096
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   req,
  input  logic                   we,
  input  logic [7:0]             addr,
  input  logic [31:0]            wdata,
  output logic                   ack,
  output logic [31:0]            rdata,
  // settings
  output logic                   start,
  output logic                   jclr,
  output logic                   seed_load,
  output logic                   qubo,
  output logic                   chi_abs,
  output logic [$clog2(NMAX):0]  nsize,
  output logic [15:0]            nstep,
  output logic [7:0]             ce,
  output logic [7:0]             pcbase,
  output logic [31:0]            seed,
  output logic [NPREG-1:0][31:0] preg,
  // status
  input  logic                   busy,
  input  logic                   done,
  input  logic                   clearing,
  input  logic [15:0]            step_cnt,
  input  logic [31:0]            cycles,
  // interrupt
  output logic                   irq,
  input  logic                   irq_ack,
  output logic [2:0]             led
);
  logic done_seen;

  always_ff @(posedge clk) begin
    if (rst) begin
      ack       <= 1'b0;
      rdata     <= '0;
      start     <= 1'b0;
      jclr      <= 1'b0;
      seed_load <= 1'b0;
      qubo      <= 1'b0;
      chi_abs   <= 1'b0;
      nsize     <= ($clog2(NMAX)+1)'(NMAX);
      nstep     <= 16'd1;
      ce        <= 8'd1;
      pcbase    <= 8'd0;
      seed      <= 32'd0;
      preg      <= '0;
      irq       <= 1'b0;
      done_seen <= 1'b0;
    end else begin
      ack       <= req;
      start     <= 1'b0;
      jclr      <= 1'b0;
      seed_load <= 1'b0;
      if (done) begin
        irq       <= 1'b1;
        done_seen <= 1'b1;
      end
      if (irq_ack) irq <= 1'b0;
      if (start) done_seen <= 1'b0;
      if (req && we) begin
        case (int'(addr))
          R_CTRL: begin
            start     <= wdata[0];
            jclr      <= wdata[1];
            seed_load <= wdata[2];
          end
          R_MODE:   {chi_abs, qubo} <= wdata[1:0];
          R_NSIZE:  nsize  <= ($clog2(NMAX)+1)'(wdata);
          R_NSTEP:  nstep  <= wdata[15:0];
          R_CE:     ce     <= wdata[7:0];
          R_PCBASE: pcbase <= wdata[7:0];
          R_SEED:   seed   <= wdata;
          R_IRQ:    if (wdata[0]) irq <= 1'b0;
          default:
            if (int'(addr) >= R_PREG && int'(addr) < R_PREG + NPREG)
              preg[int'(addr) - R_PREG] <= wdata;
        endcase
      end
      if (req && !we) begin
        case (int'(addr))
          R_MODE:   rdata <= {30'd0, chi_abs, qubo};
          R_NSIZE:  rdata <= 32'(nsize);
          R_NSTEP:  rdata <= {16'd0, nstep};
          R_CE:     rdata <= {24'd0, ce};
          R_PCBASE: rdata <= {24'd0, pcbase};
          R_SEED:   rdata <= seed;
          R_STATUS: rdata <= {28'd0, irq, clearing, done_seen, busy};
          R_STEP:   rdata <= {16'd0, step_cnt};
          R_CYCLES: rdata <= cycles;
          R_IRQ:    rdata <= {31'd0, irq};
          default:
            if (int'(addr) >= R_PREG && int'(addr) < R_PREG + NPREG)
              rdata <= preg[int'(addr) - R_PREG];
            else rdata <= 32'd0;
        endcase
      end
    end
  end

  assign led = {irq, done_seen, busy};
endmodule
