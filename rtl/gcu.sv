// gcu -- Global Control Unit of the RESPARC core.
//
// Holds the control registers of the core and runs the evaluation, one SNN
// time step after another, from a small command table:
//   CMD_BCAST  read one input-memory word (address + t * TS_STRIDE) and, if it
//              is not all zero, broadcast it on the IO bus to the mPE / MCA
//              named in the command of every NeuroCell in the tag rectangle.
//              An all-zero word is skipped (zero-check): no broadcast at all.
//   CMD_RUN    start the NeuroCells in the tag rectangle and wait until the
//              event flag of each of them is set, then clear those flags.
//   CMD_END    end of the time step: t increments; after N_TS steps the run
//              ends, otherwise the table restarts at entry 0.
// Every NeuroCell has an event flag, set by its done pulse. Spike packets
// that NeuroCells send back over the IO bus are written to the input memory
// at their address + t * TS_STRIDE as they arrive.
// Registers (cfg_addr): 0..N_CMD-1 command table (gcmd_t), 0x40 N_TS,
// 0x41 TS_STRIDE. start begins a run (it first clears all membrane
// potentials through nclear); busy is high until done pulses.
// Timing: a broadcast takes 3 cycles (fetch, memory read, bus beat), a
// skipped word 2. The event flags, the tag broadcast and the zero-check
// follow the architecture; the command table is this design's.
module gcu
  import resparc_pkg::*;
#(
  parameter int NCX = 2,
  parameter int NCY = 2,
  localparam int NNC = NCX * NCY
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [7:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 nclear,
  // input memory
  output logic                 rd_en,
  output logic [SRAM_AW-1:0]   rd_addr,
  input  logic [PKT_W-1:0]     rd_data,
  output logic                 wr_en,
  output logic [SRAM_AW-1:0]   wr_addr,
  output logic [PKT_W-1:0]     wr_data,
  // IO bus
  output logic                 bc_valid,
  output io_bcast_t            bc,
  input  logic                 bus_wr_valid,
  input  logic [SRAM_AW-1:0]   bus_wr_addr,
  input  logic [PKT_W-1:0]     bus_wr_data,
  output logic                 bus_wr_ready,
  // NeuroCells
  output logic [NNC-1:0]       nc_start,
  input  logic [NNC-1:0]       nc_done,
  output logic [NNC-1:0]       event_flag,
  output logic                 zero_skip,
  output logic [15:0]          tstep
);

  typedef enum logic [2:0] {G_IDLE, G_CLR, G_FETCH, G_BREAD, G_BSEND, G_RWAIT, G_FIN} gstate_e;

  gcmd_t              cmd_tab [N_CMD];
  logic [15:0]        n_ts;
  logic [SRAM_AW-1:0] ts_stride;
  gstate_e            st;
  logic [$clog2(N_CMD)-1:0] pc;
  logic [NNC-1:0]     pending;
  gcmd_t              cmd;
  logic [SRAM_AW-1:0] ts_off;

  assign cmd    = cmd_tab[pc];
  assign ts_off = SRAM_AW'(tstep * 16'(ts_stride));

  function automatic logic [NNC-1:0] tag_mask(gcmd_t c);
    logic [NNC-1:0] m;
    for (int n = 0; n < NNC; n++)
      m[n] = (n % NCX) >= int'(c.x_lo) && (n % NCX) <= int'(c.x_hi) &&
             (n / NCX) >= int'(c.y_lo) && (n / NCX) <= int'(c.y_hi);
    return m;
  endfunction

  // ---------------- registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CMD; i++) cmd_tab[i] <= '0;
      n_ts      <= 16'd1;
      ts_stride <= '0;
    end else if (cfg_we && !busy) begin
      if (cfg_addr < 8'(N_CMD)) cmd_tab[cfg_addr[$clog2(N_CMD)-1:0]] <= gcmd_t'(cfg_wdata[$bits(gcmd_t)-1:0]);
      if (cfg_addr == 8'h40)   n_ts <= cfg_wdata[15:0];
      if (cfg_addr == 8'h41)   ts_stride <= cfg_wdata[SRAM_AW-1:0];
    end
  end

  // ---------------- sequencer ----------------
  assign busy     = (st != G_IDLE);
  assign nclear   = (st == G_CLR);
  assign rd_en    = (st == G_FETCH) && cmd.op == CMD_BCAST;
  assign rd_addr  = cmd.sram_addr + ts_off;
  assign bc_valid = (st == G_BSEND) && (rd_data != '0);
  assign zero_skip = (st == G_BSEND) && (rd_data == '0);
  always_comb begin
    bc.x_lo = cmd.x_lo; bc.x_hi = cmd.x_hi;
    bc.y_lo = cmd.y_lo; bc.y_hi = cmd.y_hi;
    bc.mpe  = cmd.mpe;  bc.mca  = cmd.mca;
    bc.data = rd_data;
  end

  assign bus_wr_ready = 1'b1;
  assign wr_en   = bus_wr_valid;
  assign wr_addr = bus_wr_addr + ts_off;
  assign wr_data = bus_wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; pc <= '0; tstep <= '0; pending <= '0;
      event_flag <= '0; nc_start <= '0; done <= 1'b0;
    end else begin
      nc_start <= '0;
      done     <= 1'b0;
      event_flag <= event_flag | nc_done;
      unique case (st)
        G_IDLE:  if (start) st <= G_CLR;
        G_CLR:   begin pc <= '0; tstep <= '0; event_flag <= '0; st <= G_FETCH; end
        G_FETCH: begin
          unique case (cmd.op)
            CMD_BCAST: st <= G_BREAD;
            CMD_RUN: begin
              nc_start <= tag_mask(cmd);
              pending  <= tag_mask(cmd);
              st       <= G_RWAIT;
            end
            default: begin   // CMD_END
              pc <= '0;
              if (tstep + 16'd1 >= n_ts) st <= G_FIN;
              else tstep <= tstep + 16'd1;
            end
          endcase
        end
        G_BREAD: st <= G_BSEND;
        G_BSEND: begin pc <= pc + 1'b1; st <= G_FETCH; end
        G_RWAIT: if ((event_flag & pending) == pending) begin
                   event_flag <= (event_flag | nc_done) & ~pending;
                   pc <= pc + 1'b1;
                   st <= G_FETCH;
                 end
        G_FIN:   begin done <= 1'b1; st <= G_IDLE; end
        default: st <= G_IDLE;
      endcase
    end
  end

endmodule
