// Controller of the tensor engine: configuration registers and job FSM.
//
// A core of the Tile writes the job parameters into the registers below,
// then writes TRIGGER; the controller starts the streamer and returns to
// idle when the streamer reports that every Z line is stored, raising a
// one-cycle interrupt request. The core is free to run other code meanwhile,
// as in the paper, which also states that the W start column used for the
// interleaved access of parallel TEs is one of these registers. The register
// map, the read-back behaviour (read data one cycle after the request) and
// ignoring a TRIGGER while busy are this design's choices.
//
//   0 X_ADDR   1 W_ADDR   2 Y_ADDR   3 Z_ADDR   (byte addresses in L1)
//   4 M        5 N        6 K        (Z is M x K, X is M x N, W is N x K)
//   7 W_START  first 32-column block of W and Z
//   8 TRIGGER  write: start a job; read: 1 while busy
//   9 STATUS   read: number of completed jobs
module tp_te_ctrl
  import tp_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // register port
  input  cfg_req_t          cfg_i,
  output logic [31:0]       cfg_rdata_o,
  output logic              irq_o,
  // job towards the streamer
  output logic              start_o,
  output logic [ADDR_W-1:0] x_addr_o, w_addr_o, y_addr_o, z_addr_o,
  output logic [15:0]       m_o, n_o, k_o, w_start_o,
  input  logic              done_i,
  output logic              busy_o
);
  typedef enum logic {IDLE, RUN} state_e;
  state_e      state_q;
  logic [31:0] jobs_q;

  assign busy_o = (state_q == RUN);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      jobs_q    <= '0;
      start_o   <= 1'b0;
      irq_o     <= 1'b0;
      x_addr_o  <= '0; w_addr_o <= '0; y_addr_o <= '0; z_addr_o <= '0;
      m_o       <= '0; n_o <= '0; k_o <= '0; w_start_o <= '0;
      cfg_rdata_o <= '0;
    end else begin
      start_o <= 1'b0;
      irq_o   <= 1'b0;
      if (cfg_i.valid && cfg_i.we) begin
        unique case (cfg_reg_e'(cfg_i.addr))
          CFG_X_ADDR:  x_addr_o  <= cfg_i.wdata[ADDR_W-1:0];
          CFG_W_ADDR:  w_addr_o  <= cfg_i.wdata[ADDR_W-1:0];
          CFG_Y_ADDR:  y_addr_o  <= cfg_i.wdata[ADDR_W-1:0];
          CFG_Z_ADDR:  z_addr_o  <= cfg_i.wdata[ADDR_W-1:0];
          CFG_M:       m_o       <= cfg_i.wdata[15:0];
          CFG_N:       n_o       <= cfg_i.wdata[15:0];
          CFG_K:       k_o       <= cfg_i.wdata[15:0];
          CFG_W_START: w_start_o <= cfg_i.wdata[15:0];
          CFG_TRIGGER: if (state_q == IDLE) begin
            start_o <= 1'b1;
            state_q <= RUN;
          end
          default: ;
        endcase
      end
      if (cfg_i.valid && !cfg_i.we) begin
        unique case (cfg_reg_e'(cfg_i.addr))
          CFG_X_ADDR:  cfg_rdata_o <= 32'(x_addr_o);
          CFG_W_ADDR:  cfg_rdata_o <= 32'(w_addr_o);
          CFG_Y_ADDR:  cfg_rdata_o <= 32'(y_addr_o);
          CFG_Z_ADDR:  cfg_rdata_o <= 32'(z_addr_o);
          CFG_M:       cfg_rdata_o <= 32'(m_o);
          CFG_N:       cfg_rdata_o <= 32'(n_o);
          CFG_K:       cfg_rdata_o <= 32'(k_o);
          CFG_W_START: cfg_rdata_o <= 32'(w_start_o);
          CFG_TRIGGER: cfg_rdata_o <= 32'(state_q == RUN);
          CFG_STATUS:  cfg_rdata_o <= jobs_q;
          default:     cfg_rdata_o <= '0;
        endcase
      end
      if (state_q == RUN && done_i) begin
        state_q <= IDLE;
        irq_o   <= 1'b1;
        jobs_q  <= jobs_q + 1'b1;
      end
    end
  end
endmodule
