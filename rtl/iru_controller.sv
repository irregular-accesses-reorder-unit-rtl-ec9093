// iru_controller: configuration registers and phase of one IRU partition.
//
// The host's configure_iru() call becomes register writes on a small port
// (cfg_we/cfg_addr/cfg_wdata, register map in iru_pkg). Writing REG_START at
// kernel launch emits a one-cycle start_o pulse, which clears the hash and
// starts the prefetcher, and moves the phase from IDLE (or a finished run) to
// RUN. When every partition reports that all of its data has been fetched,
// classified, moved over the ring and inserted (all_inserted_i), the phase
// becomes FLUSH: the Data Replier then answers requests with whatever the hash
// still holds, and with empty replies once it is empty. The next REG_START
// begins a new run.
//
// The paper gives the configuration contents (target base and element width,
// indices array, element count, optional secondary array and filter) and the
// autonomous operation after launch; the register map, the START register
// and the three phases are this design's choices.
module iru_controller
  import iru_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [2:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        all_inserted_i,
  output iru_cfg_t    cfg_o,
  output iru_phase_e  phase_o,
  output logic        start_o
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_o   <= '0;
      phase_o <= PH_IDLE;
      start_o <= 1'b0;
    end else begin
      start_o <= 1'b0;
      if (cfg_we) begin
        unique case (cfg_addr)
          REG_TGT_BASE: cfg_o.tgt_base  <= cfg_wdata;
          REG_TGT_WLOG: cfg_o.tgt_wlog2 <= cfg_wdata[2:0];
          REG_IDX_BASE: cfg_o.idx_base  <= cfg_wdata;
          REG_SEC_BASE: cfg_o.sec_base  <= cfg_wdata;
          REG_NUM:      cfg_o.num_elems <= cfg_wdata[POS_W-1:0];
          REG_FLAGS: begin
            cfg_o.sec_en <= cfg_wdata[0];
            cfg_o.filter <= iru_filter_e'(cfg_wdata[2:1]);
          end
          REG_START: begin
            start_o <= 1'b1;
            phase_o <= PH_RUN;
          end
          default: ;
        endcase
      end
      if (phase_o == PH_RUN && !start_o && all_inserted_i && !(cfg_we && cfg_addr == REG_START))
        phase_o <= PH_FLUSH;
    end
  end
endmodule
