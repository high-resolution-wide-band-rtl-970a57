// ctrl_regs: control and status registers of the spectrometer core, reached
// from the board's host link (on the boards an ethernet connection; the link
// itself is outside this core).
//
// Bus: one access per clock. bus_we writes bus_wdata at bus_addr; every
// clock bus_rdata returns the register at the previous clock's bus_addr.
//   0x00000 CONTROL  rw  bit 0: run (accumulate spectra)
//   0x00001 NINT     rw  spectra per integration (reset value 16)
//   0x00002 STATUS   ro  [15:0] dumps since clear, [16] overflow seen,
//                        [17] read-out overrun seen
//   0x00003 CLEAR    wo  bit 0: clear STATUS
//   0x40000 + g      wo  WOLA coefficient g = m*K + n (low COEF_W bits),
//                        forwarded as a one-clock coefficient write
// The paper names only the control block; the register map is this
// design's choice.
module ctrl_regs #(
  parameter int CA_W   = 18,               // coefficient address width
  parameter int COEF_W = spec_pkg::COEF_W,
  parameter int CNT_W  = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bus_we,
  input  logic [19:0]       bus_addr,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  output logic              cfg_enable,
  output logic [CNT_W-1:0]  cfg_nint,
  output logic              coef_we,
  output logic [CA_W-1:0]   coef_addr,
  output logic signed [COEF_W-1:0] coef_data,
  input  logic              st_dump,
  input  logic              st_overflow,
  input  logic              st_overrun
);
  localparam logic [19:0] A_CONTROL = 20'h00000;
  localparam logic [19:0] A_NINT    = 20'h00001;
  localparam logic [19:0] A_STATUS  = 20'h00002;
  localparam logic [19:0] A_CLEAR   = 20'h00003;

  logic [15:0] ndump;
  logic        ovf_seen, ovr_seen;
  logic        clr;

  assign clr = bus_we && bus_addr == A_CLEAR && bus_wdata[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_enable <= 1'b0;
      cfg_nint <= CNT_W'(16);
      ndump <= '0;
      ovf_seen <= 1'b0;
      ovr_seen <= 1'b0;
      coef_we <= 1'b0;
    end else begin
      if (bus_we && bus_addr == A_CONTROL) cfg_enable <= bus_wdata[0];
      if (bus_we && bus_addr == A_NINT) cfg_nint <= bus_wdata[CNT_W-1:0];
      if (clr) begin
        ndump <= '0;
        ovf_seen <= 1'b0;
        ovr_seen <= 1'b0;
      end else begin
        if (st_dump) ndump <= ndump + 1'b1;
        if (st_overflow) ovf_seen <= 1'b1;
        if (st_overrun) ovr_seen <= 1'b1;
      end
      coef_we <= bus_we && bus_addr[18];
    end
    coef_addr <= bus_addr[CA_W-1:0];
    coef_data <= bus_wdata[COEF_W-1:0];
  end

  always_ff @(posedge clk) begin
    unique case (bus_addr)
      A_CONTROL: bus_rdata <= {31'b0, cfg_enable};
      A_NINT:    bus_rdata <= 32'(cfg_nint);
      A_STATUS:  bus_rdata <= {14'b0, ovr_seen, ovf_seen, ndump};
      default:   bus_rdata <= '0;
    endcase
  end

  initial assert (CA_W <= 18) else $error("coefficient window is 2^18 words");

endmodule
