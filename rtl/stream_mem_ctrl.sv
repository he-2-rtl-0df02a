// stream_mem_ctrl: streaming memory controller between the xPU and the xMU.
//
// Moves rows of ROW words between the xPU and the HBM of the xMU, one row per
// cycle when nothing stalls. A job is started with `start` and finishes with
// a `done` pulse. Three job kinds:
//   J_UNIT2HBM : rows produced by a compute unit (addressed with src_row,
//                data on src_data in the same cycle, e.g. an NTTU read port)
//                are written to HBM as they are read: this is how ModUp
//                results stream to the xMU in the intermediate-results-
//                flowing (IRF) dataflow without being buffered whole.
//   J_SPM2HBM  : rows read from the scratchpad through a NoC client port
//                (request held until granted, data two cycles after the
//                grant) are written to HBM.
//   J_HBM2SPM  : rows read from HBM (read data one cycle after hbm_rreq)
//                are written to the scratchpad, one row in flight; this serves the evk-flowing
//                (EVF) part of the hybrid dataflow, where one evk is
//                preloaded into the xPU, and ciphertexts coming back.
// Rows are src_base+i -> dst_base+i for i < nrows. `rows_moved` counts rows
// over all jobs. The paper names the controller and its streaming role; the
// job format and handshakes are this design's own.
module stream_mem_ctrl
  import he2_pkg::*;
#(
  parameter int ROW = 32,
  parameter int GAW = 20,     // scratchpad global row address
  parameter int HAW = 26,     // HBM row address
  parameter int RW  = 12      // unit row address
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [1:0]     kind,          // 0 J_UNIT2HBM, 1 J_SPM2HBM, 2 J_HBM2SPM
  input  logic [HAW-1:0] src_base,
  input  logic [HAW-1:0] dst_base,
  input  logic [HAW-1:0] nrows,
  output logic           busy,
  output logic           done,
  // unit source
  output logic [RW-1:0]  src_row,
  input  word_t          src_data [ROW],
  // scratchpad via NoC
  output logic           c_req,
  output logic           c_we,
  output logic [GAW-1:0] c_addr,
  output word_t          c_wdata [ROW],
  input  logic           c_gnt,
  input  logic           c_rvalid,
  input  word_t          c_rdata [ROW],
  // HBM side
  output logic           hbm_wvalid,
  output logic [HAW-1:0] hbm_waddr,
  output word_t          hbm_wdata [ROW],
  output logic           hbm_rreq,
  output logic [HAW-1:0] hbm_raddr,
  input  logic           hbm_rvalid,
  input  word_t          hbm_rdata [ROW],
  output logic [31:0]    rows_moved
);
  localparam logic [1:0] J_UNIT2HBM = 2'd0, J_SPM2HBM = 2'd1, J_HBM2SPM = 2'd2;

  logic [1:0]     kind_r;
  logic [HAW-1:0] sb, db, n;
  logic [HAW-1:0] issued, retired;

  wire issuing = busy && (issued != n);

  // HBM-to-scratchpad: one row in flight; the returned row waits in pbuf until
  // the NoC grants its write (a row every three cycles at best)
  logic  hold, pend;
  word_t pbuf [ROW];

  always_comb begin
    src_row   = RW'(sb + issued);
    c_req     = 1'b0;
    c_we      = 1'b0;
    c_addr    = GAW'(sb + issued);
    c_wdata   = pbuf;
    hbm_rreq  = 1'b0;
    hbm_raddr = sb + issued;
    unique case (kind_r)
      J_SPM2HBM: c_req = issuing;
      J_HBM2SPM: hbm_rreq = issuing && !hold;
      default: ;
    endcase
    // J_HBM2SPM: write the returning HBM row into the scratchpad
    if (kind_r == J_HBM2SPM && busy && pend) begin
      c_req  = 1'b1;
      c_we   = 1'b1;
      c_addr = GAW'(db + retired);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; kind_r <= '0; sb <= '0; db <= '0; n <= '0;
      issued <= '0; retired <= '0; hbm_wvalid <= 1'b0; hbm_waddr <= '0;
      rows_moved <= '0; hold <= 1'b0; pend <= 1'b0;
      for (int i = 0; i < ROW; i++) pbuf[i] <= '0;
      for (int i = 0; i < ROW; i++) hbm_wdata[i] <= '0;
    end else begin
      done <= 1'b0;
      hbm_wvalid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; kind_r <= kind; sb <= src_base; db <= dst_base; n <= nrows;
        issued <= '0; retired <= '0; hold <= 1'b0;
      end else if (busy) begin
        unique case (kind_r)
          J_UNIT2HBM: if (issuing) begin
            hbm_wvalid <= 1'b1; hbm_waddr <= db + issued; hbm_wdata <= src_data;
            issued <= issued + 1'b1; retired <= retired + 1'b1;
            rows_moved <= rows_moved + 1;
          end
          J_SPM2HBM: begin
            if (issuing && c_gnt) issued <= issued + 1'b1;
            if (c_rvalid) begin
              hbm_wvalid <= 1'b1; hbm_waddr <= db + retired; hbm_wdata <= c_rdata;
              retired <= retired + 1'b1; rows_moved <= rows_moved + 1;
            end
          end
          default: begin   // J_HBM2SPM
            if (issuing && !hold) begin issued <= issued + 1'b1; hold <= 1'b1; end
            if (hbm_rvalid) begin pend <= 1'b1; pbuf <= hbm_rdata; end
            if (pend && c_gnt) begin
              pend <= 1'b0; retired <= retired + 1'b1; rows_moved <= rows_moved + 1; hold <= 1'b0;
            end
          end
        endcase
        if (retired == n) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
