// simcom_top: SimCom inside an NVM module controller.
//
// Write path. A 64-byte write arrives with the approximable bit taken from
// the cache tag. Its address is looked up in the quality table. If the bit
// is set and the address lies in a registered region, the block goes to the
// adaptive approximate compressor with that region's AF. Otherwise it goes
// out on the pc_* port to an external precise compressor (an existing
// scheme such as FPC, outside this design). In both cases the block is
// written compressed, with the compressible bit set, only if its compressed
// size is below 64 bytes; otherwise the raw block is written with the
// compressible bit clear. The approximable and compressible bits travel with
// the write (nvm_wr_approx, nvm_wr_compressible) to the NVM's metadata area.
//
// Read path. Data read from the NVM comes back with both bits. Compressible
// bit clear: the data bypasses decompression. Both bits set: the approximate
// decompressor rebuilds the block. Only the compressible bit set: the data
// goes out on the pd_* port to the external precise decompressor.
//
// The split into write and read paths and the meaning of the two bits are
// the paper's; the valid/ready handshakes, one access in flight per path and
// treating a quality-table miss as precise are choices of this
// implementation.
//
// Timing: an approximable write takes 1 + 65 cycles of compression before
// nvm_wr_valid rises; a bypassed read answers on the cycle after it is
// accepted; an approximate read takes N+2 cycles (N = words of the mode).
// Every valid is held, with its payload stable, until its ready is seen.
// The handshake assertions use rst_n in disable iff, which lint reports as
// rst_n being used both as an asynchronous reset and as a synchronous
// signal; only the assertions read it that way.
module simcom_top
  import simcom_pkg::*;
#(
  parameter int BLOCK_BYTES = simcom_pkg::BLOCK_BYTES_DEFAULT,
  parameter int QT_ENTRIES  = 16,
  parameter int QT_IDX_W    = $clog2(QT_ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,

  // Quality table programming
  input  logic                     qt_cfg_we,
  input  logic [QT_IDX_W-1:0]      qt_cfg_idx,
  input  qt_entry_t                qt_cfg_entry,

  // Write access from the memory controller
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [ADDR_W-1:0]        wr_addr,
  input  logic [8*BLOCK_BYTES-1:0] wr_data,
  input  logic                     wr_approx,

  // Write to the NVM
  output logic                     nvm_wr_valid,
  input  logic                     nvm_wr_ready,
  output logic [ADDR_W-1:0]        nvm_wr_addr,
  output logic [8*BLOCK_BYTES-1:0] nvm_wr_data,
  output logic [SIZE_W-1:0]        nvm_wr_size,
  output logic                     nvm_wr_compressible,
  output logic                     nvm_wr_approx,
  output mode_e                    nvm_wr_mode,

  // Data read from the NVM
  input  logic                     nvm_rd_valid,
  output logic                     nvm_rd_ready,
  input  logic [ADDR_W-1:0]        nvm_rd_addr,
  input  logic [8*BLOCK_BYTES-1:0] nvm_rd_data,
  input  logic                     nvm_rd_compressible,
  input  logic                     nvm_rd_approx,

  // Read response to the memory controller
  output logic                     rd_rsp_valid,
  input  logic                     rd_rsp_ready,
  output logic [ADDR_W-1:0]        rd_rsp_addr,
  output logic [8*BLOCK_BYTES-1:0] rd_rsp_data,

  // External precise compressor
  output logic                     pc_req_valid,
  input  logic                     pc_req_ready,
  output logic [8*BLOCK_BYTES-1:0] pc_req_data,
  input  logic                     pc_rsp_valid,
  input  logic [8*BLOCK_BYTES-1:0] pc_rsp_data,
  input  logic [SIZE_W-1:0]        pc_rsp_size,

  // External precise decompressor
  output logic                     pd_req_valid,
  input  logic                     pd_req_ready,
  output logic [8*BLOCK_BYTES-1:0] pd_req_data,
  input  logic                     pd_rsp_valid,
  input  logic [8*BLOCK_BYTES-1:0] pd_rsp_data
);

  // ---------------------------------------------------------------- write
  typedef enum logic [2:0] {W_IDLE, W_COMP, W_PREQ, W_PRSP, W_OUT} wstate_e;

  wstate_e                  wstate;
  logic [ADDR_W-1:0]        w_addr;
  logic [8*BLOCK_BYTES-1:0] w_data;
  logic                     qt_hit;
  logic [AF_WIDTH-1:0]      qt_af;
  logic                     comp_start, comp_busy, comp_done, comp_ok;
  logic [8*BLOCK_BYTES-1:0] comp_data;
  logic [SIZE_W-1:0]        comp_size;
  mode_e                    comp_mode;

  simcom_quality_table #(.ENTRIES(QT_ENTRIES), .IDX_W(QT_IDX_W)) u_qt (
    .clk         (clk),
    .rst_n       (rst_n),
    .cfg_we      (qt_cfg_we),
    .cfg_idx     (qt_cfg_idx),
    .cfg_entry   (qt_cfg_entry),
    .lookup_addr (wr_addr),
    .lookup_hit  (qt_hit),
    .lookup_af   (qt_af)
  );

  assign wr_ready   = (wstate == W_IDLE);
  assign comp_start = wr_valid && wr_ready && wr_approx && qt_hit;

  simcom_adaptive_compressor #(.BLOCK_BYTES(BLOCK_BYTES)) u_comp (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (comp_start),
    .data         (wr_data),
    .af           (qt_af),
    .busy         (comp_busy),
    .done         (comp_done),
    .cdata        (comp_data),
    .comp_size    (comp_size),
    .compressible (comp_ok),
    .mode         (comp_mode)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate              <= W_IDLE;
      w_addr              <= '0;
      w_data              <= '0;
      nvm_wr_addr         <= '0;
      nvm_wr_data         <= '0;
      nvm_wr_size         <= '0;
      nvm_wr_compressible <= 1'b0;
      nvm_wr_approx       <= 1'b0;
      nvm_wr_mode         <= MODE_1C1B;
    end else begin
      case (wstate)
        W_IDLE: begin
          if (wr_valid) begin
            w_addr <= wr_addr;
            w_data <= wr_data;
            wstate <= comp_start ? W_COMP : W_PREQ;
          end
        end
        W_COMP: begin
          if (comp_done) begin
            nvm_wr_addr         <= w_addr;
            nvm_wr_approx       <= 1'b1;
            nvm_wr_mode         <= comp_mode;
            nvm_wr_compressible <= comp_ok;
            nvm_wr_data         <= comp_ok ? comp_data : w_data;
            nvm_wr_size         <= comp_ok ? comp_size : SIZE_W'(BLOCK_BYTES);
            wstate              <= W_OUT;
          end
        end
        W_PREQ: begin
          if (pc_req_ready) wstate <= W_PRSP;
        end
        W_PRSP: begin
          if (pc_rsp_valid) begin
            nvm_wr_addr         <= w_addr;
            nvm_wr_approx       <= 1'b0;
            nvm_wr_mode         <= MODE_1C1B;
            nvm_wr_compressible <= (int'(pc_rsp_size) < BLOCK_BYTES);
            nvm_wr_data         <= (int'(pc_rsp_size) < BLOCK_BYTES) ? pc_rsp_data : w_data;
            nvm_wr_size         <= (int'(pc_rsp_size) < BLOCK_BYTES) ? pc_rsp_size
                                                                     : SIZE_W'(BLOCK_BYTES);
            wstate              <= W_OUT;
          end
        end
        W_OUT: begin
          if (nvm_wr_ready) wstate <= W_IDLE;
        end
        default: wstate <= W_IDLE;
      endcase
    end
  end

  assign nvm_wr_valid = (wstate == W_OUT);
  assign pc_req_valid = (wstate == W_PREQ);
  assign pc_req_data  = w_data;

  // ----------------------------------------------------------------- read
  typedef enum logic [2:0] {R_IDLE, R_DEC, R_PREQ, R_PRSP, R_OUT} rstate_e;

  rstate_e                  rstate;
  logic [8*BLOCK_BYTES-1:0] r_data;
  logic                     dec_start, dec_busy, dec_done;
  logic [8*BLOCK_BYTES-1:0] dec_data;

  assign nvm_rd_ready = (rstate == R_IDLE);
  assign dec_start    = nvm_rd_valid && nvm_rd_ready && nvm_rd_compressible && nvm_rd_approx;

  simcom_decompressor #(.BLOCK_BYTES(BLOCK_BYTES)) u_dec (
    .clk   (clk),
    .rst_n (rst_n),
    .start (dec_start),
    .cdata (nvm_rd_data),
    .busy  (dec_busy),
    .done  (dec_done),
    .data  (dec_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate      <= R_IDLE;
      r_data      <= '0;
      rd_rsp_addr <= '0;
      rd_rsp_data <= '0;
    end else begin
      case (rstate)
        R_IDLE: begin
          if (nvm_rd_valid) begin
            rd_rsp_addr <= nvm_rd_addr;
            r_data      <= nvm_rd_data;
            if (!nvm_rd_compressible) begin
              rd_rsp_data <= nvm_rd_data;   // bypass
              rstate      <= R_OUT;
            end else if (nvm_rd_approx) begin
              rstate      <= R_DEC;
            end else begin
              rstate      <= R_PREQ;
            end
          end
        end
        R_DEC: begin
          if (dec_done) begin
            rd_rsp_data <= dec_data;
            rstate      <= R_OUT;
          end
        end
        R_PREQ: begin
          if (pd_req_ready) rstate <= R_PRSP;
        end
        R_PRSP: begin
          if (pd_rsp_valid) begin
            rd_rsp_data <= pd_rsp_data;
            rstate      <= R_OUT;
          end
        end
        R_OUT: begin
          if (rd_rsp_ready) rstate <= R_IDLE;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  assign rd_rsp_valid = (rstate == R_OUT);
  assign pd_req_valid = (rstate == R_PREQ);
  assign pd_req_data  = r_data;

  // ----------------------------------------------------------- handshakes
  // A raised valid stays up, with a stable payload, until it is accepted.
  a_nvm_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    nvm_wr_valid && !nvm_wr_ready |=> nvm_wr_valid && $stable(nvm_wr_data) && $stable(nvm_wr_addr));
  a_rd_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid && !rd_rsp_ready |=> rd_rsp_valid && $stable(rd_rsp_data));
  a_pc_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pc_req_valid && !pc_req_ready |=> pc_req_valid && $stable(pc_req_data));
  a_pd_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pd_req_valid && !pd_req_ready |=> pd_req_valid && $stable(pd_req_data));
  // The compressor and decompressor are only started when idle.
  a_comp_idle: assert property (@(posedge clk) disable iff (!rst_n) comp_start |-> !comp_busy);
  a_dec_idle:  assert property (@(posedge clk) disable iff (!rst_n) dec_start |-> !dec_busy);

endmodule
