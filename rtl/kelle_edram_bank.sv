// kelle_edram_bank: one eDRAM bank, DEPTH words of WIDTH bits.
//
// Access port: en with we writes wdata at addr; en without we reads, rdata
// valid the next cycle. Refresh port: a refresh of one row is what the cell
// array needs to restore leaking charge, a read followed by a write back of
// the same data. ref_req/ref_addr are accepted (ref_gnt) only in a cycle
// without an access and while no refresh is in progress; the row is read
// into a buffer in that cycle and written back in the next one, when
// ref_done pulses. A normal write to the same row in the write-back cycle
// wins and the stale write-back is dropped. ref_count counts completed
// refreshes.
//
// The cell array is written as a synthesizable memory; charge leakage and
// retention failures are not modelled, so data never decays here. Refresh
// as read-and-write-back follows the paper; the port protocol is this
// design's choice.
module kelle_edram_bank #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata,
  input  logic             ref_req,
  input  logic [AW-1:0]    ref_addr,
  output logic             ref_gnt,
  output logic             ref_done,
  output logic [31:0]      ref_count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] ref_buf;
  logic [AW-1:0]    ref_addr_q;
  logic             wb_pending;

  assign ref_gnt = ref_req && !en && !wb_pending;

  // memory array: one port, shared by access, refresh read and write back
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end else if (ref_gnt) begin
      ref_buf <= mem[ref_addr];
    end else if (wb_pending) begin
      mem[ref_addr_q] <= ref_buf;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_pending <= 1'b0;
      ref_addr_q <= '0;
      ref_done   <= 1'b0;
      ref_count  <= '0;
    end else begin
      ref_done <= 1'b0;
      if (ref_gnt) begin
        wb_pending <= 1'b1;
        ref_addr_q <= ref_addr;
      end else if (wb_pending && !en) begin
        wb_pending <= 1'b0;
        ref_done   <= 1'b1;
        ref_count  <= ref_count + 1;
      end else if (wb_pending && en && we && addr == ref_addr_q) begin
        // newer data written: the buffered copy is stale, drop it
        wb_pending <= 1'b0;
        ref_done   <= 1'b1;
        ref_count  <= ref_count + 1;
      end
    end
  end
endmodule
