// tb_mem_model: behavioural model of main memory behind one LLC slice (the DRAM itself is not
// part of the design). One request at a time: a write is stored at once; a read returns its line
// LAT cycles after it was accepted. Data lives in tb_mem_pkg so all slices share one memory.
module tb_mem_model
  import casper_pkg::*;
#(
  parameter int LAT = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_write,
  input  line_addr_t req_line,
  input  line_data_t req_wdata,
  output logic       resp_valid,
  output line_data_t resp_data
);
  int         cnt;
  line_addr_t pend_line;

  assign req_ready = rst_n && (cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= 0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      pend_line  <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_write) tb_mem_pkg::write_line(req_line, req_wdata);
        else begin
          cnt       <= LAT;
          pend_line <= req_line;
        end
      end
      if (cnt > 0) begin
        cnt <= cnt - 1;
        if (cnt == 1) begin
          resp_valid <= 1'b1;
          resp_data  <= tb_mem_pkg::read_line(pend_line);
        end
      end
    end
  end
endmodule
