// tpi_if: the port bundle between the event-to-MLP-input unit (E2MLP) and
// the timestamp+polarity image memory (TPI).
//
// Two read ports, one per column parity: read port p only addresses pixels
// whose x coordinate has x[0] == p, so the address carries y and x[8:1]. A read
// issued with read_vld[p]=1 returns read_data[p] on the next cycle. One write
// port addresses any pixel by full (x, y). ready is low while the memory is
// being cleared after reset; no access may be issued then.
interface tpi_if;
  import mlpf_pkg::*;

  typedef struct packed {
    logic [YW-1:0] y;
    logic [XW-2:0] xh;   // x >> 1; x[0] is the port number
  } rd_addr_t;

  typedef struct packed {
    logic [YW-1:0] y;
    logic [XW-1:0] x;
  } wr_addr_t;

  rd_addr_t  read_addr [2];
  logic      read_vld  [2];
  tpi_word_t read_data [2];
  wr_addr_t  write_addr;
  logic      write_vld;
  tpi_word_t write_data;
  logic      ready;

  modport master (output read_addr, read_vld, write_addr, write_vld, write_data,
                  input  read_data, ready);
  modport slave  (input  read_addr, read_vld, write_addr, write_vld, write_data,
                  output read_data, ready);
endinterface
