06
06
07
06
