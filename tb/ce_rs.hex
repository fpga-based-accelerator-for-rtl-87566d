02
05
02
05
05
02
