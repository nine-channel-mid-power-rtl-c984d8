01555
01555
01554
01550
01540
01500
01400
01000
02aaa
02aaa
02aa8
02aa0
02a80
02a00
02800
02000
